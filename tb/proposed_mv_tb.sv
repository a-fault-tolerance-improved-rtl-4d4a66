// proposed_mv_tb: self-checking test of the fault-tolerant majority voter.
//
// Three phases, one input vector per nanosecond (the 1 GHz rate used when
// the voter was characterised):
//   1. all eight input patterns with a fault-free voter, V checked against a
//      majority found by counting ones;
//   2. the same eight patterns with the internal node M forced to the wrong
//      value, V checked against the published truth-cum-fault enumeration
//      (wrong only for 001 and 101) and the fault masking ratio, masked
//      faulty-M cases over all of them, checked to be 6/8;
//   3. 1200 random vectors, fault-free, checked against the counted majority.
// The voter is combinational, so V is checked in the same step it is driven:
// zero cycles of latency. A watchdog ends a run that hangs.
module proposed_mv_tb;
  timeunit 1ns;
  timeprecision 1ps;

  logic x, y, z, v;
  int checks = 0;
  int failures = 0;
  int fault_cases = 0;
  int masked = 0;

  // Expected V with M inverted, indexed by {x,y,z} (published enumeration).
  //                          pattern: 111 110 101 100 011 010 001 000
  localparam logic [7:0] ExpVFault = 8'b1___1___0___0___1___0___1___0;
  localparam int RandomVectors = 1200;

  proposed_mv dut (.x(x), .y(y), .z(z), .v(v));

  function automatic logic majority_by_count(logic a, logic b, logic c);
    int ones;
    ones = int'(a) + int'(b) + int'(c);
    return ones >= 2;
  endfunction

  task automatic check_v(logic expected, string what);
    checks++;
    if (v !== expected) begin
      failures++;
      $display("FAIL %s xyz=%0b%0b%0b v=%0b expected %0b", what, x, y, z, v, expected);
    end
  endtask

  initial begin
    // phase 1: fault-free truth table
    for (int i = 0; i < 8; i++) begin
      {x, y, z} = 3'(i);
      #1;
      check_v(majority_by_count(x, y, z), "fault-free");
    end
    // phase 2: fault on the internal node M
    for (int i = 0; i < 8; i++) begin
      {x, y, z} = 3'(i);
      force dut.m = !((x == 1'b1) || (y == 1'b1));
      #1;
      check_v(ExpVFault[i], "faulty M");
      fault_cases++;
      if (v == majority_by_count(x, y, z)) masked++;
      release dut.m;
    end
    checks++;
    if (masked != 6 || fault_cases != 8) begin
      failures++;
      $display("FAIL fault masking ratio %0d/%0d, expected 6/8", masked, fault_cases);
    end
    $display("fault masking ratio %0d/%0d", masked, fault_cases);
    // phase 3: random vectors
    for (int n = 0; n < RandomVectors; n++) begin
      {x, y, z} = 3'($urandom);
      #1;
      check_v(majority_by_count(x, y, z), "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
