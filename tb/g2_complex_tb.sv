// g2_complex_tb: self-checking test of gate G2 against the voter's
// truth-cum-fault enumeration.
//
// Driving M directly from the testbench is the same as injecting a fault on
// the voter's internal node: for each input pattern XYZ the gate is run once
// with the correct M = X + Y and once with M inverted. The expected V of all
// 16 cases is the published enumeration, written below as a table; each case
// is also classified against the majority of X, Y, Z (counted, not computed
// by the gate's formula), and the fault masking ratio, masked faulty-M cases
// over all faulty-M cases, must come out as 6/8 = 0.75.
module g2_complex_tb;
  timeunit 1ns;
  timeprecision 1ps;

  logic m, x, y, z, v;
  int checks = 0;
  int failures = 0;
  int fault_cases = 0;
  int masked = 0;

  // Expected V for the correct M and for the inverted M, indexed by {x,y,z}.
  //                          pattern: 111 110 101 100 011 010 001 000
  localparam logic [7:0] ExpVGood  = 8'b1___1___1___0___1___0___0___0;
  localparam logic [7:0] ExpVFault = 8'b1___1___0___0___1___0___1___0;

  g2_complex dut (.m(m), .x(x), .y(y), .z(z), .v(v));

  function automatic logic majority_by_count(logic a, logic b, logic c);
    int ones;
    ones = int'(a) + int'(b) + int'(c);
    return ones >= 2;
  endfunction

  initial begin
    for (int i = 0; i < 8; i++) begin
      {x, y, z} = 3'(i);
      // fault-free: M = X + Y
      m = (x == 1'b1) || (y == 1'b1);
      #1;
      checks++;
      if (v !== ExpVGood[i] || v !== majority_by_count(x, y, z)) begin
        failures++;
        $display("FAIL fault-free xyz=%0b%0b%0b v=%0b", x, y, z, v);
      end
      // internal fault: M flipped (0->1 or 1->0)
      m = !m;
      #1;
      checks++;
      fault_cases++;
      if (v !== ExpVFault[i]) begin
        failures++;
        $display("FAIL faulty M xyz=%0b%0b%0b m=%0b v=%0b expected %0b", x, y, z, m, v, ExpVFault[i]);
      end
      if (v == majority_by_count(x, y, z)) masked++;
    end
    // fault masking ratio: 6 of the 8 faulty-M cases are masked
    checks++;
    if (masked * 100 / fault_cases != 75) begin
      failures++;
      $display("FAIL fault masking ratio %0d/%0d, expected 6/8", masked, fault_cases);
    end
    $display("fault masking ratio %0d/%0d", masked, fault_cases);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
