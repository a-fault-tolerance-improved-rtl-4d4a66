// tmr_system_tb: end-to-end test of the TMR voting stage at its default size.
//
// The three function modules are modelled by the testbench: every vector
// draws the value a fault-free module would produce, and each copy then
// delivers it either intact or inverted, according to an external fault
// mask (0 to 3 faulty copies). Independently, the voter's internal node M
// can be forced to the wrong value to model an internal voter fault. One
// vector is applied per nanosecond; the stage is combinational, so V is
// checked in the same step.
//
// Phase 1 walks every combination of fault-free value (2), external fault
// mask (8) and internal fault (2). Phase 2 applies 2000 random vectors with
// random faults. Expected values are worked out here without the voter's
// formula: the majority is found by counting ones, and with a faulty M the
// output is the majority except for the module output patterns 001 and 101,
// where it is the inverse. Each mechanism is counted and must occur:
// fault-free voting, a single module fault masked, multiple module faults,
// an internal fault masked, an internal fault masked together with a module
// fault, and an internal fault exposed. The fault masking ratio over the
// eight patterns with a faulty M must be 6/8.
module tmr_system_tb;
  timeunit 1ns;
  timeprecision 1ps;

  logic x, y, z, v;
  int checks = 0;
  int failures = 0;

  int n_fault_free = 0;
  int n_single_masked = 0;
  int n_multiple = 0;
  int n_internal_masked = 0;
  int n_internal_and_module_masked = 0;
  int n_internal_exposed = 0;
  int fmr_cases = 0;
  int fmr_masked = 0;
  logic [7:0] fmr_seen = '0;

  localparam int RandomVectors = 2000;

  tmr_system dut (.x(x), .y(y), .z(z), .v(v));

  function automatic int count_ones(logic [2:0] b);
    return int'(b[2]) + int'(b[1]) + int'(b[0]);
  endfunction

  // Apply one vector: fault-free value, external fault mask {x,y,z}, and
  // whether the voter's internal node is faulty. Checks V and counts.
  task automatic apply(logic golden, logic [2:0] ext_fault, logic int_fault);
    logic       maj;
    logic       expected;
    logic [2:0] pattern;
    x = golden ^ ext_fault[2];
    y = golden ^ ext_fault[1];
    z = golden ^ ext_fault[0];
    pattern = {x, y, z};
    maj = count_ones(pattern) >= 2;
    if (int_fault) begin
      force dut.g_bit[0].u_voter.m = !((x == 1'b1) || (y == 1'b1));
      expected = (pattern == 3'b001 || pattern == 3'b101) ? !maj : maj;
    end else begin
      expected = maj;
    end
    #1;
    checks++;
    if (v !== expected) begin
      failures++;
      $display("FAIL golden=%0b faults=%03b internal=%0b xyz=%03b v=%0b expected %0b",
               golden, ext_fault, int_fault, pattern, v, expected);
    end
    // at most one faulty module and a healthy voter: output must be the true value
    if (!int_fault && count_ones(ext_fault) <= 1) begin
      checks++;
      if (v !== golden) begin
        failures++;
        $display("FAIL single fault not masked: golden=%0b xyz=%03b v=%0b", golden, pattern, v);
      end
    end
    // mechanism counters
    if (!int_fault && ext_fault == 3'b000) n_fault_free++;
    if (!int_fault && count_ones(ext_fault) == 1 && v == golden) n_single_masked++;
    if (count_ones(ext_fault) >= 2) n_multiple++;
    if (int_fault && v == maj) begin
      n_internal_masked++;
      if (ext_fault != 3'b000) n_internal_and_module_masked++;
    end
    if (int_fault && v != maj) n_internal_exposed++;
    // fault masking ratio over the eight patterns with a faulty M
    if (int_fault && !fmr_seen[pattern]) begin
      fmr_seen[pattern] = 1'b1;
      fmr_cases++;
      if (v == maj) fmr_masked++;
    end
    if (int_fault) release dut.g_bit[0].u_voter.m;
  endtask

  task automatic require(int count, string what);
    checks++;
    $display("%-40s %0d", what, count);
    if (count == 0) begin
      failures++;
      $display("FAIL mechanism never occurred: %s", what);
    end
  endtask

  initial begin
    // phase 1: exhaustive
    for (int g = 0; g < 2; g++)
      for (int f = 0; f < 8; f++)
        for (int i = 0; i < 2; i++)
          apply(1'(g), 3'(f), 1'(i));
    // phase 2: random vectors, mostly healthy modules
    for (int n = 0; n < RandomVectors; n++) begin
      logic [2:0] ext_fault;
      ext_fault = 3'b000;
      for (int k = 0; k < 3; k++)
        if ($urandom_range(9) == 0) ext_fault[k] = 1'b1;
      apply(1'($urandom), ext_fault, $urandom_range(9) == 0);
    end

    require(n_fault_free, "fault-free votes");
    require(n_single_masked, "single module faults masked");
    require(n_multiple, "multiple module faults");
    require(n_internal_masked, "internal voter faults masked");
    require(n_internal_and_module_masked, "internal + module faults masked");
    require(n_internal_exposed, "internal voter faults exposed");
    checks++;
    $display("fault masking ratio %0d/%0d", fmr_masked, fmr_cases);
    if (fmr_cases != 8 || fmr_masked != 6) begin
      failures++;
      $display("FAIL fault masking ratio %0d/%0d, expected 6/8", fmr_masked, fmr_cases);
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
