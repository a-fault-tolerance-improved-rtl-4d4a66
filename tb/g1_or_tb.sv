// g1_or_tb: exhaustive self-checking test of gate G1.
//
// Applies all four input pairs, one per nanosecond, and compares M with the
// OR truth table written out as a literal (M is 0 only for X = Y = 0).
// A watchdog ends the run with a failure if it does not finish in time.
module g1_or_tb;
  timeunit 1ns;
  timeprecision 1ps;

  logic x, y, m;
  int checks = 0;
  int failures = 0;

  // OR truth table indexed by {x, y}
  localparam logic [3:0] ExpM = 4'b1110;

  g1_or dut (.x(x), .y(y), .m(m));

  initial begin
    for (int i = 0; i < 4; i++) begin
      {x, y} = 2'(i);
      #1;
      checks++;
      if (m !== ExpM[i]) begin
        failures++;
        $display("FAIL x=%0b y=%0b m=%0b expected %0b", x, y, m, ExpM[i]);
      end
    end
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
