// tmr_system_wide_tb: bit-wise voting of a multi-bit TMR voting stage.
//
// Runs the voting stage with 16-bit function module outputs. For each of
// 1500 random vectors it draws a fault-free word and, per bit, picks how
// many copies are wrong there (mostly none, sometimes one, now and then two
// or three) and which ones. Expected: every bit with at most one wrong copy
// carries the fault-free value, every bit with two or more wrong copies
// carries the inverse. This checks that each bit has its own voter and that
// faults in different copies on different bits are all masked at once.
// One vector per nanosecond, checked in the same step (combinational).
module tmr_system_wide_tb;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int unsigned W = 16;
  localparam int Vectors = 1500;

  logic [W-1:0] x, y, z, v;
  int checks = 0;
  int failures = 0;
  int n_mixed_copies = 0;  // vectors whose masked faults sat in different copies

  tmr_system #(.WIDTH(W)) dut (.x(x), .y(y), .z(z), .v(v));

  initial begin
    for (int n = 0; n < Vectors; n++) begin
      logic [W-1:0] golden, fx, fy, fz, expected;
      logic [2:0]   copies_hit;
      golden = W'($urandom);
      fx = '0; fy = '0; fz = '0;
      expected = golden;
      copies_hit = '0;
      for (int b = 0; b < W; b++) begin
        int r;
        r = int'($urandom_range(99));
        if (r < 20) begin          // one wrong copy: masked
          case ($urandom_range(2))
            0: begin fx[b] = 1'b1; copies_hit[0] = 1'b1; end
            1: begin fy[b] = 1'b1; copies_hit[1] = 1'b1; end
            default: begin fz[b] = 1'b1; copies_hit[2] = 1'b1; end
          endcase
        end else if (r < 23) begin // two wrong copies: vote is wrong
          case ($urandom_range(2))
            0: begin fx[b] = 1'b1; fy[b] = 1'b1; end
            1: begin fy[b] = 1'b1; fz[b] = 1'b1; end
            default: begin fx[b] = 1'b1; fz[b] = 1'b1; end
          endcase
          expected[b] = !golden[b];
        end else if (r < 24) begin // all three wrong
          fx[b] = 1'b1; fy[b] = 1'b1; fz[b] = 1'b1;
          expected[b] = !golden[b];
        end
      end
      if ($countones(copies_hit) >= 2) n_mixed_copies++;
      x = golden ^ fx;
      y = golden ^ fy;
      z = golden ^ fz;
      #1;
      checks++;
      if (v !== expected) begin
        failures++;
        $display("FAIL x=%h y=%h z=%h v=%h expected %h", x, y, z, v, expected);
      end
    end
    checks++;
    if (n_mixed_copies == 0) begin
      failures++;
      $display("FAIL no vector had masked faults in two different copies");
    end
    $display("vectors with masked faults spread over several copies: %0d", n_mixed_copies);
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
