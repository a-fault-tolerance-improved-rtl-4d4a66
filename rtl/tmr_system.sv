// tmr_system: voting stage of a triple modular redundancy (TMR) system.
//
// A TMR system runs three identical copies of a function module and passes
// their outputs X, Y and Z through a majority voter, so that the output V
// stays correct while at least two copies agree. The function modules can
// be any circuit; they sit outside this module and their outputs are its
// ports. Each output bit has its own fault-tolerant voter (proposed_mv),
// which keeps masking a module fault in most cases even when the voter's
// own internal node is faulty at the same time.
//
// Parameter WIDTH is the width of one function module's output. The
// published system votes on a single bit, which is the default; the
// bit-wise replication for WIDTH > 1 is this implementation's choice.
// Interface: x, y, z in and v out, WIDTH bits each. Timing: purely
// combinational, two gate levels from any input to v.
module tmr_system #(
  parameter int unsigned WIDTH = 1
) (
  input  logic [WIDTH-1:0] x,
  input  logic [WIDTH-1:0] y,
  input  logic [WIDTH-1:0] z,
  output logic [WIDTH-1:0] v
);
  timeunit 1ns;
  timeprecision 1ps;

  for (genvar i = 0; i < WIDTH; i++) begin : g_bit
    proposed_mv u_voter (
      .x(x[i]),
      .y(y[i]),
      .z(z[i]),
      .v(v[i])
    );
  end
endmodule
