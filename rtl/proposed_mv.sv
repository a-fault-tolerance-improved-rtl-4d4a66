// proposed_mv: fault-tolerant 2-of-3 majority voter for TMR.
//
// Votes on the outputs X, Y and Z of three identical function modules and
// drives V = majority(X, Y, Z). It is built from two gates only: G1
// (g1_or) forms the internal node M = X + Y, and G2 (g2_complex) forms
// V = M*Z + X*Y + Y*Z. Substituting M gives XZ + YZ + XY + YZ, the classical
// majority. Unlike a classical AND-OR voter, whose three internal AND
// outputs can each corrupt the result, this voter has one internal node,
// and a fault on it (0->1 or 1->0, transient or permanent) is masked for six
// of the eight input patterns, with or without a faulty function module.
// Only inputs 001 and 101 combined with a fault on M give a wrong output.
// Counted over the eight patterns each with a faulty M, 6 of 8 fault cases
// are masked (fault masking ratio 0.75).
//
// Interface: x, y, z in; v out, one bit each. Timing: purely combinational,
// two gate levels, no clock and no reset. The gate structure follows the
// published schematic exactly. The published voter was mapped to cells with
// its gate structure preserved, because the fault behaviour above belongs to
// this structure and not to any circuit computing a majority. Here G1 and G2
// are separate modules marked keep_hierarchy and M is marked keep, so that
// synthesis does not merge them; the attributes and the split into modules
// are this implementation's way of doing that. M also stays a named net on
// which a fault can be injected in simulation.
module proposed_mv (
  input  logic x,
  input  logic y,
  input  logic z,
  output logic v
);
  timeunit 1ns;
  timeprecision 1ps;

  (* keep *) logic m;  // the voter's single internal node

  g1_or u_g1 (
    .x(x),
    .y(y),
    .m(m)
  );

  g2_complex u_g2 (
    .m(m),
    .x(x),
    .y(y),
    .z(z),
    .v(v)
  );
endmodule
