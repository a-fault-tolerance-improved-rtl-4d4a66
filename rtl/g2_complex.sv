// g2_complex: gate G2 of the fault-tolerant majority voter.
//
// A single complex (AND-OR) gate computing V = M*Z + X*Y + Y*Z, where M is
// the output of gate G1 (M = X + Y). With a correct M this is the 2-of-3
// majority XY + YZ + XZ. The point of the structure is that the XY and YZ
// terms do not depend on M: if M is flipped by a fault, V still equals the
// majority unless the inputs are 001 (M 0->1 forces V to 1) or 101
// (M 1->0 forces V to 0).
//
// Interface: m, x, y, z in; v out. Timing: purely combinational; in a
// standard-cell flow this is one complex cell. The sum of products is written
// as published; factoring it into a compact static-CMOS cell, e.g.
// Z*(M + Y) + X*Y, is left to synthesis and is this implementation's note,
// not part of the published description.
// The keep_hierarchy attribute stops synthesis from merging this gate with
// its neighbour, so that the voter keeps its published gate structure.
(* keep_hierarchy *)
module g2_complex (
  input  logic m,
  input  logic x,
  input  logic y,
  input  logic z,
  output logic v
);
  timeunit 1ns;
  timeprecision 1ps;

  assign v = (m & z) | (x & y) | (y & z);
endmodule
