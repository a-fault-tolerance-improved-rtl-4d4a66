// g1_or: gate G1 of the fault-tolerant majority voter.
//
// A 2-input OR of the first two voter inputs. Its output M = X + Y is the
// only internal node of the voter; the second gate (g2_complex) uses it in
// the product term MZ. Because M is the single net between the two gates,
// it is the one place inside the voter where a stuck-at or single-event
// upset can strike, and the voter is built so that a wrong M corrupts the
// output for just two of the eight input patterns (001 and 101).
//
// Interface: x, y in; m out. Timing: purely combinational, one gate level.
// The gate type and its connections are those of the published voter.
// The keep_hierarchy attribute stops synthesis from merging this gate with
// its neighbour, so that the voter keeps its published gate structure.
(* keep_hierarchy *)
module g1_or (
  input  logic x,
  input  logic y,
  output logic m
);
  timeunit 1ns;
  timeprecision 1ps;

  assign m = x | y;
endmodule
