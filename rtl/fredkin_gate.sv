// fredkin_gate: 3x3 reversible Fredkin (controlled swap) gate.
//
// P = A, Q = (not A and B) xor (A and C), R = (not A and C) xor (A and B):
// when A is 1, B and C change places. Quantum cost 5. The memory uses it in
// the address decoder for every address bit beyond the second one, fed
// (select, 0, x) so that Q = select and x, R = not select and x.
// Combinational.
//
// The equation and cost are the published ones; using it in the decoder is
// this design's own choice (see rev_decoder).
module fredkin_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic p,
  output logic q,
  output logic r
);
  assign p = a;
  assign q = (~a & b) ^ (a & c);
  assign r = (~a & c) ^ (a & b);
endmodule
