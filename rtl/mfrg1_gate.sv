// mfrg1_gate: modified Fredkin gate 1 (MFRG1), a 3x3 reversible gate.
//
// P = A, Q = (not A and B) xor (A and not C), R = (not A and C) xor (A and B).
// It behaves as a Fredkin gate whose C line is first XORed with A: for A = 0
// B and C pass straight through, for A = 1 they swap and the value leaving on
// Q is inverted. Quantum cost 4, one less than the Fredkin gate. Used twice
// in the 2-to-4 decoder (fed select, 0, x: Q = select and not x,
// R = not select and x) and as the write/refresh multiplexer of a memory cell
// (fed W, D, stored Q: R = W ? D : stored Q). Combinational.
//
// The equation and cost are those of the published gate, which is one of the
// two new gates of this design.
module mfrg1_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic p,
  output logic q,
  output logic r
);
  assign p = a;
  assign q = (~a & b) ^ (a & ~c);
  assign r = (~a & c) ^ (a & b);
endmodule
