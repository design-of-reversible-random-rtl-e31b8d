// feynman_gate: 2x2 reversible Feynman (controlled-NOT) gate.
//
// P = A, Q = A xor B. Quantum cost 1. With B tied to 0 it copies A onto two
// lines (the reversible way to fan a signal out); with B tied to 1 it gives A
// and not-A. Purely combinational, no timing of its own.
//
// The equation and cost are the published ones; only the Boolean function is
// modelled, not the gate's construction from quantum primitives.
module feynman_gate (
  input  logic a,
  input  logic b,
  output logic p,
  output logic q
);
  assign p = a;
  assign q = a ^ b;
endmodule
