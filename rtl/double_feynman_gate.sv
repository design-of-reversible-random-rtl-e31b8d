// double_feynman_gate: 3x3 reversible double Feynman gate (DFG).
//
// P = A, Q = A xor B, R = A xor C: two CNOTs sharing the control A, quantum
// cost 2. In the flip-flops it turns one latch output into two or three
// copies (B = C = 0) or into Q and not-Q (B = 1, C = 0). Combinational.
//
// The equation and cost are the published ones; only the Boolean function is
// modelled, not the gate's construction from quantum primitives.
module double_feynman_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic p,
  output logic q,
  output logic r
);
  assign p = a;
  assign q = a ^ b;
  assign r = a ^ c;
endmodule
