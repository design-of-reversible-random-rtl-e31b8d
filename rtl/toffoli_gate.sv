// toffoli_gate: 3x3 reversible Toffoli (controlled-controlled-NOT) gate.
//
// P = A, Q = B, R = (A and B) xor C; quantum cost 5. With C tied to 0 it is a
// reversible AND that also passes both operands on. In the RAM each row uses
// one to form (write enable AND row select). Combinational.
//
// The equation and cost are the published ones; only the Boolean function is
// modelled, not the gate's construction from quantum primitives.
module toffoli_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic p,
  output logic q,
  output logic r
);
  assign p = a;
  assign q = b;
  assign r = (a & b) ^ c;
endmodule
