// mfrg2_gate: modified Fredkin gate 2 (MFRG2), a 3x3 reversible gate.
//
// P = not A, Q = (not A and B) xor (A and C), R = (not A and C) xor (A and B):
// a Fredkin gate that also inverts its control line on the way out. Quantum
// cost 5. It is the storage gate of the flip-flops: fed (CLK, D, fed-back Q)
// its R output is CLK.D + not CLK.Q, the gated D-latch equation, and its P
// output delivers not CLK, which clocks the slave half of a master-slave
// pair. Combinational.
//
// The equation and cost are those of the published gate, which is one of the
// two new gates of this design.
module mfrg2_gate (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic p,
  output logic q,
  output logic r
);
  assign p = ~a;
  assign q = (~a & b) ^ (a & c);
  assign r = (~a & c) ^ (a & b);
endmodule
