// rev_dff: reversible gated D flip-flop with Q and not-Q outputs.
//
// Two gates. An MFRG2 gate receives CLK on A, D on B and the fed-back stored
// bit on C; its R output is CLK.D + not(CLK).Q, the characteristic equation
// of a gated D flip-flop, and its P output is not(CLK). A double Feynman
// gate fed (R, QN_OUT, 0) turns R into Q, a second line and a further copy of
// Q, which is the line fed back to the MFRG2 gate. With QN_OUT = 1 (default,
// the stand-alone flip-flop) the second line is not-Q; with QN_OUT = 0 it is
// another copy of Q, which is how the write-enable cell uses this flip-flop
// as its slave half (output qn then carries Q). Quantum cost 5 + 2 = 7, one
// garbage output (the MFRG2 Q output, g1).
//
// Timing: level sensitive. While clk is high the stored bit and q follow d;
// while clk is low they hold. The fed-back line is what stores the bit: here
// it is a latch (fb) that is transparent while clk is high, when the MFRG2
// gate routes B straight to R, and closed while clk is low, when the gate
// routes C back to R unchanged. The latch samples the gate's B input rather
// than its R output: the two are equal whenever the latch is open, and this
// keeps the model free of a zero-delay loop through the gate. The DFG copy
// that would close the loop (fb_line) is therefore left unconnected; it always
// equals fb.
//
// The gates and their wiring follow the published flip-flop; the QN_OUT
// option (a constant choice, no extra gate), the latch model
// of the feedback line and the power-up value (unknown; whatever the
// simulator starts with) are choices of this RTL. A latch is expected here.
module rev_dff #(
  parameter bit QN_OUT = 1'b1
) (
  input  logic clk,
  input  logic d,
  output logic q,
  output logic qn,
  output logic clk_n,
  output logic g1
);
  logic fb;        // stored bit: the fed-back Q line
  logic r;         // MFRG2 R output, the next state
  logic fb_line;   // DFG copy of Q that drives the feedback line

  mfrg2_gate u_mfrg2 (
    .a(clk),
    .b(d),
    .c(fb),
    .p(clk_n),
    .q(g1),
    .r(r)
  );

  double_feynman_gate u_dfg (
    .a(r),
    .b(QN_OUT),
    .c(1'b0),
    .p(q),
    .q(qn),
    .r(fb_line)
  );

  always_latch begin
    if (clk) fb = d;
  end

endmodule
