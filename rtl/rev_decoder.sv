// rev_decoder: reversible N-to-2^N decoder built from 3x3 gates.
//
// How it works. A Feynman gate with its second input tied to 1 decodes the
// first address bit addr[0] into the pair (not addr[0], addr[0]). Every
// further address bit addr[k] then runs down a chain of 2^k three-line gates,
// one per output of the decoder so far. Each gate receives the select bit on
// A (passed on to the next gate through P), a constant 0 on B and one earlier
// output x on C, and splits x into the two new outputs "addr[k] and x" and
// "not addr[k] and x". The select bit leaving the end of each chain is a
// garbage output, so an N-bit decoder has 2^N - 1 gates and N - 1 garbage
// lines.
//
// The second address bit uses two MFRG1 gates exactly as in the published
// 2-to-4 decoder: MFRG1 fed (s, 0, x) gives s.not(x) and not(s).x, which are
// decoder outputs here because the two earlier outputs are each other's
// complement (quantum cost 1 + 4 + 4 = 9, one garbage line). That
// complement trick does not hold beyond two bits, so in this RTL the gates of
// stages 3..N are Fredkin gates fed (s, 0, x), whose outputs are s.x and
// not(s).x. This is a departure from the stated general construction (which
// names MFRG1 for every stage) chosen so that wider decoders are correct; it
// keeps the gate and garbage counts and costs 1 more per gate beyond stage 2.
//
// Interface: addr[0] is the bit decoded by the Feynman gate (B in the 2-to-4
// drawing) and addr[1] the bit chained through the MFRG1 gates (A), so
// sel[k] is high exactly when addr == k. garbage[k] (k >= 1) is the
// chained copy of addr[k]; garbage[0] is 0 because the first stage has no
// garbage. Purely combinational: depth 1 for N=1, 1 + 2 + ... gates.
module rev_decoder #(
  parameter int unsigned N = 2
) (
  input  logic [N-1:0]      addr,
  output logic [(1<<N)-1:0] sel,
  output logic [N-1:0]      garbage
);
  // All stage outputs, level k (k = 0..N-1) holding 2^(k+1) lines at bit
  // offset 2^(k+1) - 2; line j of level k is high when addr[k:0] == j.
  localparam int unsigned LVBITS = (2 << N) - 2;
  logic [LVBITS-1:0] lv;

  // Stage 0: 1-to-2 decoder, FG(addr[0], 1) -> (addr[0], not addr[0]).
  feynman_gate u_fg (
    .a(addr[0]),
    .b(1'b1),
    .p(lv[1]),
    .q(lv[0])
  );
  assign garbage[0] = 1'b0;

  for (genvar k = 1; k < N; k++) begin : g_stage
    localparam int unsigned PREV = (1 << k);       // outputs of level k-1
    localparam int unsigned POFF = (1 << k) - 2;   // offset of level k-1
    localparam int unsigned OFF  = (2 << k) - 2;   // offset of level k
    logic [PREV:0] s;                               // select bit along the chain
    assign s[0] = addr[k];
    // The chain visits the earlier lines from the highest down, so for k = 1
    // the first MFRG1 takes the Feynman gate's P output, as drawn.
    for (genvar i = 0; i < PREV; i++) begin : g_gate
      localparam int unsigned J = PREV - 1 - i;
      if (k == 1) begin : g_mfrg1
        // Q = s.not(x): x is line J, its complement is line 1-J, so Q is
        // line 2 + (1-J); R = not(s).x is line J.
        mfrg1_gate u_g (
          .a(s[i]),
          .b(1'b0),
          .c(lv[POFF+J]),
          .p(s[i+1]),
          .q(lv[OFF+PREV+(1-J)]),
          .r(lv[OFF+J])
        );
      end else begin : g_frg
        fredkin_gate u_g (
          .a(s[i]),
          .b(1'b0),
          .c(lv[POFF+J]),
          .p(s[i+1]),
          .q(lv[OFF+PREV+J]),
          .r(lv[OFF+J])
        );
      end
    end
    assign garbage[k] = s[PREV];
  end

  assign sel = lv[LVBITS-1 -: (1<<N)];

  // Exactly one row select is high for every address.
  always_comb begin
    assert (sel != '0 && (sel & (sel - 1'b1)) == '0)
      else $error("rev_decoder: row selects not one-hot: %b", sel);
  end

endmodule
