// rev_we_ms_dff: write-enable master-slave D flip-flop, the one-bit cell of
// the reversible RAM.
//
// Five reversible gates (quantum cost 4 + 5 + 1 + 5 + 2 = 17, three garbage
// outputs g1..g3):
//   MFRG1 (W, D, Q)            R = W ? D : Q   write/refresh multiplexer;
//                              P passes W on, Q is garbage g1
//   MFRG2 (CLK, mux, m)        master latch gate: R = CLK ? mux : m;
//                              P = not CLK, Q is garbage g2
//   FG    (R, 0)               two copies of the master bit: one back to the
//                              master gate, one to the slave
//   MFRG2 (not CLK, m, s)      slave latch gate: R = not CLK ? m : s;
//                              P = CLK again (passed on), Q is garbage g3
//   DFG   (R, 0, 0)            three copies of Q: back to the MFRG1 gate,
//                              out as the cell's Q, back to the slave gate
// The last two gates are the stand-alone gated D flip-flop (rev_dff), which
// this cell instantiates as its slave with the DFG's middle constant at 0.
//
// Timing: the master is transparent while c (CLK) is high and the slave while
// it is low, so the cell is a falling-edge flip-flop on c. While c is high the
// master loads D if w is high and reloads the stored bit if w is low (refresh)
// and q shows the bit stored before. When c falls the slave takes the master's
// bit. A write therefore lands only if w is still high when c falls; lowering
// w first while c is high undoes it, because the master reloads the old bit.
// In the RAM, c is the row select and w is (W and row select).
//
// Modelling: each fed-back line (the FG copy into the master gate, the DFG
// copy into the slave gate) is a level-sensitive latch, open when its gate
// passes the B input through to R. The latch samples that B input (the
// multiplexer output for the master, the master bit for the slave), which
// equals R whenever the latch is open; the two copy lines that would close a
// zero-delay loop through a gate (m_line here, fb_line in rev_dff) are left
// unconnected. The master and slave latches still form a loop (the master
// loads the slave's bit while refreshing, the slave loads the master's),
// which a linter reports as circular logic; the two are never open at the same time, so the loop
// never carries a value round and settles at once. That warning and the two
// latch warnings are expected.
//
// The gates, constants 0 on the FG, the pass-through of CLK and W and the
// garbage count follow the published cell. The DFG constants (0, 0), which
// give three copies of Q and no not-Q, the slave being clocked from the
// master's P output, the latch model and the unknown power-up value are
// choices of this RTL.
module rev_we_ms_dff (
  input  logic       d,
  input  logic       c,
  input  logic       w,
  output logic       q,
  output logic       c_out,
  output logic       w_out,
  output logic [2:0] garbage
);
  logic mux;      // MFRG1 R: W ? D : Q
  logic q_fb;     // DFG P: stored bit fed back to the MFRG1 gate
  logic c_n;      // master MFRG2 P: not CLK, clocks the slave
  logic m_r;      // master MFRG2 R
  logic m_st;     // master latch (master feedback line)
  logic m_line;   // FG P: copy of the master bit for the master feedback line
  logic m_copy;   // FG Q: copy of the master bit for the slave

  mfrg1_gate u_mux (
    .a(w),
    .b(d),
    .c(q_fb),
    .p(w_out),
    .q(garbage[0]),
    .r(mux)
  );

  mfrg2_gate u_master (
    .a(c),
    .b(mux),
    .c(m_st),
    .p(c_n),
    .q(garbage[1]),
    .r(m_r)
  );

  feynman_gate u_copy (
    .a(m_r),
    .b(1'b0),
    .p(m_line),
    .q(m_copy)
  );

  // Slave half: the gated D flip-flop (MFRG2 + DFG) clocked by not CLK, its
  // DFG fed (R, 0, 0) so that both P and Q carry the stored bit. Its MFRG2
  // P output restores CLK, which is passed on to the next cell.
  rev_dff #(.QN_OUT(1'b0)) u_slave (
    .clk  (c_n),
    .d    (m_copy),
    .q    (q_fb),
    .qn   (q),
    .clk_n(c_out),
    .g1   (garbage[2])
  );

  always_latch begin
    if (c) m_st = mux;
  end


endmodule
