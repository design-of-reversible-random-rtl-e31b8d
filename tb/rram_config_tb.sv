// rram_config_tb: runs the rram protocol test on other configurations:
// a 2 x 2 RAM (1 address bit, the decoder is a single Feynman gate),
// an 8 x 5 RAM (3 address bits, the decoder's third stage of Fredkin gates)
// and the default 4 x 4 RAM with the read path as originally drawn
// (GATE_READ = 0: q is the XOR of every stored word).
module rram_config_tb;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  logic done_a, done_b, done_c;
  int ca, fa, ra, wa, xa;
  int cb, fb, rb, wb, xb;
  int cc, fc, rc, wc, xc;

  rram_exercise #(.N(1), .M(2), .GATE_READ(1'b1), .OPS(150)) u_a (
    .clk(clk), .done(done_a), .checks(ca), .failures(fa), .n_read(ra), .n_commit(wa), .n_abandon(xa));
  rram_exercise #(.N(3), .M(5), .GATE_READ(1'b1), .OPS(300)) u_b (
    .clk(clk), .done(done_b), .checks(cb), .failures(fb), .n_read(rb), .n_commit(wb), .n_abandon(xb));
  rram_exercise #(.N(2), .M(4), .GATE_READ(1'b0), .OPS(200)) u_c (
    .clk(clk), .done(done_c), .checks(cc), .failures(fc), .n_read(rc), .n_commit(wc), .n_abandon(xc));

  initial begin
    wait (done_a && done_b && done_c);
    checks   = ca + cb + cc + 1;
    failures = fa + fb + fc;
    if (ra == 0 || wa == 0 || xa == 0 || rb == 0 || wb == 0 || xb == 0 ||
        rc == 0 || wc == 0 || xc == 0) begin
      failures++;
      $display("FAIL coverage");
    end
    $display("2x2: reads=%0d writes=%0d abandoned=%0d", ra, wa, xa);
    $display("8x5: reads=%0d writes=%0d abandoned=%0d", rb, wb, xb);
    $display("4x4 as drawn: reads=%0d writes=%0d abandoned=%0d", rc, wc, xc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
