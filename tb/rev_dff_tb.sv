// rev_dff_tb: random clk/d sequence against a gated D-latch reference
// (q follows d while clk is high and holds while it is low). Also checks
// qn = not q, clk_n = not clk and the garbage line (which equals d).
// A second instance with QN_OUT = 0 (the slave configuration of the memory
// cell) must give Q on both outputs. Counts how often the latch was seen
// following and holding.
module rev_dff_tb;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  int n_follow = 0;
  int n_hold = 0;

  logic en, d, q, qn, en_n, g1;
  logic ref_q;
  bit   known;

  logic q0, q0b, en_n0, g10;

  rev_dff dut (.clk(en), .d(d), .q(q), .qn(qn), .clk_n(en_n), .g1(g1));
  rev_dff #(.QN_OUT(1'b0)) dut0 (.clk(en), .d(d), .q(q0), .qn(q0b), .clk_n(en_n0), .g1(g10));

  task automatic check(input string what, input logic got, input logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s en=%0b d=%0b got=%0b exp=%0b", what, en, d, got, exp);
    end
  endtask

  initial begin
    known = 1'b0;
    en = 1'b0;
    d = 1'b0;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      en = 1'($urandom_range(0, 1));
      d  = 1'($urandom_range(0, 1));
      #1;
      if (en) begin
        ref_q = d;
        known = 1'b1;
      end
      if (known) begin
        if (en) n_follow++;
        else    n_hold++;
        check("q", q, ref_q);
        check("qn", qn, ~ref_q);
        check("QN_OUT=0 q", q0, ref_q);
        check("QN_OUT=0 second Q", q0b, ref_q);
      end
      check("clk_n", en_n, ~en);
      check("g1", g1, d);
    end
    checks++;
    if (n_follow == 0 || n_hold == 0) begin
      failures++;
      $display("FAIL coverage follow=%0d hold=%0d", n_follow, n_hold);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
