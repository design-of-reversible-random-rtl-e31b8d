// rev_we_ms_dff_tb: random (c, w, d) sequence against a master-slave
// reference: while c is high the master takes (w ? d : stored bit), while c
// is low the slave takes the master. Checks q, the C and W pass-through lines
// and the three garbage lines (g1 = w ? not q : d, g2 = w ? d : q,
// g3 = master bit). Counts writes that landed (w high when c fell), writes
// abandoned (w high during c high, low when c fell) and refreshes.
module rev_we_ms_dff_tb;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  int n_commit = 0;
  int n_abandon = 0;
  int n_refresh = 0;

  logic c, w, d, q, c_out, w_out;
  logic [2:0] g;
  logic m_ref, s_ref, prev_c, wrote;

  rev_we_ms_dff dut (.d(d), .c(c), .w(w), .q(q), .c_out(c_out), .w_out(w_out), .garbage(g));

  task automatic check(input string what, input logic got, input logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s c=%0b w=%0b d=%0b got=%0b exp=%0b", what, c, w, d, got, exp);
    end
  endtask

  initial begin
    // bring the cell to a known state: load 0 through master then slave
    c = 1'b1; w = 1'b1; d = 1'b0;
    #2 c = 1'b0;
    #2 w = 1'b0;
    m_ref = 1'b0; s_ref = 1'b0; prev_c = 1'b0; wrote = 1'b0;
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      c = 1'($urandom_range(0, 1));
      w = 1'($urandom_range(0, 1));
      d = 1'($urandom_range(0, 1));
      #1;
      if (c) begin
        m_ref = w ? d : s_ref;
        if (w) wrote = 1'b1;
        else if (!w) n_refresh++;
      end else begin
        if (prev_c) begin
          if (w && wrote) n_commit++;
          else if (wrote) n_abandon++;
        end
        s_ref = m_ref;
        wrote = 1'b0;
      end
      prev_c = c;
      check("q", q, s_ref);
      check("c_out", c_out, c);
      check("w_out", w_out, w);
      check("g1", g[0], w ? ~s_ref : d);
      check("g2", g[1], w ? d : s_ref);
      check("g3", g[2], m_ref);
    end
    // directed: write 1 then drop w before c falls -> stored bit unchanged
    @(negedge clk); c = 1'b1; w = 1'b1; d = ~s_ref; #1;
    @(negedge clk); w = 1'b0; #1;
    @(negedge clk); c = 1'b0; #1;
    check("abandoned write keeps bit", q, s_ref);
    n_abandon++;
    // directed: hold w across the falling c -> stored
    @(negedge clk); c = 1'b1; w = 1'b1; d = ~s_ref; #1;
    check("q holds old bit while c high", q, s_ref);
    @(negedge clk); c = 1'b0; #1;
    check("committed write", q, ~s_ref);
    n_commit++;
    checks++;
    if (n_commit < 2 || n_abandon < 2 || n_refresh == 0) begin
      failures++;
      $display("FAIL coverage commit=%0d abandon=%0d refresh=%0d", n_commit, n_abandon, n_refresh);
    end
    $display("commits=%0d abandoned=%0d refreshes=%0d", n_commit, n_abandon, n_refresh);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
