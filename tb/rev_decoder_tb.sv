// rev_decoder_tb: checks the reversible decoder at N = 1, 2, 3 and 4 over
// every address: exactly the line numbered by the address is high, and the
// garbage lines carry the chained address bits (bit 0 is 0). For N = 2 it
// also checks the two MFRG1 outputs of the first gate named in the 2-to-4
// drawing (A.not B and not A.B).
module rev_decoder_tb;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  logic [0:0]  a1;  logic [1:0]  s1;  logic [0:0] g1;
  logic [1:0]  a2;  logic [3:0]  s2;  logic [1:0] g2;
  logic [2:0]  a3;  logic [7:0]  s3;  logic [2:0] g3;
  logic [3:0]  a4;  logic [15:0] s4;  logic [3:0] g4;

  rev_decoder #(.N(1)) dut1 (.addr(a1), .sel(s1), .garbage(g1));
  rev_decoder #(.N(2)) dut2 (.addr(a2), .sel(s2), .garbage(g2));
  rev_decoder #(.N(3)) dut3 (.addr(a3), .sel(s3), .garbage(g3));
  rev_decoder #(.N(4)) dut4 (.addr(a4), .sel(s4), .garbage(g4));

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got=%h exp=%h", what, got, exp);
    end
  endtask

  initial begin
    for (int v = 0; v < 16; v++) begin
      a1 = 1'(v);
      a2 = 2'(v);
      a3 = 3'(v);
      a4 = 4'(v);
      @(posedge clk);
      if (v < 2) begin
        check("N1 sel", 32'(s1), 32'(1) << v);
        check("N1 garbage", 32'(g1), 0);
      end
      if (v < 4) begin
        check("N2 sel", 32'(s2), 32'(1) << v);
        check("N2 garbage", 32'(g2), 32'(a2 & 2'b10));
        // first MFRG1 of the 2-to-4 drawing: Q = A.not(B), R = not(A).B
        check("N2 gate0 Q", 32'(dut2.g_stage[1].g_gate[0].g_mfrg1.u_g.q), 32'(a2[1] & ~a2[0]));
        check("N2 gate0 R", 32'(dut2.g_stage[1].g_gate[0].g_mfrg1.u_g.r), 32'(~a2[1] & a2[0]));
      end
      if (v < 8) begin
        check("N3 sel", 32'(s3), 32'(1) << v);
        check("N3 garbage", 32'(g3), 32'(a3 & 3'b110));
      end
      check("N4 sel", 32'(s4), 32'(1) << v);
      check("N4 garbage", 32'(g4), 32'(a4 & 4'b1110));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
