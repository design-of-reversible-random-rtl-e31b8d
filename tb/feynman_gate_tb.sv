// feynman_gate_tb: exhaustive self-check of feynman_gate.
//
// Drives all input patterns, compares every output with the gate's equation
// written out here, and checks that the outputs of different input patterns
// differ (the gate is reversible). A small clock only paces the patterns and
// drives the watchdog.
module feynman_gate_tb;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  logic a, b, c;
  logic p, q, r;
  logic [2:0] exp_out;
  bit   [7:0] seen;

  feynman_gate dut (.a(a), .b(b), .p(p), .q(q)); assign r = 1'b0;

  task automatic check(input string what, input logic got, input logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s a=%0b b=%0b c=%0b got=%0b exp=%0b", what, a, b, c, got, exp);
    end
  endtask

  initial begin
    seen = '0;
    for (int v = 0; v < 4; v++) begin
      a = v[1];
      b = v[0];
      c = 1'b0;
      @(posedge clk);
      exp_out = {a, a ^ b, 1'b0};
      check("P", p, exp_out[2]);
      check("Q", q, exp_out[1]);
      checks++;
      if (seen[{p, q, 1'b0}]) begin
        failures++;
        $display("FAIL not reversible: output %0b%0b%0b repeats", p, q, r);
      end
      seen[{p, q, 1'b0}] = 1'b1;
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
