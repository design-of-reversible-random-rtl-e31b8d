// fredkin_gate_tb: exhaustive self-check of fredkin_gate.
//
// Drives all input patterns, compares every output with the gate's equation
// written out here, and checks that the outputs of different input patterns
// differ (the gate is reversible). A small clock only paces the patterns and
// drives the watchdog.
module fredkin_gate_tb;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  logic a, b, c;
  logic p, q, r;
  logic [2:0] exp_out;
  bit   [7:0] seen;

  fredkin_gate dut (.a(a), .b(b), .c(c), .p(p), .q(q), .r(r));

  task automatic check(input string what, input logic got, input logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s a=%0b b=%0b c=%0b got=%0b exp=%0b", what, a, b, c, got, exp);
    end
  endtask

  initial begin
    seen = '0;
    for (int v = 0; v < 8; v++) begin
      a = v[2];
      b = v[1];
      c = v[0];
      @(posedge clk);
      exp_out = {a, a ? c : b, a ? b : c};
      check("P", p, exp_out[2]);
      check("Q", q, exp_out[1]);
      check("R", r, exp_out[0]);
      checks++;
      if (seen[{p, q, r}]) begin
        failures++;
        $display("FAIL not reversible: output %0b%0b%0b repeats", p, q, r);
      end
      seen[{p, q, r}] = 1'b1;
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
