// multi_feynman_gate_tb: exhaustive check of the multi-input Feynman gate at
// WIDTH 4 and 8: the low lines pass through, the top line is the XOR of all
// inputs, and no two inputs give the same output (reversibility).
module multi_feynman_gate_tb;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  logic [3:0] x4, y4;
  logic [7:0] x8, y8;
  bit   [255:0] seen8;

  multi_feynman_gate #(.WIDTH(4)) dut4 (.x(x4), .y(y4));
  multi_feynman_gate #(.WIDTH(8)) dut8 (.x(x8), .y(y8));

  initial begin
    seen8 = '0;
    for (int v = 0; v < 256; v++) begin
      x8 = 8'(v);
      x4 = 4'(v);
      @(posedge clk);
      // reference: count ones
      checks++;
      if (y8[7] !== ($countones(x8) % 2 == 1)) begin
        failures++;
        $display("FAIL W8 xor line x=%h y=%h", x8, y8);
      end
      checks++;
      if (y8[6:0] !== x8[6:0]) begin
        failures++;
        $display("FAIL W8 pass lines x=%h y=%h", x8, y8);
      end
      checks++;
      if (y4 !== {($countones(x4) % 2 == 1), x4[2:0]}) begin
        failures++;
        $display("FAIL W4 x=%h y=%h", x4, y4);
      end
      checks++;
      if (seen8[y8]) begin
        failures++;
        $display("FAIL W8 output %h repeats", y8);
      end
      seen8[y8] = 1'b1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
