// rram_cost_tb: checks the cost figures of rram_pkg. The per-gate quantum
// costs must add up to the published totals (flip-flop 7, memory cell 17,
// 2-to-4 decoder 9), and each closed-form total must equal the sum of its
// parts, counted part by part here, for n = 1..6 and m = 1..16:
//   gates   (2^n-1) decoder + 2^n Toffoli + 5.2^n.m cell gates
//           + 2^n.m Feynman copies + m column gates
//   garbage (n-1) decoder + 1 Toffoli + 3.2^n.m cells + m.(2^n-1) columns
//   cost    (4.2^n-7) + 5.2^n + 2^n.m + 17.2^n.m + m.2^n
module rram_cost_tb;
  import rram_pkg::*;

  int checks = 0;
  int failures = 0;

  task automatic check(input string what, input int unsigned got, input int unsigned exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got=%0d exp=%0d", what, got, exp);
    end
  endtask

  initial begin
    check("DFF cost", QC_DFF, 7);
    check("cell cost", QC_CELL, 17);
    check("cell gates", GATES_CELL, 5);
    check("cell garbage", GARB_CELL, 3);
    check("2-to-4 decoder cost", dec_qc(2), 9);
    check("2-to-4 decoder gates", dec_gates(2), 3);
    check("2-to-4 decoder garbage", dec_garbage(2), 1);
    check("2-to-4 decoder built cost", dec_qc_built(2), 9);
    check("3-to-8 decoder built cost", dec_qc_built(3), 9 + 4 * QC_FRG);
    check("decoder 2-to-4 from gates", QC_FG + 2 * QC_MFRG1, 9);
    for (int unsigned n = 1; n <= 6; n++) begin
      for (int unsigned m = 1; m <= 16; m++) begin
        int unsigned rows;
        rows = 1 << n;
        check("gates", ram_gates(n, m),
              (rows - 1) + rows + 5 * rows * m + rows * m + m);
        check("garbage", ram_garbage(n, m),
              (n - 1) + 1 + 3 * rows * m + m * (rows - 1));
        check("cost", ram_qc(n, m),
              (4 * rows - 7) + QC_TG * rows + rows * m + QC_CELL * rows * m + m * rows);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
