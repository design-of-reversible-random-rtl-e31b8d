// rram_tb: end-to-end test of the reversible RAM at its default size
// (4 words of 4 bits, gated read).
//
// A reference array models the memory. The test first writes every word,
// then runs a random mix of operations:
//   read      address on, w low: q must equal the stored word, and the
//             word must still be there afterwards (the row was refreshed)
//   write     address and data on, w high; the address then moves to another
//             row while w and d are held (this commits the write), then w
//             falls (the row selected at that moment keeps its word)
//   abandon   address and data on, w high, then w falls before the address
//             moves: nothing is stored
// While a write is pending, q must still show the row's old word. Each
// mechanism is counted and a failure is counted for any that never happened.
// On every read the garbage port is checked too: its width must be the
// published garbage count m(4.2^n-1)+n plus one line per read gate, and with
// w low its lines must carry the chained address bit, W, every cell's stored
// bit (cell garbage g2, g3 and the read gates) and D (cell garbage g1), and
// the selected row's bits on the column gates' pass-through lines.
// The RAM has no clock; the testbench clock only paces the steps.
module rram_tb;
  localparam int unsigned N    = 2;
  localparam int unsigned M    = 4;
  localparam int unsigned ROWS = 1 << N;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  int n_read = 0;
  int n_commit = 0;
  int n_keep_on_w_fall = 0;
  int n_abandon = 0;
  int n_old_during_write = 0;

  logic [N-1:0] addr;
  logic         w;
  logic [M-1:0] d;
  logic [M-1:0] q;
  logic [M-1:0] mem_ref [ROWS];

  localparam int unsigned GBITS  = rram_pkg::ram_garbage(N, M) + ROWS * M;
  localparam int unsigned G_CELL = N;
  localparam int unsigned G_COL  = G_CELL + 3 * ROWS * M;
  localparam int unsigned G_READ = G_COL + M * (ROWS - 1);
  logic [GBITS-1:0] garbage;

  rram dut (.addr(addr), .w(w), .d(d), .q(q), .garbage(garbage));

  task automatic check_bit(input string what, input logic got, input logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL garbage %s addr=%0d got=%0b exp=%0b", what, addr, got, exp);
    end
  endtask

  task automatic check_garbage();
    check_bit("decoder chain", garbage[0], addr[1]);
    check_bit("row chain W", garbage[1], w);
    for (int unsigned r = 0; r < ROWS; r++) begin
      for (int unsigned j = 0; j < M; j++) begin
        check_bit("cell g1", garbage[G_CELL + 3 * (r * M + j)],     d[j]);
        check_bit("cell g2", garbage[G_CELL + 3 * (r * M + j) + 1], mem_ref[r][j]);
        check_bit("cell g3", garbage[G_CELL + 3 * (r * M + j) + 2], mem_ref[r][j]);
        check_bit("read gate", garbage[G_READ + r * M + j], mem_ref[r][j]);
        if (r < ROWS - 1)
          check_bit("column gate", garbage[G_COL + j * (ROWS - 1) + r],
                    (r == addr) ? mem_ref[r][j] : 1'b0);
      end
    end
  endtask

  task automatic check(input string what, input logic [M-1:0] got, input logic [M-1:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s addr=%0d got=%h exp=%h", what, addr, got, exp);
    end
  endtask

  task automatic step();
    @(negedge clk);
  endtask

  task automatic do_read(input int unsigned a);
    step();
    w    = 1'b0;
    addr = N'(a);
    #1;
    check("read", q, mem_ref[a]);
    check_garbage();
    n_read++;
  endtask

  task automatic do_write(input int unsigned a, input logic [M-1:0] data, input bit track);
    int unsigned other;
    other = (a + 1 + $urandom_range(0, ROWS - 2)) % ROWS;
    step();
    addr = N'(a);
    d    = data;
    w    = 1'b1;
    #1;
    if (track) begin
      check("old word while write pending", q, mem_ref[a]);
      n_old_during_write++;
    end
    step();
    addr = N'(other);   // deselect with w still high: commits row a
    #1;
    mem_ref[a] = data;
    step();
    w = 1'b0;           // row 'other' reloads its own word
    #1;
    if (track) begin
      check("row selected when w falls keeps its word", q, mem_ref[other]);
      n_keep_on_w_fall++;
    end
    n_commit++;
  endtask

  task automatic do_abandon(input int unsigned a, input logic [M-1:0] data);
    int unsigned other;
    other = (a + 1) % ROWS;
    step();
    addr = N'(a);
    d    = data;
    w    = 1'b1;
    step();
    w = 1'b0;           // w falls first: master reloads the stored word
    step();
    addr = N'(other);
    #1;
    n_abandon++;
    do_read(a);         // must still hold the old word
  endtask

  initial begin
    checks++;
    if ($bits(garbage) != 78) begin
      failures++;
      $display("FAIL garbage width %0d, expected 4*(4*4-1)+2 + 16 = 78", $bits(garbage));
    end
    addr = '0;
    w    = 1'b0;
    d    = '0;
    // initialise every word
    for (int unsigned a = 0; a < ROWS; a++) begin
      do_write(a, M'($urandom), 1'b0);
    end
    for (int unsigned a = 0; a < ROWS; a++) do_read(a);
    for (int i = 0; i < 400; i++) begin
      int unsigned op;
      int unsigned a;
      op = $urandom_range(0, 9);
      a  = $urandom_range(0, ROWS - 1);
      if (op < 4)      do_read(a);
      else if (op < 8) do_write(a, M'($urandom), 1'b1);
      else             do_abandon(a, M'($urandom));
    end
    // all words distinct and read back: the read path returns one row only
    for (int unsigned a = 0; a < ROWS; a++) do_write(a, M'(a * 5 + 3), 1'b1);
    for (int unsigned a = 0; a < ROWS; a++) do_read(a);

    checks++;
    if (n_read == 0 || n_commit == 0 || n_keep_on_w_fall == 0 || n_abandon == 0 ||
        n_old_during_write == 0) begin
      failures++;
      $display("FAIL coverage");
    end
    $display("reads=%0d commits=%0d kept_on_w_fall=%0d abandoned=%0d old_during_write=%0d",
             n_read, n_commit, n_keep_on_w_fall, n_abandon, n_old_during_write);
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
