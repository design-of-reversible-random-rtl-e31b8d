// rram_exercise: reusable driver and checker for one rram configuration,
// used by rram_config_tb. It runs the write / read / abandoned-write protocol
// of rram_tb on a RAM of the given size against a reference array. With
// GATE_READ = 0 the expected read value is the XOR of every stored word, the
// behaviour of the read path as originally drawn. Raises done when finished
// and reports its check and failure counts and how many of each operation
// ran. The garbage port's width is checked against the published garbage
// count (plus one line per read gate when GATE_READ = 1).
module rram_exercise #(
  parameter int unsigned N         = 2,
  parameter int unsigned M         = 4,
  parameter bit          GATE_READ = 1'b1,
  parameter int unsigned OPS       = 200
) (
  input  logic clk,
  output logic done,
  output int   checks,
  output int   failures,
  output int   n_read,
  output int   n_commit,
  output int   n_abandon
);
  localparam int unsigned ROWS = 1 << N;

  logic [N-1:0] addr;
  logic         w;
  logic [M-1:0] d;
  logic [M-1:0] q;
  logic [M-1:0] mem_ref [ROWS];

  localparam int unsigned GBITS = rram_pkg::ram_garbage(N, M) + (GATE_READ ? (1 << N) * M : 0);
  logic [GBITS-1:0] garbage;

  rram #(.ADDR_BITS(N), .DATA_BITS(M), .GATE_READ(GATE_READ)) dut (
    .addr(addr), .w(w), .d(d), .q(q), .garbage(garbage)
  );

  function automatic logic [M-1:0] expected(input int unsigned a);
    logic [M-1:0] x;
    if (GATE_READ) return mem_ref[a];
    x = '0;
    for (int unsigned r = 0; r < ROWS; r++) x ^= mem_ref[r];
    return x;
  endfunction

  task automatic check(input string what, input logic [M-1:0] got, input logic [M-1:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL N=%0d M=%0d GATE_READ=%0b %s addr=%0d got=%h exp=%h",
               N, M, GATE_READ, what, addr, got, exp);
    end
  endtask

  task automatic do_read(input int unsigned a);
    @(negedge clk);
    w    = 1'b0;
    addr = N'(a);
    #1;
    check("read", q, expected(a));
    n_read++;
  endtask

  task automatic do_write(input int unsigned a, input logic [M-1:0] data);
    @(negedge clk);
    addr = N'(a);
    d    = data;
    w    = 1'b1;
    @(negedge clk);
    addr = N'((a + 1) % ROWS);
    #1;
    mem_ref[a] = data;
    @(negedge clk);
    w = 1'b0;
    n_commit++;
  endtask

  task automatic do_abandon(input int unsigned a, input logic [M-1:0] data);
    @(negedge clk);
    addr = N'(a);
    d    = data;
    w    = 1'b1;
    @(negedge clk);
    w = 1'b0;
    @(negedge clk);
    addr = N'((a + 1) % ROWS);
    n_abandon++;
    do_read(a);
  endtask

  initial begin
    done = 1'b0;
    checks = 0; failures = 0; n_read = 0; n_commit = 0; n_abandon = 0;
    addr = '0; w = 1'b0; d = '0;
    checks++;
    if ($bits(dut.garbage) != int'(N + M * (4 * ROWS - 1) + (GATE_READ ? ROWS * M : 0))) begin
      failures++;
      $display("FAIL garbage width %0d", $bits(dut.garbage));
    end
    for (int unsigned a = 0; a < ROWS; a++) do_write(a, M'($urandom));
    for (int unsigned a = 0; a < ROWS; a++) do_read(a);
    for (int i = 0; i < int'(OPS); i++) begin
      int unsigned op;
      int unsigned a;
      op = $urandom_range(0, 9);
      a  = $urandom_range(0, ROWS - 1);
      if (op < 4)      do_read(a);
      else if (op < 8) do_write(a, M'($urandom));
      else             do_abandon(a, M'($urandom));
    end
    done = 1'b1;
  end
endmodule
