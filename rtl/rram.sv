// rram: 2^ADDR_BITS x DATA_BITS reversible random access memory (top level).
//
// Every part is built from reversible gates: each gate has as many outputs as
// inputs and maps them one to one, so outputs that carry nothing useful leave
// the circuit as garbage instead of being dropped inside a gate.
//
// Structure (rows r = 0 .. 2^n-1, columns j = 0 .. m-1):
//   * rev_decoder turns the address into 2^n one-hot row selects.
//   * Row r has a Toffoli gate fed (W, sel[r], 0). It passes W on to the next
//     row's Toffoli (P), puts sel[r] on the row's C line (Q) and W.sel[r] on
//     the row's W line (R). The W leaving the last row is garbage.
//   * Column j has a chain of Feynman gates fed (D_j, 0), one per row; each
//     passes D_j down the column and drops a copy into the row's cell.
//   * Cell (r, j) is a rev_we_ms_dff. The C and W lines pass through the
//     cells of a row from left to right.
//   * Column j ends in a multi_feynman_gate over the 2^n rows; its XOR line
//     is Q_j.
//
// Read path (GATE_READ). As published, each cell's Q goes straight into the
// column's XOR gate, which then yields the parity of the whole column, while
// the read is specified as returning the selected row. With GATE_READ = 1
// (default) each cell's Q first passes a Toffoli gate fed (C, Q, 0), so only
// the selected row reaches the XOR and q is that row's word; that Toffoli
// also passes the C line on to the next cell. This adds 2^n * m Toffoli gates
// (quantum cost 5 each) to the published totals. GATE_READ = 0 builds the
// read path as drawn (q = XOR of every row).
//
// Operation and timing. The design has no clock: each row's cells are
// clocked by the row's select line, as latches.
//   * Read: put the address on addr with w low. q shows the row's word
//     after the combinational delay, and the row's masters reload their own
//     bits (refresh).
//   * Write: put the address and data on addr and d and raise w. The row's
//     masters load d, but the word is stored only when the row is deselected,
//     so change addr to another row while w and d are still held, then lower
//     w. The row selected while w falls keeps its old word, because its
//     masters reload their bits as soon as w is low. Lowering w before
//     changing the address abandons the write.
//   * q of the selected row shows the word stored before the current write.
// No reset: stored words start unknown.
//
// Garbage. The garbage port gathers the outputs that carry nothing the
// memory needs, in this order from bit 0: the decoder's n-1 chained address
// bits, the W leaving the last row's Toffoli gate, the three garbage lines of
// every cell (cell (r, j) at 3*(r*m + j)), the 2^n-1 pass-through lines of
// every column gate (column j at j*(2^n-1)) and, with GATE_READ = 1, the Q
// pass-through of every read Toffoli (cell (r, j) at r*m + j). Without the
// read gating its width is m*(4*2^n - 1) + n, the published garbage count.
// Lines that leave the ends of the D copy chains and of the C and W row
// lines are not in that count and are left unconnected.
//
// The decoder, Toffoli rows, Feynman copy chains, cells and XOR gates, and
// their wiring, follow the published array. The gated read, the
// write-commit rule (a consequence of clocking cells with the row select),
// the index order and the default sizes (n = 2, m = 4; no sizes are
// published) are this RTL's. Latch and circular-logic warnings come from
// the cells, see rev_we_ms_dff.
module rram #(
  parameter int unsigned ADDR_BITS = 2,
  parameter int unsigned DATA_BITS = 4,
  parameter bit          GATE_READ = 1'b1,
  localparam int unsigned GARBAGE_BITS = rram_pkg::ram_garbage(ADDR_BITS, DATA_BITS)
                                         + (GATE_READ ? (1 << ADDR_BITS) * DATA_BITS : 0)
) (
  input  logic [ADDR_BITS-1:0]    addr,
  input  logic                    w,
  input  logic [DATA_BITS-1:0]    d,
  output logic [DATA_BITS-1:0]    q,
  output logic [GARBAGE_BITS-1:0] garbage
);
  localparam int unsigned ROWS   = 1 << ADDR_BITS;
  // Offsets of the groups in the garbage vector.
  localparam int unsigned G_ROW  = ADDR_BITS - 1;            // after the decoder's
  localparam int unsigned G_CELL = G_ROW + 1;                // after the row chain's
  localparam int unsigned G_COL  = G_CELL + 3 * ROWS * DATA_BITS;
  localparam int unsigned G_READ = G_COL + DATA_BITS * (ROWS - 1);

  logic [ROWS-1:0]                  sel;
  logic [ADDR_BITS-1:0]             dec_garbage;
  logic [ROWS:0]                    w_chain;            // W down the Toffoli column
  logic [ROWS-1:0][DATA_BITS:0]     c_line;             // C line along each row
  logic [ROWS-1:0][DATA_BITS:0]     w_line;             // W line along each row
  logic [DATA_BITS-1:0][ROWS:0]     d_chain;            // D_j down each column
  logic [ROWS-1:0][DATA_BITS-1:0]   d_cell;             // copy of D_j for cell (r, j)
  logic [ROWS-1:0][DATA_BITS-1:0]   q_cell;             // cell outputs
  logic [ROWS-1:0][DATA_BITS-1:0]   q_read;             // what reaches the column XOR
  logic [ROWS-1:0][DATA_BITS-1:0]   c_cell_out;         // C leaving each cell
  logic [DATA_BITS-1:0][ROWS-1:0]   col_in;
  logic [DATA_BITS-1:0][ROWS-1:0]   col_out;

  rev_decoder #(.N(ADDR_BITS)) u_dec (
    .addr   (addr),
    .sel    (sel),
    .garbage(dec_garbage)
  );

  assign w_chain[0] = w;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    toffoli_gate u_row_and (
      .a(w_chain[r]),
      .b(sel[r]),
      .c(1'b0),
      .p(w_chain[r+1]),
      .q(c_line[r][0]),
      .r(w_line[r][0])
    );

    for (genvar j = 0; j < DATA_BITS; j++) begin : g_col
      rev_we_ms_dff u_cell (
        .d      (d_cell[r][j]),
        .c      (c_line[r][j]),
        .w      (w_line[r][j]),
        .q      (q_cell[r][j]),
        .c_out  (c_cell_out[r][j]),
        .w_out  (w_line[r][j+1]),
        .garbage(garbage[G_CELL + 3 * (r * DATA_BITS + j) +: 3])
      );

      if (GATE_READ) begin : g_gate_read
        // Toffoli (C, Q, 0): R = C.Q reaches the column only for the
        // selected row; P carries C on to the next cell.
        toffoli_gate u_read (
          .a(c_cell_out[r][j]),
          .b(q_cell[r][j]),
          .c(1'b0),
          .p(c_line[r][j+1]),
          .q(garbage[G_READ + r * DATA_BITS + j]),
          .r(q_read[r][j])
        );
      end else begin : g_drawn_read
        assign c_line[r][j+1] = c_cell_out[r][j];
        assign q_read[r][j]   = q_cell[r][j];
      end
    end
  end

  for (genvar j = 0; j < DATA_BITS; j++) begin : g_data
    assign d_chain[j][0] = d[j];
    for (genvar r = 0; r < ROWS; r++) begin : g_copy
      feynman_gate u_copy (
        .a(d_chain[j][r]),
        .b(1'b0),
        .p(d_chain[j][r+1]),
        .q(d_cell[r][j])
      );
      assign col_in[j][r] = q_read[r][j];
    end

    multi_feynman_gate #(.WIDTH(ROWS)) u_col (
      .x(col_in[j]),
      .y(col_out[j])
    );
    assign q[j] = col_out[j][ROWS-1];
    assign garbage[G_COL + j * (ROWS - 1) +: (ROWS - 1)] = col_out[j][ROWS-2:0];
  end

  if (ADDR_BITS > 1) begin : g_dec_garbage
    assign garbage[G_ROW-1:0] = dec_garbage[ADDR_BITS-1:1];
  end
  assign garbage[G_ROW] = w_chain[ROWS];

endmodule
