// multi_feynman_gate: WIDTH-line multi-input Feynman gate ("2^n bit FG").
//
// Lines 0..WIDTH-2 pass straight through; the last line carries the XOR of
// all WIDTH inputs. It is reversible (the last input can be recovered by
// XORing the outputs) and leaves WIDTH-1 garbage outputs. The RAM closes each
// data column with one: at most one of its inputs is non-zero during a read,
// so the XOR is that row's bit. Combinational.
//
// The design states its function and garbage count only; the pass-through
// plus one XOR line is the simplest gate with that count.
module multi_feynman_gate #(
  parameter int unsigned WIDTH = 4
) (
  input  logic [WIDTH-1:0] x,
  output logic [WIDTH-1:0] y
);
  if (WIDTH > 1) begin : g_pass
    assign y[WIDTH-2:0] = x[WIDTH-2:0];
  end
  assign y[WIDTH-1] = ^x;
endmodule
