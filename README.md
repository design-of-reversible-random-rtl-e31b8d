# A reversible random access memory in SystemVerilog

This is RTL for a small random access memory built entirely from **reversible
logic gates**. A reversible gate has as many outputs as inputs, and it maps
input patterns to output patterns one to one. So no information is thrown away
inside a gate. Landauer's principle links erased information to dissipated
heat, which makes reversible circuits a candidate for very low-power and
quantum hardware. The price is that every value must be carried somewhere:

- a signal that fans out has to be copied explicitly by a gate;
- constants (0 or 1) are fed in where a gate needs an extra line;
- results nobody needs leave the circuit as **garbage outputs**.

Designs like this one are compared by three numbers: the number of gates, the
number of garbage outputs, and the **quantum cost**. Quantum cost is the
number of 1x1 and 2x2 quantum primitives (NOT, CNOT, controlled-V,
controlled-V+) needed to build the circuit.

The design follows the reversible RAM of Md. Selim Al Mamun and Syed Monowar
Hossain, "Design of Reversible Random Access Memory". Its building blocks are:

- two modified Fredkin gates (MFRG1 and MFRG2);
- a decoder made from them;
- a D flip-flop with a write enable, made from them;
- an array that combines these into a 2^n-word by m-bit memory.

The RTL models each gate as its Boolean function and wires the gates together
exactly as the structure prescribes. The quantum-level construction of each
gate is not modelled. The design choices and the places where this RTL departs
from the published design are listed under
[Departures and choices](#departures-and-choices).

## The gate library

Every gate module is purely combinational. The costs are quantum costs.

| module                | lines | function                                                   | cost | used for |
|-----------------------|-------|------------------------------------------------------------|------|----------|
| `feynman_gate`        | 2     | P = A, Q = A xor B                                         | 1    | copy a line (B = 0), invert it (B = 1) |
| `double_feynman_gate` | 3     | P = A, Q = A xor B, R = A xor C                            | 2    | two or three copies of a flip-flop output |
| `toffoli_gate`        | 3     | P = A, Q = B, R = A.B xor C                                | 5    | AND of W and a row select; read gating |
| `fredkin_gate`        | 3     | P = A; if A then Q = C, R = B else Q = B, R = C            | 5    | decoder stages beyond the second |
| `mfrg1_gate`          | 3     | P = A; if A then Q = not C, R = B else Q = B, R = C        | 4    | 2-to-4 decoder; write/refresh multiplexer |
| `mfrg2_gate`          | 3     | P = not A; if A then Q = C, R = B else Q = B, R = C        | 5    | the storage gate of both latches |
| `multi_feynman_gate`  | WIDTH | y[i] = x[i] for i < WIDTH-1, y[WIDTH-1] = XOR of all x     | -    | merges a column into one output bit |

MFRG1 and MFRG2 are the two new gates of this design, both variations of the
Fredkin gate.

MFRG1 is a Fredkin gate whose C line is first XORed with A
(MFRG1(A, B, C) = Fredkin(A, B, A xor C)). It is one primitive cheaper than
the Fredkin gate.

MFRG2 is a Fredkin gate that also inverts its control line on the way out. Two
properties make it suit a latch:

- Fed (CLK, D, Q), its R output is CLK.D + not CLK.Q, which is the equation of
  a gated D latch.
- Its P output is not CLK, which is what a second, opposite-phase latch needs.

## Address decoder (`rev_decoder`)

The decoder turns N address bits into 2^N one-hot row selects.

- **First address bit.** A Feynman gate with B = 1 decodes `addr[0]` into the
  pair (not `addr[0]`, `addr[0]`).
- **Each further bit k.** `addr[k]` runs down a chain of 2^k three-line gates,
  one for each output produced so far. Each gate takes the select bit on A and
  passes it on through P. It takes 0 on B and one earlier output x on C. From x
  it makes the two new outputs "`addr[k]` and x" and "not `addr[k]` and x".
- **Garbage.** The select bit that leaves the end of each chain is garbage.

An N-bit decoder therefore has 2^N - 1 gates and N - 1 garbage outputs.

For the second bit the published design uses two MFRG1 gates. An MFRG1 fed
(s, 0, x) gives s.not(x) and not(s).x. These are proper decoder outputs only
because the two earlier outputs are each other's complement. The 2-to-4
decoder therefore costs 1 + 4 + 4 = 9 and has one garbage line.

That trick does not carry over to a third bit. The earlier outputs are then
minterms, and s.not(x) is no longer a minterm. A decoder built from MFRG1
gates throughout would light several outputs at once. In this RTL, stages 3
and up therefore use Fredkin gates fed (s, 0, x), which give s.x and
not(s).x. The gate and garbage counts stay the same. The quantum cost is 1
higher for each gate past the second stage (`dec_qc_built` in `rram_pkg`).

`sel[k]` is high when `addr == k`. `garbage[k]` (k >= 1) is the chained copy of
`addr[k]`, and `garbage[0]` is 0.

## Storage

### Gated D flip-flop (`rev_dff`)

An MFRG2 gate fed (CLK, D, Q) computes the next state on R. A double Feynman
gate fed (R, 1, 0) turns R into:

- Q;
- not Q;
- a second copy of Q, which is fed back to the MFRG2 gate's C input.

This costs 5 + 2 = 7 with one garbage output (the MFRG2 Q output, which always
equals D). Despite its name, the circuit is level sensitive: q follows d while
clk is high and holds while clk is low.

### Write-enable master-slave cell (`rev_we_ms_dff`)

The one-bit memory cell is five gates, with cost 17 and three garbage outputs:

```
   W ──► MFRG1 (W, D, Q) ── R = W ? D : Q ──► MFRG2 (CLK, mux, m) ─ R ─► FG (R, 0) ──┬─► back to master C
                 │ P = W (passed on)                 │ P = not CLK                     │
                 │ Q = g1                            │ Q = g2                          ▼
                 │                                   └──────────► MFRG2 (not CLK, m, s) ─ R ─► DFG (R, 0, 0)
                 │                                                  │ P = CLK (passed on)      │ copies of Q:
                 │                                                  │ Q = g3                   ├─► back to MFRG1 C
                 └──────────────────────────────────────────────────────────────────────────── ├─► cell output q
                                                                                               └─► back to slave C
```

- The master latch (MFRG2 + FG) is transparent while CLK is high.
- The slave latch (MFRG2 + DFG) is clocked by the master's P output, not CLK,
  so it is transparent while CLK is low. The slave is the gated D flip-flop
  above: `rev_we_ms_dff` instantiates `rev_dff` with `QN_OUT = 0`, which feeds
  the DFG (R, 0, 0), so both of the flip-flop's outputs carry Q.

Together the two latches make a flip-flop that captures on the **falling** edge
of CLK.

The MFRG1 gate in front of the master is a multiplexer:

- W high: the master loads D.
- W low: the master reloads the bit the slave holds (a refresh).

The cell passes CLK and W on unchanged (the P outputs of the slave MFRG2 and of
the MFRG1), so a row of cells can be chained.

### How the latches are modelled

In the circuit, each bit is stored on a **feedback line**: a copy of a latch
gate's output that runs back into the same gate's C input. When CLK routes C
to R, the line holds its own value.

The RTL models each feedback line as an `always_latch`. The latch is open
exactly when its gate routes the B input to R, and it samples that B input.
The B input equals R whenever the latch is open. Modelling it this way avoids a
zero-delay loop through the gate. The copy-gate outputs that would have closed
that loop (`fb_line` in `rev_dff`, `m_line` in `rev_we_ms_dff`) are left
unconnected: they always equal the latch value.

One loop remains, and it is inherent to a master-slave pair:

- the master loads the slave's bit when refreshing;
- the slave loads the master's bit.

Verilator reports this loop as circular logic (UNOPTFLAT). Synthesis reports
the latches. Both reports are expected. The two latches are never open at the
same time, so the loop never carries a value round, and it settles in one pass.
No storage element has a reset, so the simulator chooses the power-up contents.

## The memory array (`rram`)

For 2^n rows r and m columns j, `rram` contains:

- **Decoder.** A `rev_decoder` drives the row selects `sel[r]`.
- **Row gate.** Each row has a Toffoli gate fed (W, `sel[r]`, 0).
  - P passes W on to the next row's Toffoli gate. The W leaving the last row is
    garbage.
  - Q puts `sel[r]` on the row's **C line**, which clocks the row's cells.
  - R puts W.`sel[r]` on the row's **W line**, which is the cells' write
    enable.
- **Data copies.** Each column has a chain of Feynman gates fed (D_j, 0), one
  for each row. Each gate passes D_j further down and drops a copy into the
  row's cell.
- **Cells.** Cell (r, j) is a `rev_we_ms_dff`. The C and W lines pass from
  cell to cell along the row.
- **Column output.** Each column ends in a `multi_feynman_gate` across the 2^n
  rows. Its XOR line is `q[j]`.

Ports of `rram`:

| port      | dir | width        | meaning |
|-----------|-----|--------------|---------|
| `addr`    | in  | `ADDR_BITS`  | word address |
| `w`       | in  | 1            | 1 = write, 0 = read and refresh |
| `d`       | in  | `DATA_BITS`  | write data |
| `q`       | out | `DATA_BITS`  | read data |
| `garbage` | out | see below    | garbage lines of every gate |

### Read path: `GATE_READ`

In the published array, each cell's Q goes straight into its column's XOR gate.
That XOR is the parity of the whole column, not the word of the selected row.
The stated intent is that the outputs carry the selected row, so this RTL
follows the intent:

- **`GATE_READ = 1` (default).** Each cell's Q first passes a Toffoli gate fed
  (C, Q, 0). Only the selected row reaches the XOR, so `q` is that row's word.
  The Toffoli's P output carries C on to the next cell. This adds 2^n·m
  Toffoli gates (quantum cost 5 each) to the published totals.
- **`GATE_READ = 0`.** Builds the path as drawn. `q` is then the XOR of every
  stored word.

### Operating the memory

The memory has no clock. A row's cells are clocked by the row's own select
line, so **a row stores a word when it is deselected**. Only one row is ever
selected, so the address change is the commit. A write is therefore
controlled by the order in which W and the address change.

| step | `addr` | `w` | `d`  | effect |
|------|--------|-----|------|--------|
| read | A      | 0   | -    | after the gate delay, `q` = word A; row A's masters reload their own bits (refresh) |
| write 1 | A   | 1   | data | row A's masters load `data`; `q` still shows the old word A |
| write 2 | B≠A | 1   | data | row A is deselected with W high: **word A = data is committed**; row B's masters now hold `data` |
| write 3 | B   | 0   | -    | row B's masters reload row B's own word; nothing changes in row B |

If `w` falls while A is still selected, the masters reload the old word and
the write is abandoned. The row that is selected when `w` falls always keeps
its word. `d` must stay stable until the address has moved.

### Cost figures (`rram_pkg`)

The package holds the per-gate costs and the published closed-form totals for
a 2^n x m memory:

- gates: 2^n(6m+2) + m - 1;
- garbage outputs: m(4·2^n - 1) + n;
- quantum cost: 2^n(19m+9) - 7.

For the default 4 x 4 memory the gate formula gives 107. That is exactly the
structure above without the read gating: 3 decoder gates, 4 row Toffoli gates,
80 cell gates, 16 data copies and 4 column gates. With `GATE_READ = 1` there
are 16 more gates.

The `multi_feynman_gate` here needs 2^n - 1 CNOTs, where the published cost
counts 2^n.

### The garbage port

`rram` brings its garbage lines out on `garbage`, so the interface is what a
reversible circuit would actually present. From bit 0 the port holds:

| lines | what they carry |
|-------|-----------------|
| n - 1 | the decoder's chained address bits `addr[1..n-1]` |
| 1 | the W leaving the last row's Toffoli gate |
| 3 per cell | the cell's g1, g2, g3, at 3·(r·m + j). With `w` low these are D_j, the stored bit and the stored bit. |
| 2^n - 1 per column | the pass-through lines of the column gate, at n + 3·2^n·m + j·(2^n - 1). These carry the read-gated bits of rows 0..2^n-2. |
| 1 per cell (`GATE_READ = 1` only) | the stored bit, passed through the read Toffoli gate |

Without the read gating the width is exactly m(4·2^n - 1) + n, the published
garbage count. With it, the width grows by 2^n·m (78 lines for the default
4 x 4). Three kinds of line are not in the published count and stay
unconnected inside `rram`:

- the constant-fed lines that leave the ends of the D copy chains;
- the C and W lines that leave the last cell of each row;
- the decoder's always-zero `garbage[0]`.

## Parameters

| module               | parameter   | default | meaning |
|----------------------|-------------|---------|---------|
| `rram`               | `ADDR_BITS` | 2       | n, address bits (2^n words) |
| `rram`               | `DATA_BITS` | 4       | m, bits per word |
| `rram`               | `GATE_READ` | 1       | 1: read the selected row; 0: column XOR as drawn |
| `rev_decoder`        | `N`         | 2       | address bits |
| `rev_dff`            | `QN_OUT`    | 1       | DFG middle constant: 1 gives not-Q, 0 a second Q (slave use) |
| `multi_feynman_gate` | `WIDTH`     | 4       | number of lines |

The published design gives n and m only as symbols. n = 2 is the size of its
worked decoder example, and m = 4 is this RTL's choice. Any n >= 1 and m >= 1
elaborate.

## Departures and choices

Follows the published design:

- the gate equations and costs;
- the 2-to-4 decoder netlist;
- the D flip-flop and the five-gate cell, including the three garbage outputs;
- the array's decoder, Toffoli row gates, Feynman copy chains, chained C and W
  lines, and column XOR gates.

Choices and departures of this RTL:

1. **Decoder stages 3 and up use Fredkin gates.** MFRG1 gates there would give
   wrong outputs; see the decoder section. The decoder is unchanged for n <= 2.
2. **Gated read path (`GATE_READ = 1`).** The as-drawn path returns the parity
   of a column; see the read path section.
3. **Constants on the cell's DFG are (0, 0).** They are not specified. With
   (0, 0) the DFG gives three copies of Q, and all three are needed. The cell
   therefore has no not-Q output.
4. **Slave clocking.** The slave latch takes the master's P output (not CLK)
   on its A input. This is inferred from the slave passing CLK on.
5. **Latch model.** Feedback lines are modelled as `always_latch` elements.
   There is no reset.
6. **Index order.** `addr[0]` is the bit decoded by the Feynman gate, and
   `d[0]`/`q[0]` is the first column.
7. **MFRG1 input order in the cell.** The inputs are (W, D, stored Q), so the
   stored bit enters on the third input. One sentence of the published
   description places the fed-back bit on the second input instead. Only the
   order used here makes R = W ? D : Q.
8. **Timing.** The write-commit rule follows from clocking rows with their
   select lines. The published description does not discuss it.

The published quantum-cost and delay figures count quantum primitives. This RTL
works at gate level, so it reproduces the gate and garbage counts but not those
costs or delays. The costs are recorded only as numbers in `rram_pkg`.

## Simulation and tests

Each testbench prints `TB_RESULT checks=N failures=F`, then calls `$finish`.
Each has a watchdog. Build and run one with Verilator, for example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/rram_pkg.sv tb/rram_tb.sv --top-module rram_tb
./obj_dir/Vrram_tb +verilator+rand+reset+2
```

The `+verilator+rand+reset+2` option starts undriven state at random values.
This is a good test, because the memory has no reset.

| testbench                  | what it checks |
|----------------------------|----------------|
| `<gate>_tb` (six gates)    | every input pattern against the equation; outputs all distinct (reversibility) |
| `multi_feynman_gate_tb`    | widths 4 and 8, all inputs, XOR line, pass lines, reversibility |
| `rev_decoder_tb`           | N = 1..4, every address: one-hot output and garbage lines; the named outputs of the first MFRG1 gate |
| `rev_dff_tb`               | random clk/d sequence against a D-latch reference; not-Q, not-CLK and garbage lines |
| `rev_we_ms_dff_tb`         | random (c, w, d) against a master-slave reference; all garbage lines; counts committed, abandoned and refresh cycles; directed commit and abandon cases |
| `rram_tb`                  | default 4 x 4 memory: fills every word, then 400 random reads, writes and abandoned writes against a reference array. Checks that `q` shows the old word during a write and that the row selected when W falls keeps its word. On every read, also checks the width and every line of the garbage port. Fails if any of these mechanisms never occurred. |
| `rram_config_tb`           | the same protocol on a 2 x 2 memory, an 8 x 5 memory (3-bit decoder with its Fredkin stage) and a 4 x 4 memory with `GATE_READ = 0` (expects the XOR of all words) |
| `rram_cost_tb`             | the package's totals against the published per-block figures, and each closed-form total against its part-by-part sum for n = 1..6, m = 1..16 |

`tb/rram_exercise.sv` is the parameterised driver used by `rram_config_tb`.
All tests use zero-delay gates, so they check function and the order of
events, not gate delay.

## Files

- `rtl/rram_pkg.sv`: cost constants and cost formulas.
- Gate modules:
  - `rtl/feynman_gate.sv`
  - `rtl/double_feynman_gate.sv`
  - `rtl/toffoli_gate.sv`
  - `rtl/fredkin_gate.sv`
  - `rtl/mfrg1_gate.sv`
  - `rtl/mfrg2_gate.sv`
  - `rtl/multi_feynman_gate.sv`
- `rtl/rev_decoder.sv`: the decoder.
- `rtl/rev_dff.sv`: the gated D flip-flop.
- `rtl/rev_we_ms_dff.sv`: the write-enable master-slave cell.
- `rtl/rram.sv`: the memory (top level).
- `tb/`: the testbenches listed above.
