// rram_pkg: types and cost figures shared by the reversible RAM.
//
// Every 3x3 reversible gate in this design has inputs (A, B, C) and outputs
// (P, Q, R). The quantum costs below are
// the per-gate figures quoted for this design (1x1 and 2x2 quantum gates
// counted as one each). The functions give the closed-form totals for an
// n-to-2^n decoder and a 2^n x m RAM: gate count, garbage outputs and
// quantum cost. They are reference numbers for documentation and testbenches;
// no hardware is generated from them.
//
// The totals follow the published formulas. Two places where this RTL
// differs are noted next to the functions: decoders wider than 2 bits use a
// Fredkin gate (cost 5) instead of MFRG1 (cost 4) in stages 3 and up, and the
// default read path adds one Toffoli gate per cell (see rram.sv).
package rram_pkg;

  // Quantum cost of each gate.
  localparam int unsigned QC_FG    = 1;   // Feynman (CNOT)
  localparam int unsigned QC_DFG   = 2;   // double Feynman
  localparam int unsigned QC_TG    = 5;   // Toffoli
  localparam int unsigned QC_FRG   = 5;   // Fredkin
  localparam int unsigned QC_MFRG1 = 4;   // modified Fredkin 1
  localparam int unsigned QC_MFRG2 = 5;   // modified Fredkin 2

  // Gated D flip-flop (MFRG2 + DFG) and write-enable master-slave cell
  // (MFRG1 + MFRG2 + FG + MFRG2 + DFG).
  localparam int unsigned QC_DFF      = QC_MFRG2 + QC_DFG;
  localparam int unsigned QC_CELL     = QC_MFRG1 + 2 * QC_MFRG2 + QC_FG + QC_DFG;
  localparam int unsigned GATES_CELL  = 5;
  localparam int unsigned GARB_CELL   = 3;

  // n-to-2^n decoder, published formulas: 2^n-1 gates, n-1 garbage outputs,
  // quantum cost 4*2^n-7.
  function automatic int unsigned dec_gates(int unsigned n);
    return (1 << n) - 1;
  endfunction

  function automatic int unsigned dec_garbage(int unsigned n);
    return n - 1;
  endfunction

  function automatic int unsigned dec_qc(int unsigned n);
    return 4 * (1 << n) - 7;
  endfunction

  // Quantum cost of the decoder as built here: for n > 2 the gates of stages
  // 3..n are Fredkin gates (cost 5), so the cost is 9 + 5*(2^n - 4).
  function automatic int unsigned dec_qc_built(int unsigned n);
    if (n <= 2) return dec_qc(n);
    return 9 + QC_FRG * ((1 << n) - 4);
  endfunction

  // 2^n x m RAM, published lower bounds (Theorems on gates, garbage and
  // quantum cost).
  function automatic int unsigned ram_gates(int unsigned n, int unsigned m);
    return (1 << n) * (6 * m + 2) + m - 1;
  endfunction

  function automatic int unsigned ram_garbage(int unsigned n, int unsigned m);
    return m * (4 * (1 << n) - 1) + n;
  endfunction

  function automatic int unsigned ram_qc(int unsigned n, int unsigned m);
    return (1 << n) * (19 * m + 9) - 7;
  endfunction

endpackage
