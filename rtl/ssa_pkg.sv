// ssa_pkg: constants and types shared by the stochastic spiking attention (SSA) block.
//
// The SSA block computes a linear, spike-domain attention: attention scores S = Bern(QK^T / D_K)
// and outputs Attn = Bern(S V / N), both evaluated with AND gates, counters and Bernoulli
// encoders. This package holds the default sizes, the random-number generator settings and the
// control bundle that the sequencer hands to the SAU array.
//
// Sizes: N = 16 is the lower end of the token range (16-128) the design targets; D_K = 64 is
// this design's choice, consistent with a time step of D_K + 1 = 65 cycles giving 3.25 us for
// 10 time steps at 200 MHz, close to the 3.3 us the authors report for their FPGA build.
// The 8-bit (UINT8) counter and adder widths follow the published schematic.
package ssa_pkg;

  // Default array size and key dimension.
  parameter int unsigned N_DEFAULT  = 16;
  parameter int unsigned DK_DEFAULT = 64;
  // Width of the SAU score counter, its register and the row adder output (UINT8).
  parameter int unsigned CNT_W      = 8;
  // Width of the time-step counter (number of time steps T per run).
  parameter int unsigned STEP_W     = 8;

  // 16-bit maximal-length Galois LFSR: x^16 + x^14 + x^13 + x^11 + 1 (taps mask 0xB400,
  // right-shifting form). Period 65535.
  parameter int unsigned   LFSR_W    = 16;
  parameter logic [15:0]   LFSR_TAPS = 16'hB400;

  // One step of the Galois LFSR. Shared by the RTL and used as the reference in testbenches.
  function automatic logic [LFSR_W-1:0] lfsr_next(input logic [LFSR_W-1:0] s);
    lfsr_next = s[0] ? ((s >> 1) ^ LFSR_TAPS) : (s >> 1);
  endfunction

  // Seed of the generator of row `row`; `kind` 0 = score (S) generator, 1 = output (Attn)
  // generator. Never zero, which would lock the LFSR.
  function automatic logic [LFSR_W-1:0] lfsr_seed(input int unsigned row, input bit kind);
    logic [LFSR_W-1:0] s;
    s = LFSR_W'(32'hACE1 + row * 32'h3D09 + (kind ? 32'h5A5A : 32'h0));
    lfsr_seed = (s == '0) ? LFSR_W'(1) : s;
  endfunction

  // Control bundle from the sequencer to the SAU array, valid in the current cycle.
  typedef struct packed {
    logic stream;   // phase < D_K: one column d_k of Q, K, V is streamed; counters and V FIFOs advance
    logic capture;  // phase == D_K: the gap cycle; counters are moved into the score registers
  } sau_ctrl_t;

endpackage
