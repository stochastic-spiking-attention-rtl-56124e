// lfsr: pseudo-random number generator for the Bernoulli encoders.
//
// A W-bit Galois linear-feedback shift register. When `en` is high the state steps once per
// clock; otherwise it holds. `rnd` is the whole state; users take as many low bits as the
// uniform integer they need. Reset loads SEED (must be non-zero). With the default taps
// (ssa_pkg::LFSR_TAPS) the sequence is maximal, period 2^16 - 1, so every W-bit value except
// zero occurs once per period and any k low bits are uniform to within 2^-(16-k).
//
// The authors state only that LFSR-based generators feed the encoders and that random numbers
// are reused; the polynomial, width and seeds are this design's choice.
module lfsr
  import ssa_pkg::*;
#(
  parameter logic [LFSR_W-1:0] SEED = 16'hACE1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  output logic [LFSR_W-1:0] rnd
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  rnd <= SEED;
    else if (en) rnd <= lfsr_next(rnd);
  end

  initial assert (SEED != '0) else $error("lfsr: SEED must be non-zero");

endmodule
