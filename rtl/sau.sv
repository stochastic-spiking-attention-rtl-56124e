// sau: stochastic attention unit (i, j) of the SSA array.
//
// Over the D_K streaming cycles of time step t it receives Q(i, d_k), K(j, d_k) and V(j, d_k)
// for d_k = 1..D_K, one bit each per cycle:
//   * Q AND K is counted by a saturating 8-bit counter (the query-key dot product).
//   * In the gap cycle that ends the step (ctrl.capture) the count moves into the score
//     register and the counter clears.
//   * The score register and the random number `rnd_s` (held constant for a whole time step by
//     the caller) feed a Bernoulli encoder, giving S(i, j) = Bern(count / D_K). S therefore
//     stays constant for the D_K + 1 cycles of step t+1.
//   * V is delayed by one time step in a D_K-bit shift register, so during streaming cycle d_k
//     of step t+1 the output is S(i, j) AND V(j, d_k) of step t.
// The query-key product of step t+1 and the attention-value product of step t thus overlap.
// Output `sv` is combinational from registers and `rnd_s`; it is meaningful only during the
// streaming cycles of the step after the one that produced S.
//
// Structure (AND, counter, register, encoder, shift register, AND) follows the authors'
// schematic. Counter saturation, the capture timing and the held random number are this
// design's choices.
module sau
  import ssa_pkg::*;
#(
  parameter int unsigned DK = 64
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  sau_ctrl_t               ctrl,
  input  logic                    q,
  input  logic                    k,
  input  logic                    v,
  input  logic [$clog2(DK)-1:0]   rnd_s,
  output logic                    sv
);

  localparam int unsigned RND_W = $clog2(DK);

  logic [CNT_W-1:0] cnt;        // 8-bit counter of Q AND K
  logic [CNT_W-1:0] score;      // register between counter and encoder
  logic             qk;
  logic             s;          // S(i, j) of the previous time step
  logic             v_delayed;  // V(j, d_k) of the previous time step

  assign qk = q & k;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt   <= '0;
      score <= '0;
    end else if (ctrl.capture) begin
      score <= cnt;
      cnt   <= '0;
    end else if (ctrl.stream && qk && cnt != '1) begin
      cnt <= cnt + 1'b1;
    end
  end

  bernoulli_encoder #(.VAL_W(CNT_W), .RND_W(RND_W)) u_enc (
    .value (score),
    .rnd   (rnd_s),
    .spike (s)
  );

  v_shift_reg #(.DEPTH(DK)) u_vfifo (
    .clk   (clk),
    .rst_n (rst_n),
    .en    (ctrl.stream),
    .din   (v),
    .dout  (v_delayed)
  );

  assign sv = s & v_delayed;

  initial assert (DK >= 2 && (DK & (DK - 1)) == 0)
    else $error("sau: DK must be a power of two, at least 2");

  // Streaming and capture never happen in the same cycle.
  assert property (@(posedge clk) disable iff (!rst_n) !(ctrl.stream && ctrl.capture));

endmodule
