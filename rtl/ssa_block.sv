// ssa_block: stochastic spiking attention (SSA) block, top level.
//
// Computes, for every time step t = 1..T of a spiking transformer, a binary attention matrix
//   S(i,j)       ~ Bern( (1/D_K) * sum_dk Q(i,dk) AND K(j,dk) )
//   Attn(i,dk)   ~ Bern( (1/N)   * sum_j  S(i,j)  AND V(j,dk) )
// from binary query, key and value spike matrices (N tokens x D_K), i.e. a linear attention in
// which every multiplication is an AND gate and every normalisation is a Bernoulli encoder.
//
// Structure: an N x N array of stochastic attention units. SAU (i,j) receives Q(i,dk) along its
// row and K(j,dk), V(j,dk) along its column, one column dk per clock. Each row ends in an
// N-input adder and a registered Bernoulli encoder that emits Attn(i,dk). A time step takes
// D_K streaming cycles plus one gap cycle. The query-key product of step t is formed during its
// own period; the attention-value product of step t is formed during the next period, while
// the query-key product of step t+1 proceeds, so steps are pipelined with no intermediate
// memory. Attn of a step leaves the block column by column, all N rows in parallel.
//
// Random numbers (this design's reuse scheme): each row has one LFSR for its N score encoders,
// stepped once per time step (so S stays fixed for the step), and one LFSR for its output
// encoder, stepped every streaming cycle. Sharing one random number between the encoders of a
// row correlates the S(i,j) of that row but leaves each one's probability exact.
//
// Interface: pulse `start` with `num_steps` = T while `busy` is low. Whenever `in_ready` is
// high, drive column dk (counting from 0) of step t on q[i] = Q(i,dk), k[j] = K(j,dk),
// v[j] = V(j,dk); inputs are ignored otherwise. `attn[i]` = Attn(i, attn_col) of step
// `attn_step` is valid when `attn_valid` is high. `done` pulses once per run. A run of T steps
// takes (T+1)(D_K+1)+1 cycles.
module ssa_block
  import ssa_pkg::*;
#(
  parameter int unsigned N  = N_DEFAULT,   // tokens = SAU rows = SAU columns
  parameter int unsigned DK = DK_DEFAULT   // key dimension = streaming cycles per time step
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [STEP_W-1:0]       num_steps,
  input  logic [N-1:0]            q,
  input  logic [N-1:0]            k,
  input  logic [N-1:0]            v,
  output logic                    in_ready,
  output logic                    busy,
  output logic [N-1:0]            attn,
  output logic                    attn_valid,
  output logic [$clog2(DK)-1:0]   attn_col,
  output logic [STEP_W-1:0]       attn_step,
  output logic                    done
);

  localparam int unsigned RS_W = $clog2(DK);  // score random number: normalise by D_K
  localparam int unsigned RA_W = $clog2(N);   // output random number: normalise by N

  sau_ctrl_t    ctrl;
  logic [N-1:0] q_in, k_in, v_in;

  ssa_controller #(.DK(DK)) u_ctrl (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (start),
    .num_steps  (num_steps),
    .ctrl       (ctrl),
    .in_ready   (in_ready),
    .busy       (busy),
    .attn_valid (attn_valid),
    .attn_col   (attn_col),
    .attn_step  (attn_step),
    .done       (done)
  );

  // Outside the input cycles (gap cycles, drain period) the array sees zeros.
  assign q_in = in_ready ? q : '0;
  assign k_in = in_ready ? k : '0;
  assign v_in = in_ready ? v : '0;

  for (genvar i = 0; i < N; i++) begin : g_row
    logic [LFSR_W-1:0] rnd_s_state, rnd_a_state;
    logic [N-1:0]      sv;
    logic [CNT_W-1:0]  sum;
    logic              attn_d;

    lfsr #(.SEED(lfsr_seed(i, 1'b0))) u_rng_s (
      .clk (clk), .rst_n (rst_n), .en (ctrl.capture), .rnd (rnd_s_state)
    );
    lfsr #(.SEED(lfsr_seed(i, 1'b1))) u_rng_a (
      .clk (clk), .rst_n (rst_n), .en (ctrl.stream), .rnd (rnd_a_state)
    );

    for (genvar j = 0; j < N; j++) begin : g_col
      sau #(.DK(DK)) u_sau (
        .clk   (clk),
        .rst_n (rst_n),
        .ctrl  (ctrl),
        .q     (q_in[i]),
        .k     (k_in[j]),
        .v     (v_in[j]),
        .rnd_s (rnd_s_state[RS_W-1:0]),
        .sv    (sv[j])
      );
    end

    row_adder #(.N(N), .OUT_W(CNT_W)) u_add (
      .in  (sv),
      .sum (sum)
    );

    bernoulli_encoder #(.VAL_W(CNT_W), .RND_W(RA_W)) u_enc (
      .value (sum),
      .rnd   (rnd_a_state[RA_W-1:0]),
      .spike (attn_d)
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) attn[i] <= 1'b0;
      else        attn[i] <= attn_d;
    end
  end

  initial assert (N >= 2 && (N & (N - 1)) == 0 && N <= 256)
    else $error("ssa_block: N must be a power of two between 2 and 256");

endmodule
