// tb_ssa_block: end-to-end test of the SSA block at its default size (N = 16, D_K = 64).
//
// Runs the block for T = 4, 8 and 10 time steps (the time-step counts at which the spiking
// models are evaluated), back to back, with random query, key and value spike matrices whose
// firing rates differ per token. A reference model, written from the attention equations and
// the LFSR polynomial alone, predicts every output bit:
//   c(t,i,j)   = sum_dk Q(t,i,dk) & K(t,j,dk)
//   S(t,i,j)   = r_s < c           with r_s the row's score LFSR after t+1 steps of the run
//   sum(t,i,d) = sum_j S(t,i,j) & V(t,j,d)
//   Attn       = r_a < sum         with r_a the row's output LFSR at streaming cycle (t+1)*D_K+d
// It also checks the order of outputs (step, column), the run latency (T+1)(D_K+1)+1 cycles,
// and that the mean output rate matches the ideal linear attention (1/N) sum_j (c/D_K) V within
// a statistical tolerance. It counts the mechanisms of the dataflow (step overlap, gap cycles,
// drain period) and fails if one never occurred.
module tb_ssa_block;
  import ssa_pkg::*;

  localparam int N     = N_DEFAULT;
  localparam int DK    = DK_DEFAULT;
  localparam int T_MAX = 10;
  localparam int RS_W  = $clog2(DK);
  localparam int RA_W  = $clog2(N);

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [STEP_W-1:0] num_steps = '0;
  logic [N-1:0] q = '0, k = '0, v = '0;
  logic in_ready, busy, attn_valid, done;
  logic [N-1:0] attn;
  logic [$clog2(DK)-1:0] attn_col;
  logic [STEP_W-1:0] attn_step;

  ssa_block dut (
    .clk, .rst_n, .start, .num_steps, .q, .k, .v, .in_ready, .busy,
    .attn, .attn_valid, .attn_col, .attn_step, .done
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_overlap = 0, n_gap = 0, n_drain = 0, n_runs = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  bit Q [T_MAX][N][DK];
  bit K [T_MAX][N][DK];
  bit V [T_MAX][N][DK];
  bit got [T_MAX][N][DK];
  bit seen [T_MAX][DK];

  logic [LFSR_W-1:0] ref_s [N];  // reference LFSR states, carried across runs
  logic [LFSR_W-1:0] ref_a [N];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL: %s", what);
    end
  endtask

  // Drive inputs and collect outputs for one run of T steps.
  task automatic run(input int T);
    int t_in, d_in, t_exp, d_exp;
    longint t0, t_done;
    bit finished;
    for (int t = 0; t < T; t++)
      for (int i = 0; i < N; i++) begin
        int rate_q = 20 + (i * 37) % 70, rate_kv = 15 + (i * 53) % 80;
        for (int d = 0; d < DK; d++) begin
          Q[t][i][d] = ($urandom_range(99) < rate_q);
          K[t][i][d] = ($urandom_range(99) < rate_kv);
          V[t][i][d] = ($urandom_range(99) < 100 - rate_kv);
        end
      end
    foreach (seen[t, d]) seen[t][d] = 1'b0;
    @(negedge clk);
    start = 1'b1; num_steps = STEP_W'(T);
    @(posedge clk); t0 = cycle;
    @(negedge clk); start = 1'b0;
    t_in = 0; d_in = 0; t_exp = 0; d_exp = 0; finished = 0;
    while (!finished) begin
      // inputs for this cycle, changed at the falling edge
      if (in_ready) begin
        for (int i = 0; i < N; i++) begin
          q[i] = Q[t_in][i][d_in]; k[i] = K[t_in][i][d_in]; v[i] = V[t_in][i][d_in];
        end
      end else begin
        q = N'($urandom()); k = N'($urandom()); v = N'($urandom());  // must be ignored
      end
      @(posedge clk);
      if (in_ready && attn_valid) n_overlap++;
      if (busy && !in_ready && !attn_valid) n_gap++;
      if (attn_valid && !in_ready && attn_step == STEP_W'(T - 1)) n_drain++;
      if (in_ready) begin
        if (d_in == DK - 1) begin d_in = 0; t_in++; end else d_in++;
      end
      if (attn_valid) begin
        check(attn_step == STEP_W'(t_exp) && int'(attn_col) == d_exp,
              $sformatf("output order: got step %0d col %0d, want %0d %0d",
                        attn_step, attn_col, t_exp, d_exp));
        if (t_exp < T) begin
          for (int i = 0; i < N; i++) got[t_exp][i][d_exp] = attn[i];
          seen[t_exp][d_exp] = 1'b1;
        end
        if (d_exp == DK - 1) begin d_exp = 0; t_exp++; end else d_exp++;
      end
      if (done) begin finished = 1; t_done = cycle; end
      @(negedge clk);
    end
    check(t_in == T, $sformatf("accepted %0d steps of input, want %0d", t_in, T));
    check(t_exp == T && d_exp == 0, $sformatf("emitted %0d steps of output, want %0d", t_exp, T));
    check(int'(t_done - t0) == (T + 1) * (DK + 1) + 1,
          $sformatf("latency %0d cycles, want %0d", t_done - t0, (T + 1) * (DK + 1) + 1));
    check(!busy, "busy after done");
    n_runs++;
  endtask

  // Compare the collected outputs of a run with the reference model.
  task automatic compare(input int T);
    int c [N][N];
    bit S [N][N];
    logic [LFSR_W-1:0] rs [N];
    logic [LFSR_W-1:0] ra [N];
    int mism = 0;
    real ones = 0.0, ideal = 0.0, cond = 0.0, mean_diff, tol;
    for (int i = 0; i < N; i++) begin rs[i] = ref_s[i]; ra[i] = ref_a[i]; end
    // output generators step D_K times during period 0, before any output is formed
    for (int i = 0; i < N; i++) repeat (DK) ra[i] = lfsr_next(ra[i]);
    for (int t = 0; t < T; t++) begin
      for (int i = 0; i < N; i++) begin
        rs[i] = lfsr_next(rs[i]);  // stepped by the gap cycle that ends step t
        for (int j = 0; j < N; j++) begin
          c[i][j] = 0;
          for (int d = 0; d < DK; d++) if (Q[t][i][d] && K[t][j][d]) c[i][j]++;
          S[i][j] = (int'(rs[i][RS_W-1:0]) < c[i][j]);
        end
      end
      for (int d = 0; d < DK; d++) begin
        for (int i = 0; i < N; i++) begin
          int sum = 0;
          real p = 0.0;
          bit want;
          for (int j = 0; j < N; j++) begin
            if (S[i][j] && V[t][j][d]) sum++;
            p += real'(c[i][j]) / DK * real'(V[t][j][d]);
          end
          want = (int'(ra[i][RA_W-1:0]) < sum);
          ra[i] = lfsr_next(ra[i]);
          checks++;
          if (!seen[t][d] || got[t][i][d] != want) begin
            failures++; mism++;
            if (mism <= 5) $display("FAIL: T=%0d Attn step %0d row %0d col %0d got %0b want %0b",
                                    T, t, i, d, got[t][i][d], want);
          end
          ones  += real'(got[t][i][d]);
          ideal += p / N;
          cond  += real'(sum) / N;
        end
      end
    end
    // the drain period steps the score generators once more
    for (int i = 0; i < N; i++) begin
      ref_s[i] = lfsr_next(rs[i]);
      ref_a[i] = ra[i];
    end
    // The output encoder draws a fresh sample every cycle: its mean rate must match sum/N
    // within a binomial tolerance. The ideal linear attention is looser, because each score
    // S is drawn once per step and shared by all D_K columns.
    mean_diff = (ones - cond) / (T * N * DK);
    tol = 4.0 * 0.5 / $sqrt(real'(T * N * DK)) + 0.005;
    check(mean_diff < tol && mean_diff > -tol,
          $sformatf("T=%0d mean rate %f vs sum/N %f", T, ones / (T * N * DK), cond / (T * N * DK)));
    mean_diff = (ones - ideal) / (T * N * DK);
    check(mean_diff < 0.1 && mean_diff > -0.1,
          $sformatf("T=%0d mean rate %f vs ideal %f", T, ones / (T * N * DK), ideal / (T * N * DK)));
    $display("T=%0d: output rate %0.4f, sum/N %0.4f, ideal linear attention %0.4f, %0d mismatches",
             T, ones / (T * N * DK), cond / (T * N * DK), ideal / (T * N * DK), mism);
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin
      ref_s[i] = lfsr_seed(i, 1'b0);
      ref_a[i] = lfsr_seed(i, 1'b1);
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    foreach (got[t, i, d]) got[t][i][d] = 1'b0;
    run(4);  compare(4);
    run(8);  compare(8);
    repeat (5) @(posedge clk);
    run(10); compare(10);
    check(n_overlap > 0, "query-key and attention-value products never overlapped");
    check(n_gap > 0, "no gap cycle seen");
    check(n_drain > 0, "no drain period seen");
    $display("mechanisms: runs=%0d overlap_cycles=%0d gap_cycles=%0d drain_outputs=%0d",
             n_runs, n_overlap, n_gap, n_drain);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
