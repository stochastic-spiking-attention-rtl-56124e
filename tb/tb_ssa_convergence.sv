// tb_ssa_convergence: statistical test of the SSA block at its default size (N = 16,
// D_K = 64) over a long run of T = 250 time steps.
//
// Every element of Q, K and V gets a fixed firing probability (the Bernoulli code of a real
// value). Each time step draws fresh, independent spikes from those probabilities. The rate at
// which Attn(i,dk) fires over the run must approach the ideal linear attention of the
// underlying real values,
//   a(i,dk) = (1/N) sum_j [ (1/D_K) sum_d pQ(i,d) pK(j,d) ] pV(j,dk),
// which is the expectation of the block's output. The testbench checks the mean absolute error
// over all N x D_K outputs and the bias of the overall mean. It also checks that the result
// follows the inputs: the error against a(i,dk) must be well below the error against the
// same values with the rows permuted.
module tb_ssa_convergence;
  import ssa_pkg::*;

  localparam int N  = N_DEFAULT;
  localparam int DK = DK_DEFAULT;
  localparam int T  = 250;

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
  int pq [N][DK];   // firing probabilities in percent
  int pk [N][DK];
  int pv [N][DK];
  int ones [N][DK];
  real ideal [N][DK];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int d_in, n_out;
    real mae, mae_perm, bias, mean_ideal;
    for (int i = 0; i < N; i++)
      for (int d = 0; d < DK; d++) begin
        pq[i][d] = 40 + $urandom_range(60);
        pk[i][d] = 40 + $urandom_range(60);
        pv[i][d] = $urandom_range(100);
        ones[i][d] = 0;
      end
    for (int i = 0; i < N; i++)
      for (int dk = 0; dk < DK; dk++) begin
        ideal[i][dk] = 0.0;
        for (int j = 0; j < N; j++) begin
          automatic real s = 0.0;
          for (int d = 0; d < DK; d++) s += (pq[i][d] / 100.0) * (pk[j][d] / 100.0);
          ideal[i][dk] += (s / DK) * (pv[j][dk] / 100.0) / N;
        end
      end

    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    start = 1'b1; num_steps = STEP_W'(T);
    @(negedge clk);
    start = 1'b0;
    d_in = 0; n_out = 0;
    while (!done) begin
      for (int i = 0; i < N; i++) begin
        q[i] = ($urandom_range(99) < pq[i][d_in]);
        k[i] = ($urandom_range(99) < pk[i][d_in]);
        v[i] = ($urandom_range(99) < pv[i][d_in]);
      end
      @(posedge clk);
      if (in_ready) d_in = (d_in + 1) % DK;
      if (attn_valid) begin
        n_out++;
        for (int i = 0; i < N; i++) if (attn[i]) ones[i][attn_col]++;
      end
      @(negedge clk);
    end
    check(n_out == T * DK, $sformatf("%0d output columns, want %0d", n_out, T * DK));

    mae = 0.0; mae_perm = 0.0; bias = 0.0; mean_ideal = 0.0;
    for (int i = 0; i < N; i++)
      for (int dk = 0; dk < DK; dk++) begin
        automatic real rate = real'(ones[i][dk]) / T;
        automatic real e  = rate - ideal[i][dk];
        automatic real ep = rate - ideal[(i + N / 2) % N][(dk + DK / 2) % DK];
        mae        += (e < 0.0 ? -e : e);
        mae_perm   += (ep < 0.0 ? -ep : ep);
        bias       += e;
        mean_ideal += ideal[i][dk];
      end
    mae /= N * DK; mae_perm /= N * DK; bias /= N * DK; mean_ideal /= N * DK;
    $display("mean ideal %0.4f, bias %0.4f, mean abs error %0.4f, against permuted values %0.4f",
             mean_ideal, bias, mae, mae_perm);
    check(mae < 0.06, $sformatf("mean absolute error %f too large", mae));
    check(bias < 0.02 && bias > -0.02, $sformatf("bias %f too large", bias));
    check(mae < 0.75 * mae_perm, "output does not follow the inputs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
