// tb_sau: checks one stochastic attention unit at D_K = 64 over several time steps.
// The testbench plays the sequencer: D_K streaming cycles then one capture (gap) cycle per
// step. It drives random Q, K, V bits and a random score number `rnd_s` held for each step.
// During streaming cycle d of step t+1 the output must equal (rnd_s < c_t) & V_t(d), where
// c_t is the number of cycles of step t with Q & K high. A second unit at D_K = 256 with Q and
// K always high checks that the 8-bit counter saturates at 255 instead of wrapping to zero.
module tb_sau;
  import ssa_pkg::*;
  localparam int DK = 64;
  localparam int STEPS = 40;

  logic clk = 1'b0, rst_n = 1'b0;
  sau_ctrl_t ctrl = '0;
  logic q = 1'b0, k = 1'b0, v = 1'b0;
  logic [5:0] rnd_s = '0;
  logic sv;
  logic [7:0] rnd_big = '0;
  logic sv_big;
  int checks = 0, failures = 0, n_s1 = 0, n_s0 = 0;

  sau #(.DK(DK))  dut     (.clk, .rst_n, .ctrl, .q, .k, .v, .rnd_s, .sv);
  sau #(.DK(256)) dut_big (.clk, .rst_n, .ctrl, .q(1'b1), .k(1'b1), .v(1'b1), .rnd_s(rnd_big),
                           .sv(sv_big));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures <= 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    automatic int c_prev = 0;
    int c_cur;
    bit v_prev [DK];
    bit v_cur [DK];
    bit s_exp;
    foreach (v_prev[d]) v_prev[d] = 1'b0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int t = 0; t < STEPS; t++) begin
      int pq, pk;
      pq = $urandom_range(100); pk = $urandom_range(100);
      c_cur = 0;
      s_exp = (int'(rnd_s) < c_prev);
      if (t > 0) begin if (s_exp) n_s1++; else n_s0++; end
      for (int d = 0; d < DK; d++) begin
        ctrl = '{stream: 1'b1, capture: 1'b0};
        q = ($urandom_range(99) < pq);
        k = ($urandom_range(99) < pk);
        v = 1'($urandom_range(1));
        v_cur[d] = v;
        if (q && k) c_cur++;
        #1;
        if (t > 0) check(sv == (s_exp & v_prev[d]),
                         $sformatf("step %0d d %0d: sv %0b want %0b", t, d, sv, s_exp & v_prev[d]));
        @(negedge clk);
      end
      // gap cycle: counter moves to the score register; a new score number is drawn
      ctrl = '{stream: 1'b0, capture: 1'b1};
      q = 1'b1; k = 1'b1;   // must not be counted
      @(negedge clk);
      rnd_s = 6'($urandom());
      c_prev = c_cur;
      v_prev = v_cur;
    end
    check(n_s1 > 0 && n_s0 > 0, "score S never took both values");

    // saturation: D_K = 256 with Q & K always high counts 256 events; the register holds 255
    ctrl = '0;
    @(negedge clk);
    for (int d = 0; d < 256; d++) begin
      ctrl = '{stream: 1'b1, capture: 1'b0};
      @(negedge clk);
    end
    ctrl = '{stream: 1'b0, capture: 1'b1};
    @(negedge clk);
    ctrl = '0;
    rnd_big = 8'd254; #1;
    check(sv_big == 1'b1, "saturated count 255 should exceed 254");
    rnd_big = 8'd255; #1;
    check(sv_big == 1'b0, "saturated count 255 should not exceed 255");
    rnd_big = 8'd0; #1;
    check(sv_big == 1'b1, "saturated count should not have wrapped to zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
