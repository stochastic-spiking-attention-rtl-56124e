// tb_ssa_controller: checks the sequencer at D_K = 64 against a cycle-by-cycle schedule worked
// out from the time-step structure: after `start` with T steps, periods 0..T of D_K + 1 cycles
// each, streaming in phases 0..D_K-1, capture in phase D_K, input accepted in periods 0..T-1,
// output flags one cycle after each streaming cycle of periods 1..T, and `done` one cycle
// after the last period. Also checks that T = 0 does not start a run and that `start` while
// busy is ignored.
module tb_ssa_controller;
  import ssa_pkg::*;
  localparam int DK = 64;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [STEP_W-1:0] num_steps = '0;
  sau_ctrl_t ctrl;
  logic in_ready, busy, attn_valid, done;
  logic [5:0] attn_col;
  logic [STEP_W-1:0] attn_step;
  int checks = 0, failures = 0;

  ssa_controller #(.DK(DK)) dut (.clk, .rst_n, .start, .num_steps, .ctrl, .in_ready, .busy,
                                 .attn_valid, .attn_col, .attn_step, .done);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures <= 10) $display("FAIL: %s", what); end
  endtask

  task automatic run(input int T);
    int total = (T + 1) * (DK + 1);
    @(negedge clk);
    start = 1'b1; num_steps = STEP_W'(T);
    @(negedge clk);
    start = 1'b0;
    for (int c = 0; c <= total; c++) begin
      int per = c / (DK + 1), ph = c % (DK + 1);
      int pc = (c - 1) / (DK + 1), pph = (c - 1) % (DK + 1);
      bit want_stream  = (c < total) && ph < DK;
      bit want_capture = (c < total) && ph == DK;
      bit want_ready   = want_stream && per < T;
      bit want_valid   = (c >= 1) && pph < DK && pc >= 1;
      bit want_done    = (c == total);
      if (c == 5) start = 1'b1;  // ignored while busy
      if (c == 6) start = 1'b0;
      #1;
      check(ctrl.stream == want_stream && ctrl.capture == want_capture,
            $sformatf("T=%0d cycle %0d: stream %0b capture %0b", T, c, ctrl.stream, ctrl.capture));
      check(in_ready == want_ready, $sformatf("T=%0d cycle %0d: in_ready %0b", T, c, in_ready));
      check(attn_valid == want_valid, $sformatf("T=%0d cycle %0d: attn_valid %0b", T, c, attn_valid));
      if (want_valid)
        check(int'(attn_col) == pph && int'(attn_step) == pc - 1,
              $sformatf("T=%0d cycle %0d: col %0d step %0d", T, c, attn_col, attn_step));
      check(done == want_done, $sformatf("T=%0d cycle %0d: done %0b", T, c, done));
      check(busy == 1'b1, $sformatf("T=%0d cycle %0d: not busy", T, c));
      @(negedge clk);
    end
    check(!busy && !done && !ctrl.stream, "controller did not return to idle");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    // T = 0 is ignored
    start = 1'b1; num_steps = '0;
    @(negedge clk) start = 1'b0;
    repeat (3) begin check(!busy, "T = 0 started a run"); @(negedge clk); end
    run(1);
    run(3);
    run(10);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
