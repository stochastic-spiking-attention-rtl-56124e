// tb_lfsr: checks the random-number generator against a bit-level reference of the Galois
// LFSR x^16 + x^14 + x^13 + x^11 + 1 (feedback into bits 15, 13, 12 and 10), checks that it
// holds when disabled, that it never reaches zero and that its period is 2^16 - 1.
module tb_lfsr;
  import ssa_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic [LFSR_W-1:0] rnd;
  int checks = 0, failures = 0;

  lfsr #(.SEED(16'h1234)) dut (.clk, .rst_n, .en, .rnd);

  always #5 clk = ~clk;

  function automatic logic [15:0] ref_step(input logic [15:0] s);
    logic [15:0] n;
    for (int b = 0; b < 15; b++) n[b] = s[b + 1];
    n[15] = s[0];
    n[13] ^= s[0]; n[12] ^= s[0]; n[10] ^= s[0];
    return n;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures <= 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    logic [15:0] model;
    int period;
    bit zero_seen;
    repeat (2) @(posedge clk);
    check(rnd == 16'h1234, "reset value is not the seed");
    @(negedge clk) rst_n = 1'b1;
    model = 16'h1234;
    // random enable pattern, compare every cycle
    for (int c = 0; c < 2000; c++) begin
      en = 1'($urandom_range(1));
      @(posedge clk); #1;
      if (en) model = ref_step(model);
      check(rnd == model, $sformatf("cycle %0d: rnd %h want %h", c, rnd, model));
      @(negedge clk);
    end
    // period
    en = 1'b1;
    model = rnd; period = 0; zero_seen = 0;
    do begin
      @(posedge clk); #1;
      period++;
      if (rnd == '0) zero_seen = 1;
    end while (rnd != model && period < 70000);
    check(period == 65535, $sformatf("period %0d, want 65535", period));
    check(!zero_seen, "state reached zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (80000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
