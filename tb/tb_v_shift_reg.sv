// tb_v_shift_reg: checks the D_K-bit value FIFO of an SAU at D_K = 64: with a random shift
// enable, the output must always be the bit written DEPTH enabled shifts earlier (zero after
// reset), so that V of one time step lines up with S of the next.
module tb_v_shift_reg;
  localparam int DEPTH = 64;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0, din = 1'b0, dout;
  int checks = 0, failures = 0;
  bit hist [$];

  v_shift_reg #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .en, .din, .dout);

  always #5 clk = ~clk;

  initial begin
    repeat (DEPTH) hist.push_back(1'b0);
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int c = 0; c < 3000; c++) begin
      en  = ($urandom_range(9) < 8);
      din = 1'($urandom_range(1));
      checks++;
      if (dout !== hist[0]) begin
        failures++;
        if (failures <= 10) $display("FAIL: cycle %0d dout %0b want %0b", c, dout, hist[0]);
      end
      @(posedge clk);
      if (en) begin void'(hist.pop_front()); hist.push_back(din); end
      @(negedge clk);
    end
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
