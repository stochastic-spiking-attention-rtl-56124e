// tb_bernoulli_encoder: exhaustive test of the comparator-based Bernoulli encoder for the two
// configurations the SSA block uses (8-bit count against a 6-bit random number, normalising by
// D_K = 64, and against a 4-bit one, normalising by N = 16). For each count it also checks that
// the fraction of random values giving a spike is min(count, 2^RND_W) / 2^RND_W.
module tb_bernoulli_encoder;
  logic [7:0] value;
  logic [5:0] rnd6;
  logic [3:0] rnd4;
  logic spike6, spike4;
  int checks = 0, failures = 0;

  bernoulli_encoder #(.VAL_W(8), .RND_W(6)) dut6 (.value(value), .rnd(rnd6), .spike(spike6));
  bernoulli_encoder #(.VAL_W(8), .RND_W(4)) dut4 (.value(value), .rnd(rnd4), .spike(spike4));

  initial begin
    for (int v = 0; v < 256; v++) begin
      int ones6, ones4;
      ones6 = 0; ones4 = 0;
      value = 8'(v);
      for (int r = 0; r < 64; r++) begin
        rnd6 = 6'(r); rnd4 = 4'(r % 16);
        #1;
        checks++;
        if (spike6 !== (r < v)) begin
          failures++;
          if (failures <= 10) $display("FAIL: value %0d rnd %0d spike %0b", v, r, spike6);
        end
        ones6 += int'(spike6);
        if (r < 16) begin
          checks++;
          if (spike4 !== (r < v)) failures++;
          ones4 += int'(spike4);
        end
      end
      checks += 2;
      if (ones6 != (v < 64 ? v : 64)) failures++;
      if (ones4 != (v < 16 ? v : 16)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
