// tb_row_adder: checks the N-input adder of an SAU row at N = 16 (random and corner inputs)
// and the saturation of the UINT8 output at N = 256 when all inputs are high.
module tb_row_adder;
  logic [15:0]  in16;
  logic [7:0]   sum16;
  logic [255:0] in256;
  logic [7:0]   sum256;
  int checks = 0, failures = 0;

  row_adder #(.N(16))  dut16  (.in(in16),  .sum(sum16));
  row_adder #(.N(256)) dut256 (.in(in256), .sum(sum256));

  function automatic int ones(input logic [255:0] x);
    int n = 0;
    for (int b = 0; b < 256; b++) if (x[b]) n++;
    return n;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures <= 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int c = 0; c < 2000; c++) begin
      in16 = (c == 0) ? 16'h0 : (c == 1) ? 16'hFFFF : 16'($urandom());
      for (int w = 0; w < 8; w++) in256[w*32 +: 32] = $urandom();
      if (c == 2) in256 = '0;
      #1;
      check(int'(sum16) == ones({240'b0, in16}), $sformatf("N=16 in %h sum %0d", in16, sum16));
      check(int'(sum256) == ones(in256), $sformatf("N=256 sum %0d want %0d", sum256, ones(in256)));
    end
    in256 = '1; #1;
    check(sum256 == 8'd255, $sformatf("N=256 all ones gave %0d, want saturation at 255", sum256));
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
