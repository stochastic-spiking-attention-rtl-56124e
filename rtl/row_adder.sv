// row_adder: the N-input binary adder at the end of each SAU row.
//
// Counts the ones among the N one-bit SAU outputs (S(i,j) AND V(j,d_k)) of row i, giving the
// sum of the attention-value product for one column d_k. Combinational. The output is UINT8 as
// in the published schematic; the authors give no internal structure, so this is a plain
// population count and synthesis picks the adder tree. A sum that does not fit (N = 256 with
// all inputs high) saturates at 255.
module row_adder #(
  parameter int unsigned N     = 16,
  parameter int unsigned OUT_W = 8
) (
  input  logic [N-1:0]     in,
  output logic [OUT_W-1:0] sum
);

  localparam int unsigned FULL_W = $clog2(N + 1);
  localparam int unsigned MAX    = (1 << OUT_W) - 1;

  logic [FULL_W-1:0] total;

  always_comb begin
    total = '0;
    for (int unsigned j = 0; j < N; j++) total = total + FULL_W'(in[j]);
  end

  if (FULL_W > OUT_W) begin : g_sat
    always_comb sum = (total > FULL_W'(MAX)) ? OUT_W'(MAX) : total[OUT_W-1:0];
  end else begin : g_fit
    always_comb sum = OUT_W'(total);
  end

endmodule
