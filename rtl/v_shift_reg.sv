// v_shift_reg: the D_K-bit first-in-first-out shift register of one SAU.
//
// It buffers the value spikes V(j, d_k) of one time step so that they reach the output AND
// gate in the next time step, when the attention score S(i, j) of that step has become valid.
// The register shifts only while `en` is high (the D_K streaming cycles of a time step), so a
// D_K-bit register gives a delay of exactly one time step (D_K + 1 clock cycles) even though
// each time step has one extra gap cycle. `dout` is the oldest bit: during streaming cycle d of
// step t+1 it is V(j, d) of step t. Reset clears it. This follows the authors' description; the
// shift enable and reset are this design's choice.
module v_shift_reg #(
  parameter int unsigned DEPTH = 64
) (
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  logic din,
  output logic dout
);

  logic [DEPTH-1:0] sr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  sr <= '0;
    else if (en) sr <= {sr[DEPTH-2:0], din};
  end

  assign dout = sr[DEPTH-1];

  initial assert (DEPTH >= 2) else $error("v_shift_reg: DEPTH must be at least 2");

endmodule
