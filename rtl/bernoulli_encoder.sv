// bernoulli_encoder: draws one Bernoulli sample whose probability is a count normalised by a
// power of two.
//
// spike = (rnd < value). With `rnd` uniform on [0, 2^RND_W - 1] the probability of a spike is
// value / 2^RND_W (1 when value >= 2^RND_W). Because D_K and N are powers of two, normalising by
// D_K or N needs no divider: it is fixed by the width of the random number, as the authors
// suggest. Purely combinational; the caller decides where it is registered and how long
// `rnd` is held.
module bernoulli_encoder #(
  parameter int unsigned VAL_W = 8,  // width of the count (UINT8 in the published schematic)
  parameter int unsigned RND_W = 6   // log2 of the normaliser
) (
  input  logic [VAL_W-1:0] value,
  input  logic [RND_W-1:0] rnd,
  output logic             spike
);

  always_comb spike = ({{(VAL_W > RND_W ? VAL_W - RND_W : 0){1'b0}}, rnd} < value);

endmodule
