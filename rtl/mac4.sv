// mac4 -- grouped multiply-accumulate lane set.
//
// Adds LANES Q4.12 products w[l]*x[l] to an accumulator in one combinational
// step: acc_o = acc_i + sum_l trunc(w[l]*x[l]).  Every product is truncated
// to Q4.12 and every sum wraps at 16 bits (den16_pkg::fmul).  The 1x1
// convolutions, the encoder and the decoder all reduce their dot products
// four lanes at a time with this unit; the lane count of 4 is the published
// design's, the purely combinational form (the caller registers the
// accumulator) is this design's choice.
module mac4
  import den16_pkg::*;
#(
  parameter int LANES = 4
) (
  input  fix_t             acc_i,
  input  fix_t [LANES-1:0] w_i,
  input  fix_t [LANES-1:0] x_i,
  output fix_t             acc_o
);
  always_comb begin
    acc_o = acc_i;
    for (int l = 0; l < LANES; l++) acc_o = acc_o + fmul(w_i[l], x_i[l]);
  end
endmodule
