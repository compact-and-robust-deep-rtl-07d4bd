// bn_relu: folded batch normalisation followed by ReLU, the "BN" box that
// sits next to each AC in the UAC datapath.
//
// y = sat32( (x * scale) >>> 10 + (shift <<< 6) ), then y = max(y, 0).
// x is a Q16.16 value held in ACC_W bits, scale and shift are Q10.10, so the
// product is shifted back by the 10 fractional bits of scale and shift is
// aligned to 16 fractional bits.  BN_EN = 0 skips the multiply-add (the value
// is only saturated), RELU_EN = 0 skips the ReLU, which lets the same unit
// serve the residual block's AC+ReLU and its final BN.  The operation is
// purely combinational; the caller registers the result.
//
// scale and shift are the paper's batch-norm folding
// scale = gamma / sqrt(sigma^2 + eps), shift = beta - gamma*mu / sqrt(sigma^2 + eps),
// computed offline.  Rounding by truncation (arithmetic shift) and the
// saturation are this design's choices.
module bn_relu
  import flan_pkg::*;
#(
  parameter bit BN_EN   = 1'b1,
  parameter bit RELU_EN = 1'b1
) (
  input  acc_t x,
  input  prm_t scale,
  input  prm_t shift,
  output fm_t  y
);

  typedef logic signed [ACC_W+PRM_W-1:0] wide_t;

  wide_t prod;
  wide_t sum;
  fm_t   s;

  always_comb begin
    prod = wide_t'(x) * wide_t'(scale);
    if (BN_EN) sum = (prod >>> PRM_FRAC) + (wide_t'(shift) <<< ALIGN);
    else       sum = wide_t'(x);
    s = sat_fm(sum);
    y = (RELU_EN && s < 0) ? fm_t'(0) : s;
  end

endmodule
