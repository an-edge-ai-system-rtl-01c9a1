// Fused post-processing of one output channel (operator fusion).
//
// Takes a finished MAC sum and applies, in one combinational step, what the
// network does after a convolution or FC layer:
//   y = ((acc * scale) >>> rshift) + bias [+ resid]     then optional ReLU
// `scale` and `bias` hold a batch-normalisation layer folded into the
// preceding convolution (scale = 1 and bias = layer bias for a layer without
// BN); `rshift` is the layer's requantization shift; `resid` is the shortcut
// operand of the residual block. The result is given saturated both to the
// 22-bit wide format and to the 12-bit feature-map format.
// BN folding, ReLU placement and the shortcut add follow the network figure;
// the arithmetic order, truncating (floor) shift and saturation are this
// design's choices. No clock: latency 0.
module post_op import rfd_pkg::*; (
  input  acc_t             acc,
  input  fm_t              scale,
  input  wide_t            bias,
  input  logic [SH_W-1:0]  rshift,
  input  wide_t            resid,
  input  logic             resid_en,
  input  logic             relu_en,
  output wide_t            y_wide,
  output fm_t              y_fm
);
  logic signed [63:0] prod, shifted, sum;

  always_comb begin
    prod    = 64'(acc) * 64'(scale);
    shifted = prod >>> rshift;
    sum     = shifted + 64'(bias) + (resid_en ? 64'(resid) : 64'sd0);
    if (relu_en && sum < 0) sum = '0;
    y_wide  = sat_wide(sum);
    y_fm    = sat_fm(sum);
  end
endmodule
