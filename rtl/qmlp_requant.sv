// qmlp_requant - bias, batch-norm rescale and ReLU of one neuron.
//
// A dense layer leaves a wide signed accumulator per neuron. This block turns
// it back into the INT8 activation the next layer reads:
//   sum  = acc + (bias <<< bias_shift)
//   q    = (sum + 2**(out_shift-1)) >>> out_shift      (round half up; no
//                                                       rounding term if
//                                                       out_shift is 0)
//   out  = saturate q to [-128, 127], then max(0, out) when relu_en is set.
// Batch normalisation is a per-channel affine map, so after training it folds
// into the dense weights and bias; that leaves the bias and a power-of-two
// rescale, which is what is applied here. The folding, the power-of-two
// scales, the rounding mode and the saturation are this design's choices:
// the model only states that all parameters and operations are INT8 and that
// hidden layers use BN + ReLU. Purely combinational.
module qmlp_requant
  import qmlp_pkg::*;
(
  input  acc_t       acc,
  input  int8_t      bias,
  input  logic [4:0] bias_shift,
  input  logic [4:0] out_shift,
  input  logic       relu_en,
  output int8_t      q
);

  localparam int SW = ACC_W + 16;

  logic signed [SW-1:0] bias_ext, sum, rounded, shifted;

  always_comb begin
    bias_ext = SW'(bias) <<< bias_shift;
    sum      = SW'(acc) + bias_ext;
    rounded  = (out_shift == 5'd0) ? sum : sum + (SW'(1) <<< (out_shift - 5'd1));
    shifted  = rounded >>> out_shift;
    if (shifted > SW'(127))       q = 8'sd127;
    else if (shifted < -SW'(128)) q = -8'sd128;
    else                          q = int8_t'(shifted);
    if (relu_en && q[7]) q = 8'sd0;
  end

endmodule
