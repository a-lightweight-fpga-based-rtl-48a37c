// qmlp_sigmoid - attack probability from the INT8 output logit.
//
// The last dense layer has one unit followed by a sigmoid, which gives the
// probability that the current message window holds an attack. Here the INT8
// logit is read as a fixed-point number x = logit / 2**FRAC and the sigmoid is
// approximated piecewise-linearly (the PLAN segments):
//   |x| >= 5          : 1
//   2.375 <= |x| < 5  : |x|/32 + 0.84375
//   1 <= |x| < 2.375  : |x|/8  + 0.625
//   |x| < 1           : |x|/4  + 0.5
// and sigmoid(-x) = 1 - sigmoid(x). The result is an 8-bit probability in
// units of 1/256, saturated at 255; the largest error against the true
// sigmoid is about 0.02. attack is set when the probability is at least 0.5,
// i.e. when the logit is not negative.
// The sigmoid itself is the model's; the logit scale (FRAC), the PLAN
// approximation, the 8-bit output and the 0.5 decision threshold are choices
// of this design. Purely combinational.
module qmlp_sigmoid
  import qmlp_pkg::*;
#(
  parameter int FRAC = 4  // fractional bits of the logit, 0..8
) (
  input  int8_t      logit,
  output logic [7:0] prob,
  output logic       attack
);

  logic [8:0]  mag;   // |logit|, 0..128
  logic [16:0] x256;  // 256 * |x|
  logic [16:0] y256;  // 256 * sigmoid(|x|), 128..256
  logic [16:0] p256;

  always_comb begin
    mag  = logit[7] ? 9'(-10'(logit)) : 9'(logit);
    x256 = 17'(mag) << (8 - FRAC);
    if (x256 >= 17'd1280)     y256 = 17'd256;
    else if (x256 >= 17'd608) y256 = (x256 >> 5) + 17'd216;
    else if (x256 >= 17'd256) y256 = (x256 >> 3) + 17'd160;
    else                      y256 = (x256 >> 2) + 17'd128;
    p256   = logit[7] ? 17'd256 - y256 : y256;
    prob   = (p256 > 17'd255) ? 8'd255 : p256[7:0];
    attack = prob[7];
  end

  initial begin
    assert (FRAC >= 0 && FRAC <= 8) else $error("qmlp_sigmoid: FRAC must be 0..8");
  end

endmodule
