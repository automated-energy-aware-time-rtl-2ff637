// hard_sigmoid: piecewise-linear replacement of the logistic sigmoid used for
// the LSTM input, forget and output gates.
//
// y = clamp(x/6 + 1/2, 0, 1), the usual HardSigmoid definition (0 below -3,
// 1 above +3, a straight line between). The paper names HardSigmoid as the
// hardware-friendly gate activation; the constant 1/6 is realised here as a
// multiply by round(2^16/6) = 10923 followed by a rounding shift of 16, which
// is this design's own choice. Purely combinational, in and out in the
// fc_pkg tensor format (DATA_W bits, FRAC_W fraction bits).
module hard_sigmoid
  import fc_pkg::*;
(
  input  data_t x,
  output data_t y
);
  localparam int K_SHIFT = 16;
  localparam int K_SIXTH = ((1 << K_SHIFT) + 3) / 6;  // round(2^16 / 6)

  acc_t scaled;
  acc_t lin;

  always_comb begin
    scaled = (acc_t'(x) * acc_t'(K_SIXTH) + acc_t'(1 << (K_SHIFT-1))) >>> K_SHIFT;
    lin    = scaled + (acc_t'(ONE) >>> 1);
    if (lin < 0)                 y = '0;
    else if (lin > acc_t'(ONE))  y = ONE;
    else                         y = data_t'(lin);
  end
endmodule
