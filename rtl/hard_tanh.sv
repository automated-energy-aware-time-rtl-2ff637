// hard_tanh: piecewise-linear replacement of tanh, used for the LSTM candidate
// value g_t and for the cell state before the output gate (Fig. 3 of the paper).
//
// y = clamp(x, -1, +1) with 1.0 = 2^FRAC_W in the fc_pkg tensor format. The
// paper names HardTanh; the definition is the standard one. Purely
// combinational.
module hard_tanh
  import fc_pkg::*;
(
  input  data_t x,
  output data_t y
);
  always_comb begin
    if (x > ONE)       y = ONE;
    else if (x < -ONE) y = -ONE;
    else               y = x;
  end
endmodule
