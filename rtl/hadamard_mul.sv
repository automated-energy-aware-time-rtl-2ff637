// hadamard_mul: element-wise (Hadamard) product of two vectors of LANES values,
// as used by the LSTM cell for f*c, i*g and o*tanh(c).
//
// Each lane multiplies two tensor values, rounds and shifts the product back
// by FRAC_W bits and saturates it to DATA_W bits (fc_pkg::fxp_mul). The paper
// lists the Hadamard product as one of its LSTM modules; the rounding and
// saturation are this design's choice. Combinational; the LSTM cell uses one
// lane per product because it updates one hidden unit per step.
module hadamard_mul
  import fc_pkg::*;
#(
  parameter int unsigned LANES = 1
) (
  input  data_t a [LANES],
  input  data_t b [LANES],
  output data_t y [LANES]
);
  always_comb begin
    for (int i = 0; i < LANES; i++) y[i] = fxp_mul(a[i], b[i]);
  end
endmodule
