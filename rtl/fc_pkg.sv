// fc_pkg: number format and arithmetic shared by every block of the forecasting
// accelerator.
//
// All tensors (inputs, weights, biases, activations, LSTM states) are signed
// DATA_W-bit integers with a power-of-two scale of 2^-FRAC_W and zero point 0.
// This is an integer-only quantization: no floating point is used anywhere.
// The paper's selected configurations use 8 bit, so DATA_W defaults to 8. The
// paper does not give the scale scheme of its modules, and the choice of a fixed
// binary point with FRAC_W = 4 fraction bits (range -8.0 .. +7.94, step 1/16) is
// this design's own.
//
// Products of two values carry 2*FRAC_W fraction bits. They are summed in an
// ACC_W-bit accumulator and brought back to the tensor format by fxp_requant:
// round half up, arithmetic shift right by FRAC_W, saturate to DATA_W bits.
package fc_pkg;

  parameter int unsigned DATA_W = 8;   // quantization bitwidth b
  parameter int unsigned FRAC_W = 4;   // fraction bits of every tensor
  parameter int unsigned ACC_W  = 32;  // accumulator width

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  localparam data_t DATA_MAX = data_t'((1 << (DATA_W-1)) - 1);
  localparam data_t DATA_MIN = data_t'(-(1 << (DATA_W-1)));
  localparam data_t ONE      = data_t'(1 << FRAC_W);   // 1.0 in tensor format

  // Model family generated into the accelerator
  typedef enum logic {MODEL_LSTM = 1'b0, MODEL_TRANSFORMER = 1'b1} model_e;

  // Saturate an accumulator value to the tensor range.
  function automatic data_t fxp_sat(input acc_t v);
    if (v > acc_t'(DATA_MAX))      return DATA_MAX;
    else if (v < acc_t'(DATA_MIN)) return DATA_MIN;
    else                           return data_t'(v);
  endfunction

  // Accumulator (2*FRAC_W fraction bits) to tensor format.
  function automatic data_t fxp_requant(input acc_t v);
    acc_t r;
    r = (v + acc_t'(1 << (FRAC_W-1))) >>> FRAC_W;
    return fxp_sat(r);
  endfunction

  // Bias (tensor format) aligned to accumulator format.
  function automatic acc_t fxp_bias(input data_t b);
    return acc_t'(b) <<< FRAC_W;
  endfunction

  // Product of two tensor values, requantized.
  function automatic data_t fxp_mul(input data_t a, input data_t b);
    return fxp_requant(acc_t'(a) * acc_t'(b));
  endfunction

  // Saturating sum of two tensor values.
  function automatic data_t fxp_add(input data_t a, input data_t b);
    return fxp_sat(acc_t'(a) + acc_t'(b));
  endfunction

endpackage
