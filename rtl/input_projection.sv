// input_projection: "Input Projection" of Fig. 2. Each of the SEQ_LEN scalar
// samples is mapped to D_MODEL channels by a linear layer (1 -> D_MODEL) and
// the positional encoding is added: E[s][c] = sat(round(w[c]*x[s] + b[c]) + PE[s][c]).
//
// A seq_linear with IN_DIM = 1 whose residual input is the positional_encoding
// ROM: one output per cycle, SEQ_LEN*D_MODEL cycles plus one for done.
// Samples are read from the window buffer through x_addr/x_data; E is written
// through y_we/y_addr/y_data. Parameters: [0, D) weights, [D, 2D) biases.
module input_projection
  import fc_pkg::*;
#(
  parameter int unsigned SEQ_LEN = 24,
  parameter int unsigned D_MODEL = 40,
  localparam int unsigned AW  = $clog2(2*D_MODEL),
  localparam int unsigned TW  = $clog2(SEQ_LEN),
  localparam int unsigned MAW = $clog2(SEQ_LEN*D_MODEL)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           w_we,
  input  logic [AW-1:0]  w_addr,
  input  data_t          w_data,
  input  logic           start,
  output logic           busy,
  output logic           done,
  output logic [TW-1:0]  x_addr,
  input  data_t          x_data,
  output logic           y_we,
  output logic [MAW-1:0] y_addr,
  output data_t          y_data
);
  logic [MAW-1:0] pe_idx;
  data_t          pe;

  positional_encoding #(.SEQ_LEN(SEQ_LEN), .D_MODEL(D_MODEL)) u_pe (
    .idx(pe_idx), .pe
  );

  seq_linear #(.IN_DIM(1), .OUT_DIM(D_MODEL), .SEQ_LEN(SEQ_LEN),
               .RELU(1'b0), .RESIDUAL(1'b1)) u_lin (
    .clk, .rst_n, .w_we, .w_addr, .w_data,
    .start, .busy, .done,
    .x_addr, .x_data,
    .r_addr(pe_idx), .r_data(pe),
    .y_we, .y_addr, .y_data
  );
endmodule
