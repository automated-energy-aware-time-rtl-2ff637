// output_projection: "Output Projection" of Fig. 2: global average pooling
// over the tokens, [n, d] -> [1, d], then the output linear layer d -> 1 that
// gives the forecast Y[1, 1].
//
// global_avg_pool (N*D cycles + 1) followed by linear_layer (D + 2 cycles),
// chained on done. The encoder output is read through x_addr/x_data.
// Parameters (w_*): [0, D) output weights, D output bias.
module output_projection
  import fc_pkg::*;
#(
  parameter int unsigned SEQ_LEN = 24,
  parameter int unsigned D_MODEL = 40,
  localparam int unsigned AW  = $clog2(D_MODEL+1),
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
  output logic [MAW-1:0] x_addr,
  input  data_t          x_data,
  output data_t          y
);
  logic  gap_busy, gap_done, lin_busy;
  data_t pooled [D_MODEL];

  global_avg_pool #(.SEQ_LEN(SEQ_LEN), .D_MODEL(D_MODEL)) u_gap (
    .clk, .rst_n, .start, .busy(gap_busy), .done(gap_done),
    .x_addr, .x_data, .pooled
  );

  linear_layer #(.IN_DIM(D_MODEL)) u_lin (
    .clk, .rst_n, .w_we, .w_addr, .w_data,
    .start(gap_done), .x(pooled), .busy(lin_busy), .done, .y
  );

  always_comb busy = gap_busy || lin_busy;
endmodule
