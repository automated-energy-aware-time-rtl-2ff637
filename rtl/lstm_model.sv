// lstm_model: the complete LSTM forecaster of the paper (Fig. 3): one LSTM
// layer with HIDDEN units run over SEQ_LEN samples, followed by a linear layer
// that maps the final hidden state to the next-step basin filling level.
//
// Parameter memory map (word address p_addr, one DATA_W-bit value each),
// NPARAM = 4H^2 + 9H + 1 values in all (1169 for H = 16, i.e. 1.17 KB at 8 bit,
// the LSTM model size the paper reports):
//   [0, 8H+4H^2)            LSTM cell (see lstm_cell)
//   [8H+4H^2, 8H+4H^2+H)    linear weights
//   8H+4H^2+H               linear bias
// start runs the layer, then the linear layer; done pulses with y valid.
// Latency: SEQ_LEN*(H*(H+2)+2) + H + 3 cycles from start to done.
// Defaults are the paper's selected LSTM for n = 24 (h_size = 16, 8 bit).
module lstm_model
  import fc_pkg::*;
#(
  parameter int unsigned HIDDEN  = 16,
  parameter int unsigned SEQ_LEN = 24,
  localparam int unsigned CELL_P = 8*HIDDEN + 4*HIDDEN*HIDDEN,
  localparam int unsigned NPARAM = CELL_P + HIDDEN + 1,
  localparam int unsigned AW     = $clog2(NPARAM),
  localparam int unsigned TW     = $clog2(SEQ_LEN)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          p_we,
  input  logic [AW-1:0] p_addr,
  input  data_t         p_data,
  input  logic          start,
  output logic [TW-1:0] x_addr,
  input  data_t         x_data,
  output logic          busy,
  output logic          done,
  output data_t         y
);
  localparam int unsigned CAW = $clog2(CELL_P);
  localparam int unsigned LAW = $clog2(HIDDEN+1);

  logic cell_we, lin_we;
  logic [CAW-1:0] cell_addr;
  logic [LAW-1:0] lin_addr;
  logic [AW-1:0]  lin_off;

  always_comb begin
    cell_we   = p_we && (32'(p_addr) < 32'(CELL_P));
    lin_we    = p_we && (32'(p_addr) >= 32'(CELL_P)) && (32'(p_addr) < 32'(NPARAM));
    cell_addr = CAW'(p_addr);
    lin_off   = p_addr - AW'(CELL_P);
    lin_addr  = LAW'(lin_off);
  end

  logic  layer_busy, layer_done, lin_busy;
  data_t h_final [HIDDEN];

  lstm_layer #(.HIDDEN(HIDDEN), .SEQ_LEN(SEQ_LEN)) u_layer (
    .clk, .rst_n,
    .w_we(cell_we), .w_addr(cell_addr), .w_data(p_data),
    .start, .x_addr, .x_data,
    .busy(layer_busy), .done(layer_done), .h_final
  );

  linear_layer #(.IN_DIM(HIDDEN)) u_linear (
    .clk, .rst_n,
    .w_we(lin_we), .w_addr(lin_addr), .w_data(p_data),
    .start(layer_done), .x(h_final),
    .busy(lin_busy), .done, .y
  );

  always_comb busy = layer_busy || lin_busy;
endmodule
