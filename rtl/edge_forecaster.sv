// edge_forecaster: top of the FPGA accelerator of a battery-powered
// combined-sewer-overflow forecasting node (ElasticNode V5: an RP2040 MCU and a
// Spartan-7 XC7S15 FPGA clocked at 100 MHz). The MCU wakes up periodically,
// writes the last SEQ_LEN normalized hourly basin filling levels and starts an
// inference; the accelerator returns the one-step-ahead forecast of the level
// using an integer-only quantized neural network, raises irq, and can then be
// powered down.
//
// As in the paper's deployment flow, one model family is generated into the
// FPGA at a time, selected by MODEL:
//   MODEL_TRANSFORMER  transformer_model (encoder-only, d_model = D_MODEL)
//   MODEL_LSTM         lstm_model (one LSTM layer of HIDDEN units + linear)
// Defaults are the paper's selected n = 24 configurations, 8-bit: the
// Transformer with d_model = 40 (the default family, the one the paper's
// abstract leads with) and, for MODEL_LSTM, h_size = 16.
// Blocks: host_if (bus from the MCU), window_buffer (input window), the model.
// Latency of one inference (start to irq): transformer 512 693 cycles
// (5.127 ms), LSTM 6 979 cycles (0.070 ms) at the defaults.
// Bus map and timing: see host_if. Parameter writes beyond the model's
// parameter count are ignored.
module edge_forecaster
  import fc_pkg::*;
#(
  parameter model_e      MODEL   = MODEL_TRANSFORMER,
  parameter int unsigned SEQ_LEN = 24,
  parameter int unsigned D_MODEL = 40,
  parameter int unsigned HIDDEN  = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        bus_we,
  input  logic [15:0] bus_addr,
  input  logic [31:0] bus_wdata,
  output logic [31:0] bus_rdata,
  output logic        irq
);
  localparam int unsigned PAR_AW = 15;
  localparam int unsigned TW     = $clog2(SEQ_LEN);
  localparam int unsigned NPARAM = (MODEL == MODEL_LSTM) ? 4*HIDDEN*HIDDEN + 9*HIDDEN + 1
                                                         : 12*D_MODEL*D_MODEL + 16*D_MODEL + 1;

  logic              win_we, par_we, eng_we, eng_start, eng_busy, eng_done;
  logic [TW-1:0]     win_addr, x_addr;
  data_t             win_data, par_data, x_data, eng_y;
  logic [PAR_AW-1:0] par_addr;

  host_if #(.SEQ_LEN(SEQ_LEN), .PAR_AW(PAR_AW)) u_host (
    .clk, .rst_n, .bus_we, .bus_addr, .bus_wdata, .bus_rdata, .irq,
    .win_we, .win_addr, .win_data,
    .par_we, .par_addr, .par_data,
    .eng_start, .eng_busy, .eng_done, .eng_y
  );

  window_buffer #(.SEQ_LEN(SEQ_LEN)) u_window (
    .clk, .we(win_we), .waddr(win_addr), .wdata(win_data),
    .raddr(x_addr), .rdata(x_data)
  );

  always_comb eng_we = par_we && (32'(par_addr) < NPARAM);

  if (MODEL == MODEL_LSTM) begin : g_lstm
    localparam int unsigned LAW = $clog2(4*HIDDEN*HIDDEN + 9*HIDDEN + 1);
    lstm_model #(.HIDDEN(HIDDEN), .SEQ_LEN(SEQ_LEN)) u_model (
      .clk, .rst_n,
      .p_we(eng_we), .p_addr(LAW'(par_addr)), .p_data(par_data),
      .start(eng_start), .x_addr, .x_data,
      .busy(eng_busy), .done(eng_done), .y(eng_y)
    );
  end else begin : g_transformer
    localparam int unsigned TAW = $clog2(12*D_MODEL*D_MODEL + 16*D_MODEL + 1);
    transformer_model #(.SEQ_LEN(SEQ_LEN), .D_MODEL(D_MODEL)) u_model (
      .clk, .rst_n,
      .p_we(eng_we), .p_addr(TAW'(par_addr)), .p_data(par_data),
      .start(eng_start), .x_addr, .x_data,
      .busy(eng_busy), .done(eng_done), .y(eng_y)
    );
  end
endmodule
