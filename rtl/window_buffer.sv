// window_buffer: holds the input window {x_{t-n}, .., x_{t-1}} of SEQ_LEN
// normalized basin-level samples that the host MCU transfers before each
// inference (the paper: the MCU collects sensor data and transfers it to the
// FPGA). Index 0 is the oldest sample.
//
// One synchronous write port for the host, one asynchronous read port for the
// model engine. The paper states only that the data is transferred; the
// buffer as a small register-file memory is this design's own choice.
module window_buffer
  import fc_pkg::*;
#(
  parameter int unsigned SEQ_LEN = 24,
  localparam int unsigned TW = $clog2(SEQ_LEN)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [TW-1:0] waddr,
  input  data_t         wdata,
  input  logic [TW-1:0] raddr,
  output data_t         rdata
);
  data_t mem [SEQ_LEN];

  always_ff @(posedge clk) begin
    if (we && 32'(waddr) < 32'(SEQ_LEN)) mem[waddr] <= wdata;
  end

  always_comb rdata = (32'(raddr) < 32'(SEQ_LEN)) ? mem[raddr] : '0;
endmodule
