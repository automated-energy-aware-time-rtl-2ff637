// act_buffer: activation memory of one Transformer stage, DEPTH signed
// values with one synchronous write port (the producing stage) and one
// asynchronous read port (the consuming stage). A plain register-file
// memory; the paper does not describe its buffers, so this is this design's
// own choice.
module act_buffer
  import fc_pkg::*;
#(
  parameter int unsigned DEPTH = 960,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  data_t         wdata,
  input  logic [AW-1:0] raddr,
  output data_t         rdata
);
  data_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we && 32'(waddr) < 32'(DEPTH)) mem[waddr] <= wdata;
  end

  always_comb rdata = (32'(raddr) < 32'(DEPTH)) ? mem[raddr] : '0;
endmodule
