// feedforward: the two-layer "FeedForward Network" of Fig. 2 with the
// residual addition that follows it:
//   Hd = ReLU(X1 W1 + b1)      (d -> 4d, the hidden width the paper gives)
//   R2 = sat(Hd W2 + b2 + X1)  (4d -> d, residual from the FFN input)
// The paper gives the widths; the ReLU activation is this design's assumption.
//
// Two seq_linear stages run one after the other, the hidden activation in a
// local act_buffer. Latency 2*(N*4*D*D + 1) cycles. X1 is read through
// x_addr/x_data (by the first layer, then as the residual by the second), R2 is
// written through y_*. Parameter map: W1 (4D x D, row-major), b1 (4D),
// W2 (D x 4D), b2 (D). The first layer has no residual, so its residual read
// address (f1_raddr) is left unused and its residual input is tied to zero.
module feedforward
  import fc_pkg::*;
#(
  parameter int unsigned SEQ_LEN = 24,
  parameter int unsigned D_MODEL = 40,
  localparam int unsigned P1  = 4*D_MODEL*D_MODEL + 4*D_MODEL,
  localparam int unsigned P2  = 4*D_MODEL*D_MODEL + D_MODEL,
  localparam int unsigned AW  = $clog2(P1 + P2),
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
  output logic           y_we,
  output logic [MAW-1:0] y_addr,
  output data_t          y_data
);
  localparam int unsigned D4    = 4*D_MODEL;
  localparam int unsigned HAW   = $clog2(SEQ_LEN*D4);
  localparam int unsigned P1W   = $clog2(P1);
  localparam int unsigned P2W   = $clog2(P2);

  logic           w1_we, w2_we;
  logic [P1W-1:0] w1_addr;
  logic [P2W-1:0] w2_addr;
  always_comb begin
    w1_we   = w_we && (32'(w_addr) < 32'(P1));
    w2_we   = w_we && (32'(w_addr) >= 32'(P1)) && (32'(w_addr) < 32'(P1 + P2));
    w1_addr = P1W'(w_addr);
    w2_addr = P2W'(w_addr - AW'(P1));
  end

  logic           f1_busy, f1_done, f2_busy;
  logic [MAW-1:0] f1_xaddr, f2_raddr;
  logic [HAW-1:0] f1_raddr, h_waddr, h_raddr;
  logic           h_we;
  data_t          h_wdata, h_rdata;

  seq_linear #(.IN_DIM(D_MODEL), .OUT_DIM(D4), .SEQ_LEN(SEQ_LEN),
               .RELU(1'b1), .RESIDUAL(1'b0)) u_ffn1 (
    .clk, .rst_n, .w_we(w1_we), .w_addr(w1_addr), .w_data,
    .start, .busy(f1_busy), .done(f1_done),
    .x_addr(f1_xaddr), .x_data,
    .r_addr(f1_raddr), .r_data(data_t'(0)),
    .y_we(h_we), .y_addr(h_waddr), .y_data(h_wdata)
  );

  act_buffer #(.DEPTH(SEQ_LEN*D4)) u_hbuf (
    .clk, .we(h_we), .waddr(h_waddr), .wdata(h_wdata), .raddr(h_raddr), .rdata(h_rdata)
  );

  seq_linear #(.IN_DIM(D4), .OUT_DIM(D_MODEL), .SEQ_LEN(SEQ_LEN),
               .RELU(1'b0), .RESIDUAL(1'b1)) u_ffn2 (
    .clk, .rst_n, .w_we(w2_we), .w_addr(w2_addr), .w_data,
    .start(f1_done), .busy(f2_busy), .done,
    .x_addr(h_raddr), .x_data(h_rdata),
    .r_addr(f2_raddr), .r_data(x_data),
    .y_we, .y_addr, .y_data
  );

  always_comb begin
    x_addr = f1_busy ? f1_xaddr : f2_raddr;
    busy   = f1_busy || f2_busy;
  end
endmodule
