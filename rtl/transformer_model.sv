// transformer_model: the encoder-only Transformer forecaster of the paper
// (Fig. 2): input projection with positional encoding, one encoder layer
// (one-head self-attention, residual add, BatchNorm, two-layer feed-forward
// network of width 4d, residual add, BatchNorm) and an output projection
// (global average pooling, linear d -> 1). Defaults are the paper's selected
// configuration for n = 24: d_model = 40, 8-bit.
//
// The stages run strictly one after another, each on the previous one's
// done, and each with one multiply-accumulate unit, so the latency is close to
// the number of MACs of the model:
//   N*D+1 (input proj.) + 4*(N*D*D+1) + N*(2ND+2N+32)+1 (attention)
//   + 2*(N*D+1) (BatchNorms) + 2*(4*N*D*D+1) (FFN) + N*D+1 (pooling) + D+2
// = 512 693 cycles (5.127 ms at 100 MHz) for N = 24, D = 40.
// Intermediate tensors E, R1, X1, R2, X2 (each N x D) sit in act_buffers.
//
// Parameter map (p_*), 12*D^2 + 16*D + 1 values (19 841 = 19.84 KB at 8 bit
// for D = 40, the model size the paper reports):
//   input_projection 2D | self_attention 4(D^2+D) | BatchNorm1 2D |
//   feedforward 8D^2+5D | BatchNorm2 2D | output_projection D+1
// Input samples are read through x_addr/x_data; done pulses with y valid.
module transformer_model
  import fc_pkg::*;
#(
  parameter int unsigned SEQ_LEN = 24,
  parameter int unsigned D_MODEL = 40,
  localparam int unsigned D      = D_MODEL,
  localparam int unsigned NPARAM = 12*D*D + 16*D + 1,
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
  localparam int unsigned MAW   = $clog2(SEQ_LEN*D);
  localparam int unsigned DEPTH = SEQ_LEN*D;
  // parameter map offsets
  localparam int unsigned O_IN  = 0;
  localparam int unsigned O_ATT = O_IN  + 2*D;
  localparam int unsigned O_BN1 = O_ATT + 4*(D*D + D);
  localparam int unsigned O_FFN = O_BN1 + 2*D;
  localparam int unsigned O_BN2 = O_FFN + 8*D*D + 5*D;
  localparam int unsigned O_OUT = O_BN2 + 2*D;

  localparam int unsigned AW_IN  = $clog2(2*D);
  localparam int unsigned AW_ATT = $clog2(4*(D*D + D));
  localparam int unsigned AW_FFN = $clog2(8*D*D + 5*D);
  localparam int unsigned AW_OUT = $clog2(D + 1);

  function automatic logic in_range(logic [AW-1:0] a, int unsigned lo, int unsigned n);
    return (32'(a) >= lo) && (32'(a) < lo + n);
  endfunction

  logic we_in, we_att, we_bn1, we_ffn, we_bn2, we_out;
  always_comb begin
    we_in  = p_we && in_range(p_addr, O_IN,  2*D);
    we_att = p_we && in_range(p_addr, O_ATT, 4*(D*D + D));
    we_bn1 = p_we && in_range(p_addr, O_BN1, 2*D);
    we_ffn = p_we && in_range(p_addr, O_FFN, 8*D*D + 5*D);
    we_bn2 = p_we && in_range(p_addr, O_BN2, 2*D);
    we_out = p_we && in_range(p_addr, O_OUT, D + 1);
  end

  // stage handshakes
  logic in_busy, in_done, att_busy, att_done, bn1_busy, bn1_done;
  logic ffn_busy, ffn_done, bn2_busy, bn2_done, out_busy;

  // tensor buffers: write port from the producer, read port for the consumer
  logic           e_we, r1_we, x1_we, r2_we, x2_we;
  logic [MAW-1:0] e_wa, r1_wa, x1_wa, r2_wa, x2_wa;
  logic [MAW-1:0] e_ra, r1_ra, x1_ra, r2_ra, x2_ra;
  data_t          e_wd, r1_wd, x1_wd, r2_wd, x2_wd;
  data_t          e_rd, r1_rd, x1_rd, r2_rd, x2_rd;

  act_buffer #(.DEPTH(DEPTH)) u_e  (.clk, .we(e_we),  .waddr(e_wa),  .wdata(e_wd),  .raddr(e_ra),  .rdata(e_rd));
  act_buffer #(.DEPTH(DEPTH)) u_r1 (.clk, .we(r1_we), .waddr(r1_wa), .wdata(r1_wd), .raddr(r1_ra), .rdata(r1_rd));
  act_buffer #(.DEPTH(DEPTH)) u_x1 (.clk, .we(x1_we), .waddr(x1_wa), .wdata(x1_wd), .raddr(x1_ra), .rdata(x1_rd));
  act_buffer #(.DEPTH(DEPTH)) u_r2 (.clk, .we(r2_we), .waddr(r2_wa), .wdata(r2_wd), .raddr(r2_ra), .rdata(r2_rd));
  act_buffer #(.DEPTH(DEPTH)) u_x2 (.clk, .we(x2_we), .waddr(x2_wa), .wdata(x2_wd), .raddr(x2_ra), .rdata(x2_rd));

  input_projection #(.SEQ_LEN(SEQ_LEN), .D_MODEL(D)) u_in (
    .clk, .rst_n, .w_we(we_in), .w_addr(AW_IN'(p_addr - AW'(O_IN))), .w_data(p_data),
    .start, .busy(in_busy), .done(in_done),
    .x_addr, .x_data,
    .y_we(e_we), .y_addr(e_wa), .y_data(e_wd)
  );

  self_attention #(.SEQ_LEN(SEQ_LEN), .D_MODEL(D)) u_att (
    .clk, .rst_n, .w_we(we_att), .w_addr(AW_ATT'(p_addr - AW'(O_ATT))), .w_data(p_data),
    .start(in_done), .busy(att_busy), .done(att_done),
    .e_addr(e_ra), .e_data(e_rd),
    .y_we(r1_we), .y_addr(r1_wa), .y_data(r1_wd)
  );

  batchnorm #(.SEQ_LEN(SEQ_LEN), .D_MODEL(D)) u_bn1 (
    .clk, .rst_n, .w_we(we_bn1), .w_addr(AW_IN'(p_addr - AW'(O_BN1))), .w_data(p_data),
    .start(att_done), .busy(bn1_busy), .done(bn1_done),
    .x_addr(r1_ra), .x_data(r1_rd),
    .y_we(x1_we), .y_addr(x1_wa), .y_data(x1_wd)
  );

  feedforward #(.SEQ_LEN(SEQ_LEN), .D_MODEL(D)) u_ffn (
    .clk, .rst_n, .w_we(we_ffn), .w_addr(AW_FFN'(p_addr - AW'(O_FFN))), .w_data(p_data),
    .start(bn1_done), .busy(ffn_busy), .done(ffn_done),
    .x_addr(x1_ra), .x_data(x1_rd),
    .y_we(r2_we), .y_addr(r2_wa), .y_data(r2_wd)
  );

  batchnorm #(.SEQ_LEN(SEQ_LEN), .D_MODEL(D)) u_bn2 (
    .clk, .rst_n, .w_we(we_bn2), .w_addr(AW_IN'(p_addr - AW'(O_BN2))), .w_data(p_data),
    .start(ffn_done), .busy(bn2_busy), .done(bn2_done),
    .x_addr(r2_ra), .x_data(r2_rd),
    .y_we(x2_we), .y_addr(x2_wa), .y_data(x2_wd)
  );

  output_projection #(.SEQ_LEN(SEQ_LEN), .D_MODEL(D)) u_out (
    .clk, .rst_n, .w_we(we_out), .w_addr(AW_OUT'(p_addr - AW'(O_OUT))), .w_data(p_data),
    .start(bn2_done), .busy(out_busy), .done,
    .x_addr(x2_ra), .x_data(x2_rd), .y
  );

  always_comb busy = in_busy || att_busy || bn1_busy || ffn_busy || bn2_busy || out_busy;
endmodule
