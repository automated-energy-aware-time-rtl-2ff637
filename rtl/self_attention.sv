// self_attention: the "One-Head Self-Attention" block of Fig. 2 together with
// the residual addition that follows it:
//   Q = E Wq + bq, K = E Wk + bk, V = E Wv + bv       (seq_linear, d -> d)
//   A = softmax(Q K^T / sqrt(d)) V                     (attention_core)
//   R1 = sat(A Wo + bo + E)                           (seq_linear with residual)
// All projections share the width d = D_MODEL, as the paper states.
//
// The five stages run one after another, each starting on the previous one's
// done; Q, K, V and A live in local act_buffers. Latency:
// 4*(N*D*D+1) + N*(2*N*D+2*N+32) + 1 cycles for N = SEQ_LEN, D = D_MODEL.
// E is read through e_addr/e_data (by the Q, K, V stages and, as the residual,
// by the output stage); R1 is written through y_*. Parameter map (w_*):
// Wq,bq | Wk,bk | Wv,bv | Wo,bo, each D*D weights (row-major, out*D+in) then D
// biases. Including the output projection Wo is this design's reading; it is
// needed to reach the paper's 19.84 KB model size.
module self_attention
  import fc_pkg::*;
#(
  parameter int unsigned SEQ_LEN = 24,
  parameter int unsigned D_MODEL = 40,
  localparam int unsigned PP  = D_MODEL*D_MODEL + D_MODEL,   // per projection
  localparam int unsigned AW  = $clog2(4*PP),
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
  output logic [MAW-1:0] e_addr,
  input  data_t          e_data,
  output logic           y_we,
  output logic [MAW-1:0] y_addr,
  output data_t          y_data
);
  localparam int unsigned PAW = $clog2(PP);
  localparam int unsigned DEPTH = SEQ_LEN*D_MODEL;

  logic           pw_we [4];
  logic [PAW-1:0] pw_addr [4];

  always_comb begin
    for (int p = 0; p < 4; p++) begin
      pw_we[p]   = w_we && (32'(w_addr) >= 32'(p*PP)) && (32'(w_addr) < 32'((p+1)*PP));
      pw_addr[p] = PAW'(w_addr - AW'(p*PP));
    end
  end

  // projection stages: 0 = Q, 1 = K, 2 = V, 3 = output
  logic           st_start [4], st_busy [4], st_done [4];
  logic [MAW-1:0] st_xaddr [4], st_raddr [4], st_yaddr [4];
  logic           st_ywe   [4];
  data_t          st_xdata [4], st_ydata [4];
  logic           core_busy, core_done;

  for (genvar p = 0; p < 3; p++) begin : g_qkv
    seq_linear #(.IN_DIM(D_MODEL), .OUT_DIM(D_MODEL), .SEQ_LEN(SEQ_LEN),
                 .RELU(1'b0), .RESIDUAL(1'b0)) u_proj (
      .clk, .rst_n, .w_we(pw_we[p]), .w_addr(pw_addr[p]), .w_data,
      .start(st_start[p]), .busy(st_busy[p]), .done(st_done[p]),
      .x_addr(st_xaddr[p]), .x_data(st_xdata[p]),
      .r_addr(st_raddr[p]), .r_data(data_t'(0)),
      .y_we(st_ywe[p]), .y_addr(st_yaddr[p]), .y_data(st_ydata[p])
    );
  end

  seq_linear #(.IN_DIM(D_MODEL), .OUT_DIM(D_MODEL), .SEQ_LEN(SEQ_LEN),
               .RELU(1'b0), .RESIDUAL(1'b1)) u_out (
    .clk, .rst_n, .w_we(pw_we[3]), .w_addr(pw_addr[3]), .w_data,
    .start(st_start[3]), .busy(st_busy[3]), .done(st_done[3]),
    .x_addr(st_xaddr[3]), .x_data(st_xdata[3]),
    .r_addr(st_raddr[3]), .r_data(e_data),
    .y_we(st_ywe[3]), .y_addr(st_yaddr[3]), .y_data(st_ydata[3])
  );

  // Q, K, V and attention-output buffers
  logic [MAW-1:0] q_raddr, k_raddr, v_raddr, a_waddr;
  data_t          q_rdata, k_rdata, v_rdata, a_rdata, a_wdata;
  logic           a_we;

  act_buffer #(.DEPTH(DEPTH)) u_qbuf (.clk, .we(st_ywe[0]), .waddr(st_yaddr[0]), .wdata(st_ydata[0]),
                                      .raddr(q_raddr), .rdata(q_rdata));
  act_buffer #(.DEPTH(DEPTH)) u_kbuf (.clk, .we(st_ywe[1]), .waddr(st_yaddr[1]), .wdata(st_ydata[1]),
                                      .raddr(k_raddr), .rdata(k_rdata));
  act_buffer #(.DEPTH(DEPTH)) u_vbuf (.clk, .we(st_ywe[2]), .waddr(st_yaddr[2]), .wdata(st_ydata[2]),
                                      .raddr(v_raddr), .rdata(v_rdata));
  act_buffer #(.DEPTH(DEPTH)) u_abuf (.clk, .we(a_we), .waddr(a_waddr), .wdata(a_wdata),
                                      .raddr(st_xaddr[3]), .rdata(a_rdata));

  attention_core #(.SEQ_LEN(SEQ_LEN), .D_MODEL(D_MODEL)) u_core (
    .clk, .rst_n, .start(st_done[2]), .busy(core_busy), .done(core_done),
    .q_addr(q_raddr), .q_data(q_rdata),
    .k_addr(k_raddr), .k_data(k_rdata),
    .v_addr(v_raddr), .v_data(v_rdata),
    .a_we, .a_addr(a_waddr), .a_data(a_wdata)
  );

  always_comb begin
    st_start[0] = start;
    st_start[1] = st_done[0];
    st_start[2] = st_done[1];
    st_start[3] = core_done;
    st_xdata[0] = e_data;
    st_xdata[1] = e_data;
    st_xdata[2] = e_data;
    st_xdata[3] = a_rdata;
    // E is read by the active Q/K/V stage, else as the output stage's residual
    if (st_busy[0])      e_addr = st_xaddr[0];
    else if (st_busy[1]) e_addr = st_xaddr[1];
    else if (st_busy[2]) e_addr = st_xaddr[2];
    else                 e_addr = st_raddr[3];
    y_we   = st_ywe[3];
    y_addr = st_yaddr[3];
    y_data = st_ydata[3];
    busy   = st_busy[0] || st_busy[1] || st_busy[2] || core_busy || st_busy[3];
    done   = st_done[3];
  end
endmodule
