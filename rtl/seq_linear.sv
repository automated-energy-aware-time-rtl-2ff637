// seq_linear: dense layer applied to every row of a sequence,
//   Y[s][o] = act( b[o] + sum_i W[o][i] * X[s][i]  (+ R[s][o]) ),
// the building block of the Transformer's input projection, Q/K/V/output
// projections and the two feed-forward layers (Fig. 2 of the paper).
//
// One multiply-accumulate per cycle: each output takes exactly IN_DIM cycles
// (the bias enters with the first product) and is written in the cycle of its
// last product, so the layer takes SEQ_LEN*OUT_DIM*IN_DIM cycles plus one for
// done. The result is requantized (round, shift by FRAC_W, saturate); with
// RESIDUAL it is then added, saturating, to R[s][o] read through r_addr/r_data
// (used for the residual connections and for adding the positional encoding);
// with RELU negative results become zero. Activations are read through an
// asynchronous port x_addr/x_data (row-major, s*IN_DIM+i) and written through
// y_we/y_addr/y_data (s*OUT_DIM+o). Parameters: w_* port, [0, OUT*IN) weights
// row-major (o*IN_DIM+i), then OUT_DIM biases.
// The paper gives the layers; the one-MAC serial schedule is this design's own,
// chosen because it reproduces the paper's Transformer latency.
module seq_linear
  import fc_pkg::*;
#(
  parameter int unsigned IN_DIM   = 40,
  parameter int unsigned OUT_DIM  = 40,
  parameter int unsigned SEQ_LEN  = 24,
  parameter bit          RELU     = 1'b0,
  parameter bit          RESIDUAL = 1'b0,
  localparam int unsigned NW     = OUT_DIM*IN_DIM,
  localparam int unsigned NPARAM = NW + OUT_DIM,
  localparam int unsigned AW     = $clog2(NPARAM),
  localparam int unsigned XAW    = (SEQ_LEN*IN_DIM  > 1) ? $clog2(SEQ_LEN*IN_DIM)  : 1,
  localparam int unsigned YAW    = (SEQ_LEN*OUT_DIM > 1) ? $clog2(SEQ_LEN*OUT_DIM) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           w_we,
  input  logic [AW-1:0]  w_addr,
  input  data_t          w_data,
  input  logic           start,
  output logic           busy,
  output logic           done,
  output logic [XAW-1:0] x_addr,
  input  data_t          x_data,
  output logic [YAW-1:0] r_addr,
  input  data_t          r_data,
  output logic           y_we,
  output logic [YAW-1:0] y_addr,
  output data_t          y_data
);
  localparam int unsigned WAW = (NW > 1) ? $clog2(NW) : 1;
  localparam int unsigned IW  = (IN_DIM > 1) ? $clog2(IN_DIM) : 1;
  localparam int unsigned OW  = (OUT_DIM > 1) ? $clog2(OUT_DIM) : 1;
  localparam int unsigned SW  = (SEQ_LEN > 1) ? $clog2(SEQ_LEN) : 1;

  data_t w_mem [NW];
  data_t b_mem [OUT_DIM];

  always_ff @(posedge clk) begin
    if (w_we) begin
      if (32'(w_addr) < 32'(NW))          w_mem[WAW'(w_addr)] <= w_data;
      else if (32'(w_addr) < 32'(NPARAM)) b_mem[OW'(w_addr - AW'(NW))] <= w_data;
    end
  end

  typedef enum logic [1:0] {Q_IDLE, Q_RUN, Q_DONE} state_e;
  state_e state;

  logic [SW-1:0]  s;
  logic [OW-1:0]  o;
  logic [IW-1:0]  i;
  logic [WAW-1:0] wa;      // o*IN_DIM + i
  logic [XAW-1:0] xbase;   // s*IN_DIM
  logic [YAW-1:0] ya;      // s*OUT_DIM + o
  acc_t           acc;

  acc_t  acc_next;
  data_t res;

  always_comb begin
    acc_next = ((i == '0) ? fxp_bias(b_mem[o]) : acc)
             + acc_t'(w_mem[wa]) * acc_t'(x_data);
    res = fxp_requant(acc_next);
    if (RESIDUAL) res = fxp_add(res, r_data);
    if (RELU && res < 0) res = '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= Q_IDLE;
      s <= '0; o <= '0; i <= '0; wa <= '0; xbase <= '0; ya <= '0;
      acc <= '0;
    end else begin
      unique case (state)
        Q_IDLE: if (start) begin
          state <= Q_RUN;
          s <= '0; o <= '0; i <= '0; wa <= '0; xbase <= '0; ya <= '0;
        end
        Q_RUN: begin
          acc <= acc_next;
          if (i != IW'(IN_DIM-1)) begin
            i  <= i + IW'(1);
            wa <= wa + WAW'(1);
          end else begin
            i  <= '0;
            ya <= ya + YAW'(1);
            if (o != OW'(OUT_DIM-1)) begin
              o  <= o + OW'(1);
              wa <= wa + WAW'(1);
            end else begin
              o     <= '0;
              wa    <= '0;
              xbase <= xbase + XAW'(IN_DIM);
              if (s == SW'(SEQ_LEN-1)) state <= Q_DONE;
              else                     s     <= s + SW'(1);
            end
          end
        end
        Q_DONE: state <= Q_IDLE;
        default: state <= Q_IDLE;
      endcase
    end
  end

  always_comb begin
    x_addr = xbase + XAW'(i);
    r_addr = ya;
    y_addr = ya;
    y_we   = (state == Q_RUN) && (i == IW'(IN_DIM-1));
    y_data = res;
    busy   = (state != Q_IDLE);
    done   = (state == Q_DONE);
  end
endmodule
