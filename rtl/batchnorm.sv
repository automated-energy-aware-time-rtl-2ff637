// batchnorm: inference-time BatchNorm over the channel dimension of a
// SEQ_LEN x D_MODEL activation (the two "BatchNorm" blocks of Fig. 2),
//   Y[s][c] = sat( round(g[c] * X[s][c]) + h[c] ),
// where g = gamma/sqrt(var+eps) and h = beta - g*mean are folded offline into
// one scale and one shift per channel (two stored values per channel; with
// them the Transformer's parameter count equals the paper's 19.84 KB).
//
// One element per cycle in row-major order: SEQ_LEN*D_MODEL cycles, then done.
// Read port x_addr/x_data (asynchronous), write port y_we/y_addr/y_data at the
// same index. Parameters: w_* port, [0, D) scales, [D, 2D) shifts.
// The folding and the schedule are this design's own choices.
module batchnorm
  import fc_pkg::*;
#(
  parameter int unsigned SEQ_LEN = 24,
  parameter int unsigned D_MODEL = 40,
  localparam int unsigned AW  = $clog2(2*D_MODEL),
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
  localparam int unsigned CW = (D_MODEL > 1) ? $clog2(D_MODEL) : 1;

  data_t g_mem [D_MODEL];
  data_t h_mem [D_MODEL];

  always_ff @(posedge clk) begin
    if (w_we) begin
      if (32'(w_addr) < 32'(D_MODEL))        g_mem[CW'(w_addr)] <= w_data;
      else if (32'(w_addr) < 32'(2*D_MODEL)) h_mem[CW'(w_addr - AW'(D_MODEL))] <= w_data;
    end
  end

  typedef enum logic [1:0] {B_IDLE, B_RUN, B_DONE} state_e;
  state_e state;
  logic [MAW-1:0] idx;
  logic [CW-1:0]  c;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= B_IDLE;
      idx   <= '0;
      c     <= '0;
    end else begin
      unique case (state)
        B_IDLE: if (start) begin
          state <= B_RUN;
          idx   <= '0;
          c     <= '0;
        end
        B_RUN: begin
          c <= (c == CW'(D_MODEL-1)) ? '0 : c + CW'(1);
          if (idx == MAW'(SEQ_LEN*D_MODEL-1)) state <= B_DONE;
          else                                idx   <= idx + MAW'(1);
        end
        B_DONE: state <= B_IDLE;
        default: state <= B_IDLE;
      endcase
    end
  end

  always_comb begin
    x_addr = idx;
    y_addr = idx;
    y_we   = (state == B_RUN);
    y_data = fxp_add(fxp_mul(g_mem[c], x_data), h_mem[c]);
    busy   = (state != B_IDLE);
    done   = (state == B_DONE);
  end
endmodule
