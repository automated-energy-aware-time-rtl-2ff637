// global_avg_pool: "Global Average Pooling & Flatten" of Fig. 2, the mean of
// each of the D_MODEL channels over the SEQ_LEN tokens, [n, d] -> [1, d].
//
// Channel-major scan, one element per cycle: the sum of a channel is scaled by
// RECIP_N = round(2^16/SEQ_LEN), rounded and saturated into pooled[c] when the
// last token of the channel is read. SEQ_LEN*D_MODEL cycles, then done; pooled
// holds the result until the next start. Read port x_addr/x_data (row-major,
// asynchronous). The paper names the block; the reciprocal-multiply division
// is this design's own.
module global_avg_pool
  import fc_pkg::*;
#(
  parameter int unsigned SEQ_LEN = 24,
  parameter int unsigned D_MODEL = 40,
  localparam int unsigned MAW = $clog2(SEQ_LEN*D_MODEL)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  output logic           busy,
  output logic           done,
  output logic [MAW-1:0] x_addr,
  input  data_t          x_data,
  output data_t          pooled [D_MODEL]
);
  localparam int unsigned CW = (D_MODEL > 1) ? $clog2(D_MODEL) : 1;
  localparam int unsigned SW = (SEQ_LEN > 1) ? $clog2(SEQ_LEN) : 1;
  localparam longint RECIP_N = ((longint'(1) << 16) + longint'(SEQ_LEN/2)) / longint'(SEQ_LEN);

  typedef enum logic [1:0] {G_IDLE, G_RUN, G_DONE} state_e;
  state_e state;
  logic [CW-1:0]  c;
  logic [SW-1:0]  s;
  logic [MAW-1:0] addr;
  acc_t           sum;
  acc_t           sum_next;
  longint         avg;

  always_comb begin
    sum_next = ((s == '0) ? acc_t'(0) : sum) + acc_t'(x_data);
    avg      = (longint'(sum_next) * RECIP_N + (longint'(1) << 15)) >>> 16;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= G_IDLE;
      c <= '0; s <= '0; addr <= '0; sum <= '0;
      for (int k = 0; k < D_MODEL; k++) pooled[k] <= '0;
    end else begin
      unique case (state)
        G_IDLE: if (start) begin
          state <= G_RUN;
          c <= '0; s <= '0; addr <= '0;
        end
        G_RUN: begin
          sum <= sum_next;
          if (s != SW'(SEQ_LEN-1)) begin
            s    <= s + SW'(1);
            addr <= addr + MAW'(D_MODEL);
          end else begin
            pooled[c] <= fxp_sat(acc_t'(avg));
            s <= '0;
            if (c == CW'(D_MODEL-1)) state <= G_DONE;
            else begin
              c    <= c + CW'(1);
              addr <= MAW'(c) + MAW'(1);
            end
          end
        end
        G_DONE: state <= G_IDLE;
        default: state <= G_IDLE;
      endcase
    end
  end

  always_comb begin
    x_addr = addr;
    busy   = (state != G_IDLE);
    done   = (state == G_DONE);
  end
endmodule
