// attention_core: the scaled dot-product part of one-head self-attention,
//   A = softmax(Q K^T / sqrt(D_MODEL)) V,
// for SEQ_LEN tokens of D_MODEL channels, done one query row at a time with
// one multiply-accumulate per cycle (Fig. 2, "One-Head Self-Attention").
//
// Per query row s:
//   SCORE  S[j] = sat(round(sum_i Q[s][i] K[j][i] * INV_SQRT_D / 2^(16+FRAC_W))),
//          INV_SQRT_D = round(2^16/sqrt(D_MODEL)); running maximum kept. N*D cycles.
//   EXP    z = S[j] - max <= 0; u = floor(z * 23637 / 2^14) (z*log2(e), FRAC_W
//          fraction bits); e[j] = ((2^FRAC_W + frac(u)) << (15-FRAC_W)) >> -int(u),
//          i.e. 2^u with a linear fraction, 1.0 = 2^15; sum of e kept. N cycles.
//   DIV    recip = floor(2^31 / sum), restoring division, 32 cycles.
//   NORM   P[j] = min(255, round(e[j]*recip / 2^23)), probabilities with 8
//          fraction bits. N cycles.
//   AV     A[s][o] = sat(round(sum_j P[j] V[j][o] / 2^8)). N*D cycles.
// A row takes 2*N*D + 2*N + 32 cycles, the whole core SEQ_LEN times that plus
// one for done. Q, K, V are read through asynchronous ports, A is written
// through a_we/a_addr/a_data, all row-major (token*D_MODEL + channel).
// The paper names the attention block; its integer softmax (exponent base 2,
// linear fraction, one reciprocal per row) is this design's own.
module attention_core
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
  output logic [MAW-1:0] q_addr,
  input  data_t          q_data,
  output logic [MAW-1:0] k_addr,
  input  data_t          k_data,
  output logic [MAW-1:0] v_addr,
  input  data_t          v_data,
  output logic           a_we,
  output logic [MAW-1:0] a_addr,
  output data_t          a_data
);
  localparam int unsigned N  = SEQ_LEN;
  localparam int unsigned D  = D_MODEL;
  localparam int unsigned NW = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned DW = (D > 1) ? $clog2(D) : 1;
  localparam int unsigned SUM_W = 16 + $clog2(N+1);

  // 2^16/sqrt(D), rounded
  localparam longint INV_SQRT_D = longint'($rtoi($floor(65536.0 / $sqrt(real'(D)) + 0.5)));
  localparam int LOG2E_Q14 = 23637;

  typedef enum logic [2:0] {A_IDLE, A_SCORE, A_EXP, A_DIV, A_NORM, A_AV, A_DONE} state_e;
  state_e state;

  logic [NW-1:0]  s, j;
  logic [DW-1:0]  i;       // channel index in SCORE and AV
  acc_t           acc;
  data_t          sc  [N];
  logic [15:0]    ex  [N];
  logic [7:0]     pr  [N];
  data_t          mx;
  logic [SUM_W-1:0] sum;
  logic [31:0]    quo, rem;
  logic [5:0]     dbit;

  // ---- SCORE datapath
  acc_t  qk_next;
  longint sc_scaled;
  data_t sc_val;
  always_comb begin
    qk_next   = ((i == '0) ? acc_t'(0) : acc) + acc_t'(q_data) * acc_t'(k_data);
    sc_scaled = (longint'(qk_next) * INV_SQRT_D + (longint'(1) << (15 + FRAC_W))) >>> (16 + FRAC_W);
    if (sc_scaled > longint'(DATA_MAX))      sc_val = DATA_MAX;
    else if (sc_scaled < longint'(DATA_MIN)) sc_val = DATA_MIN;
    else                                     sc_val = data_t'(sc_scaled);
  end

  // ---- EXP datapath: 2^(z*log2 e) with linear interpolation of the fraction
  logic signed [DATA_W:0] z;
  acc_t  u;
  acc_t  u_int;
  logic [FRAC_W-1:0] u_frac;
  logic [15:0] e_val;
  always_comb begin
    z      = (DATA_W+1)'(sc[j]) - (DATA_W+1)'(mx);
    u      = (acc_t'(z) * acc_t'(LOG2E_Q14)) >>> 14;
    u_int  = u >>> FRAC_W;                 // <= 0
    u_frac = u[FRAC_W-1:0];
    if (-u_int >= 16) e_val = '0;
    else e_val = 16'((32'((1 << FRAC_W) + int'(u_frac)) << (15 - FRAC_W)) >> (-u_int));
  end

  // ---- DIV step (restoring division of 2^31 by sum)
  logic [32:0] rem_sh;
  always_comb rem_sh = {rem, (dbit == 6'd31)};

  // ---- NORM datapath
  logic [48:0] pn;
  logic [7:0]  p_val;
  always_comb begin
    pn    = (49'(ex[j]) * 49'(quo) + (49'(1) << 22)) >> 23;
    p_val = (pn > 49'd255) ? 8'd255 : pn[7:0];
  end

  // ---- AV datapath
  acc_t  av_next;
  data_t av_val;
  always_comb begin
    av_next = ((j == '0) ? acc_t'(0) : acc) + acc_t'({1'b0, pr[j]}) * acc_t'(v_data);
    av_val  = fxp_sat((av_next + acc_t'(128)) >>> 8);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= A_IDLE;
      s <= '0; j <= '0; i <= '0;
      acc <= '0; mx <= '0; sum <= '0; quo <= '0; rem <= '0; dbit <= '0;
      for (int n = 0; n < N; n++) begin sc[n] <= '0; ex[n] <= '0; pr[n] <= '0; end
    end else begin
      unique case (state)
        A_IDLE: if (start) begin
          state <= A_SCORE;
          s <= '0; j <= '0; i <= '0;
        end
        A_SCORE: begin
          acc <= qk_next;
          if (i != DW'(D-1)) i <= i + DW'(1);
          else begin
            i     <= '0;
            sc[j] <= sc_val;
            if (j == '0 || sc_val > mx) mx <= sc_val;
            if (j == NW'(N-1)) begin
              j     <= '0;
              sum   <= '0;
              state <= A_EXP;
            end else j <= j + NW'(1);
          end
        end
        A_EXP: begin
          ex[j] <= e_val;
          sum   <= sum + SUM_W'(e_val);
          if (j == NW'(N-1)) begin
            j     <= '0;
            rem   <= '0;
            quo   <= '0;
            dbit  <= 6'd31;
            state <= A_DIV;
          end else j <= j + NW'(1);
        end
        A_DIV: begin
          if (rem_sh >= 33'(sum)) begin
            rem <= 32'(rem_sh - 33'(sum));
            quo <= quo | (32'd1 << dbit);
          end else begin
            rem <= rem_sh[31:0];
          end
          if (dbit == '0) state <= A_NORM;
          else            dbit  <= dbit - 6'd1;
        end
        A_NORM: begin
          pr[j] <= p_val;
          if (j == NW'(N-1)) begin
            j     <= '0;
            i     <= '0;
            state <= A_AV;
          end else j <= j + NW'(1);
        end
        A_AV: begin
          acc <= av_next;
          if (j != NW'(N-1)) j <= j + NW'(1);
          else begin
            j <= '0;
            if (i != DW'(D-1)) i <= i + DW'(1);
            else begin
              i <= '0;
              if (s == NW'(N-1)) state <= A_DONE;
              else begin
                s     <= s + NW'(1);
                state <= A_SCORE;
              end
            end
          end
        end
        A_DONE: state <= A_IDLE;
        default: state <= A_IDLE;
      endcase
    end
  end

  always_comb begin
    q_addr = MAW'(32'(s) * D + 32'(i));
    k_addr = MAW'(32'(j) * D + 32'(i));
    v_addr = MAW'(32'(j) * D + 32'(i));
    a_we   = (state == A_AV) && (j == NW'(N-1));
    a_addr = MAW'(32'(s) * D + 32'(i));
    a_data = av_val;
    busy   = (state != A_IDLE);
    done   = (state == A_DONE);
  end

  // the divisor is never zero: the row maximum contributes 2^15
  a_sum_nonzero: assert property (@(posedge clk) disable iff (!rst_n)
                                  (state == A_DIV) |-> (sum >= SUM_W'(1 << 15)));
endmodule
