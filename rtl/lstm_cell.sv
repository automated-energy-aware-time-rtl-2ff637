// lstm_cell: one time step of a vanilla LSTM cell with HardSigmoid/HardTanh
// activations (Fig. 3 of the paper), for a univariate input and HIDDEN units.
//
// For every hidden unit j it forms the four gate pre-activations
//   a_q = b_q[j] + Wih_q[j] * x_t + sum_k Whh_q[j][k] * h_{t-1}[k],  q in {i,f,g,o}
// over the concatenated operand vector z = [x_t, h_{t-1}[0..HIDDEN-1]], then
//   i = HardSigmoid(a_i), f = HardSigmoid(a_f), g = HardTanh(a_g), o = HardSigmoid(a_o)
//   c_t[j] = f*c_{t-1}[j] + i*g,   h_t[j] = o * HardTanh(c_t[j]).
// The equations, the gate set and the activation choice follow the paper; the
// two PyTorch biases per gate are stored pre-summed as one (an equivalent form).
//
// Microarchitecture (this design's own): four multiply-accumulate lanes, one per
// gate, work on one hidden unit at a time. A unit takes HIDDEN+1 MAC cycles
// (k = 0 is the bias plus the input term, k = 1..HIDDEN the recurrent terms)
// and one update cycle, in which the activations, the Hadamard products and the
// new c and h of that unit are computed combinationally and presented on
// upd_valid/upd_idx/c_new/h_new. done pulses one cycle after the last unit, so
// a step takes HIDDEN*(HIDDEN+2)+1 cycles from the cycle after start.
// x_t, h_prev and c_prev must stay stable from start to done.
//
// Parameters live in distributed memories written through the w_* port, word
// address map: [0,4H) Wih (row q*H+j), [4H, 4H+4H^2) Whh (row-major, (q*H+j)*H+k),
// [4H+4H^2, 8H+4H^2) bias (q*H+j), gate order i, f, g, o as in PyTorch.
module lstm_cell
  import fc_pkg::*;
#(
  parameter int unsigned HIDDEN = 16,
  localparam int unsigned NPARAM = 8*HIDDEN + 4*HIDDEN*HIDDEN,
  localparam int unsigned AW     = $clog2(NPARAM)
) (
  input  logic          clk,
  input  logic          rst_n,
  // parameter load
  input  logic          w_we,
  input  logic [AW-1:0] w_addr,
  input  data_t         w_data,
  // step control
  input  logic          start,
  input  data_t         x_t,
  input  data_t         h_prev [HIDDEN],
  input  data_t         c_prev [HIDDEN],
  output logic          busy,
  output logic          done,
  // per-unit result
  output logic          upd_valid,
  output logic [$clog2(HIDDEN)-1:0] upd_idx,
  output data_t         c_new,
  output data_t         h_new
);
  localparam int unsigned H  = HIDDEN;
  localparam int unsigned JW = $clog2(HIDDEN);
  localparam int unsigned KW = $clog2(HIDDEN+1);
  localparam int unsigned HHW = $clog2(HIDDEN*HIDDEN);

  // parameter memories, one bank per gate
  data_t wih_mem [4][H];
  data_t whh_mem [4][H*H];
  data_t b_mem   [4][H];

  always_ff @(posedge clk) begin
    if (w_we) begin
      if (32'(w_addr) < 32'(4*H))
        wih_mem[2'(w_addr / AW'(H))][JW'(w_addr % AW'(H))] <= w_data;
      else if (32'(w_addr) < 32'(4*H + 4*H*H))
        whh_mem[2'((w_addr - AW'(4*H)) / AW'(H*H))][HHW'((w_addr - AW'(4*H)) % AW'(H*H))] <= w_data;
      else if (32'(w_addr) < 32'(NPARAM))
        b_mem[2'((w_addr - AW'(4*H + 4*H*H)) / AW'(H))][JW'((w_addr - AW'(4*H + 4*H*H)) % AW'(H))] <= w_data;
    end
  end

  typedef enum logic [1:0] {S_IDLE, S_MAC, S_UPD, S_DONE} state_e;
  state_e state;

  logic [JW-1:0] j;
  logic [KW-1:0] k;
  acc_t          acc [4];

  // concatenation z = [x_t, h_prev]: operand k of the current MAC cycle
  data_t z_k;
  always_comb z_k = (k == '0) ? x_t : h_prev[JW'(k - KW'(1))];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      j     <= '0;
      k     <= '0;
      for (int q = 0; q < 4; q++) acc[q] <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_MAC;
          j     <= '0;
          k     <= '0;
        end
        S_MAC: begin
          for (int q = 0; q < 4; q++) begin
            if (k == '0)
              acc[q] <= fxp_bias(b_mem[q][j]) + acc_t'(wih_mem[q][j]) * acc_t'(z_k);
            else
              acc[q] <= acc[q] + acc_t'(whh_mem[q][32'(j)*H + 32'(k) - 1]) * acc_t'(z_k);
          end
          if (k == KW'(H)) state <= S_UPD;
          else             k     <= k + KW'(1);
        end
        S_UPD: begin
          k <= '0;
          if (j == JW'(H-1)) state <= S_DONE;
          else begin
            j     <= j + JW'(1);
            state <= S_MAC;
          end
        end
        S_DONE: state <= S_IDLE;
      endcase
    end
  end

  // activations and cell update for unit j
  data_t pre_i, pre_f, pre_g, pre_o;
  data_t gi, gf, gg, go, tanh_c;
  data_t prod_a [2], prod_b [2], prod_y [2];
  data_t out_a [1], out_b [1], out_y [1];

  always_comb begin
    pre_i = fxp_requant(acc[0]);
    pre_f = fxp_requant(acc[1]);
    pre_g = fxp_requant(acc[2]);
    pre_o = fxp_requant(acc[3]);
  end

  hard_sigmoid u_sig_i (.x(pre_i), .y(gi));
  hard_sigmoid u_sig_f (.x(pre_f), .y(gf));
  hard_tanh    u_tanh_g(.x(pre_g), .y(gg));
  hard_sigmoid u_sig_o (.x(pre_o), .y(go));

  always_comb begin
    prod_a[0] = gf;  prod_b[0] = c_prev[j];   // f * c_{t-1}
    prod_a[1] = gi;  prod_b[1] = gg;          // i * g
  end
  hadamard_mul #(.LANES(2)) u_had_fc_ig (.a(prod_a), .b(prod_b), .y(prod_y));

  always_comb c_new = fxp_add(prod_y[0], prod_y[1]);

  hard_tanh u_tanh_c (.x(c_new), .y(tanh_c));

  always_comb begin
    out_a[0] = go;
    out_b[0] = tanh_c;
  end
  hadamard_mul #(.LANES(1)) u_had_oh (.a(out_a), .b(out_b), .y(out_y));

  always_comb begin
    h_new     = out_y[0];
    upd_valid = (state == S_UPD);
    upd_idx   = j;
    done      = (state == S_DONE);
    busy      = (state != S_IDLE);
  end
endmodule
