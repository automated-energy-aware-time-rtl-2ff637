// linear_layer: dense layer with IN_DIM inputs and one output,
// y = b + sum_k w[k] * x[k], the final "Linear" block of the LSTM model
// (Fig. 3) that turns the last hidden state into the one-step forecast.
//
// One multiply-accumulate per cycle: the accumulator is loaded with the bias
// in the cycle after start, then takes one product per cycle, and the result is
// requantized combinationally (round, shift by FRAC_W, saturate). Timing:
// done IN_DIM+2 cycles after start; y is valid from done until the cycle after
// the next start.
// x must be stable from start to done. Parameters are written through the w_*
// port: [0, IN_DIM) weights, IN_DIM bias. The paper gives the layer's function;
// the serial schedule is this design's own.
module linear_layer
  import fc_pkg::*;
#(
  parameter int unsigned IN_DIM = 16,
  localparam int unsigned AW = $clog2(IN_DIM+1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          w_we,
  input  logic [AW-1:0] w_addr,
  input  data_t         w_data,
  input  logic          start,
  input  data_t         x [IN_DIM],
  output logic          busy,
  output logic          done,
  output data_t         y
);
  localparam int unsigned IW = (IN_DIM > 1) ? $clog2(IN_DIM) : 1;

  data_t w_mem [IN_DIM];
  data_t b_q;

  always_ff @(posedge clk) begin
    if (w_we) begin
      if (32'(w_addr) < 32'(IN_DIM)) w_mem[IW'(w_addr)] <= w_data;
      else if (w_addr == AW'(IN_DIM)) b_q <= w_data;
    end
  end

  typedef enum logic [1:0] {D_IDLE, D_BIAS, D_MAC, D_DONE} state_e;
  state_e state;
  logic [AW-1:0] k;
  acc_t acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= D_IDLE;
      k     <= '0;
      acc   <= '0;
    end else begin
      unique case (state)
        D_IDLE: if (start) state <= D_BIAS;
        D_BIAS: begin
          acc   <= fxp_bias(b_q);
          k     <= '0;
          state <= D_MAC;
        end
        D_MAC: begin
          acc <= acc + acc_t'(w_mem[IW'(k)]) * acc_t'(x[IW'(k)]);
          if (k == AW'(IN_DIM-1)) state <= D_DONE;
          else                    k     <= k + AW'(1);
        end
        D_DONE: state <= D_IDLE;
      endcase
    end
  end

  always_comb begin
    busy = (state != D_IDLE);
    done = (state == D_DONE);
    y    = fxp_requant(acc);
  end
endmodule
