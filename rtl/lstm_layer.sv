// lstm_layer: runs the LSTM cell over an input window of SEQ_LEN samples and
// returns the hidden state after the last one (the recurrence loop of Fig. 3).
//
// h and c start at zero for every window (the PyTorch default), then for
// t = 0 .. SEQ_LEN-1 the cell is started on x[t] with the current h and c. The
// cell reports one unit per update cycle; c[j] is overwritten in place (the
// cell reads only c[j] for unit j), h is double-buffered because all units of
// step t read the complete h_{t-1}. When the cell signals done, the new h is
// copied over the old one. After the last step done pulses and h_final holds
// h_{SEQ_LEN}, stable until the next start.
//
// Input samples are read through an asynchronous read port (x_addr/x_data)
// from the window buffer. Timing: SEQ_LEN*(HIDDEN*(HIDDEN+2)+2) + 1 cycles from
// start to done. The loop and the zero initial state follow the paper's model;
// the scheduling is this design's own.
module lstm_layer
  import fc_pkg::*;
#(
  parameter int unsigned HIDDEN  = 16,
  parameter int unsigned SEQ_LEN = 24,
  localparam int unsigned NPARAM = 8*HIDDEN + 4*HIDDEN*HIDDEN,
  localparam int unsigned AW     = $clog2(NPARAM),
  localparam int unsigned TW     = $clog2(SEQ_LEN)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          w_we,
  input  logic [AW-1:0] w_addr,
  input  data_t         w_data,
  input  logic          start,
  output logic [TW-1:0] x_addr,
  input  data_t         x_data,
  output logic          busy,
  output logic          done,
  output data_t         h_final [HIDDEN]
);
  typedef enum logic [1:0] {L_IDLE, L_START, L_RUN, L_DONE} state_e;
  state_e state;

  logic [TW-1:0] t;
  data_t h_q [HIDDEN];
  data_t h_n [HIDDEN];
  data_t c_q [HIDDEN];

  logic  cell_start, cell_busy, cell_done, upd_valid;
  logic [$clog2(HIDDEN)-1:0] upd_idx;
  data_t c_new, h_new;

  lstm_cell #(.HIDDEN(HIDDEN)) u_cell (
    .clk, .rst_n,
    .w_we, .w_addr, .w_data,
    .start(cell_start), .x_t(x_data), .h_prev(h_q), .c_prev(c_q),
    .busy(cell_busy), .done(cell_done),
    .upd_valid, .upd_idx, .c_new, .h_new
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= L_IDLE;
      t     <= '0;
      for (int i = 0; i < HIDDEN; i++) begin
        h_q[i] <= '0;
        h_n[i] <= '0;
        c_q[i] <= '0;
      end
    end else begin
      unique case (state)
        L_IDLE: if (start) begin
          state <= L_START;
          t     <= '0;
          for (int i = 0; i < HIDDEN; i++) begin
            h_q[i] <= '0;
            c_q[i] <= '0;
          end
        end
        L_START: state <= L_RUN;
        L_RUN: begin
          if (upd_valid) begin
            h_n[upd_idx] <= h_new;
            c_q[upd_idx] <= c_new;
          end
          if (cell_done) begin
            h_q <= h_n;
            if (t == TW'(SEQ_LEN-1)) state <= L_DONE;
            else begin
              t     <= t + TW'(1);
              state <= L_START;
            end
          end
        end
        L_DONE: state <= L_IDLE;
      endcase
    end
  end

  always_comb begin
    cell_start = (state == L_START);
    x_addr     = t;
    busy       = (state != L_IDLE);
    done       = (state == L_DONE);
    h_final    = h_q;
  end

  // the cell is only started when it is idle
  a_cell_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                cell_start |-> !cell_busy);
endmodule
