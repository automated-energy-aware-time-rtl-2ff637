// host_if: register interface between the host microcontroller (RP2040 on the
// ElasticNode V5) and the accelerator. The host writes the input window and
// the model parameters, starts an inference, waits for irq (or polls STATUS)
// and reads the forecast; the FPGA can then be powered down again.
//
// Word-addressed bus, one access per cycle: writes take effect at the clock
// edge when bus_we is high, bus_rdata is a combinational function of bus_addr.
// Address map:
//   0x0000 CTRL    write bit0 = 1: start an inference (ignored while busy)
//                  read  {30'b0, done, busy}; done is sticky until the next start
//   0x0001 RESULT  read  forecast y, sign-extended
//   0x0002 CYCLES  read  clock cycles of the last inference, start to done
//   0x1000+t       write input sample x[t], t < SEQ_LEN (0 is the oldest)
//   0x8000+p       write model parameter p, p < 2^15 (map given by the model engine)
// Window and parameter writes are dropped while an inference runs.
// The paper only says that the MCU transfers the data to the FPGA; the bus, the
// map and the cycle counter (used to measure the latency that the paper's
// energy figure E = P x T rests on) are this design's own.
// Only bus_wdata[7:0] carries data (8-bit samples and parameters); the window
// and parameter address/data outputs are slices of the bus, as intended.
module host_if
  import fc_pkg::*;
#(
  parameter int unsigned SEQ_LEN = 24,
  parameter int unsigned PAR_AW  = 11,
  localparam int unsigned TW = $clog2(SEQ_LEN)
) (
  input  logic              clk,
  input  logic              rst_n,
  // host bus
  input  logic              bus_we,
  input  logic [15:0]       bus_addr,
  input  logic [31:0]       bus_wdata,
  output logic [31:0]       bus_rdata,
  output logic              irq,
  // to the window buffer
  output logic              win_we,
  output logic [TW-1:0]     win_addr,
  output data_t             win_data,
  // to the model engine
  output logic              par_we,
  output logic [PAR_AW-1:0] par_addr,
  output data_t             par_data,
  output logic              eng_start,
  input  logic              eng_busy,
  input  logic              eng_done,
  input  data_t             eng_y
);
  localparam logic [15:0] A_CTRL   = 16'h0000;
  localparam logic [15:0] A_RESULT = 16'h0001;
  localparam logic [15:0] A_CYCLES = 16'h0002;
  localparam logic [3:0]  P_WIN    = 4'h1;

  logic        done_q;
  data_t       y_q;
  logic [31:0] cyc_cnt, cyc_q;

  always_comb begin
    eng_start = bus_we && (bus_addr == A_CTRL) && bus_wdata[0] && !eng_busy;
    win_we    = bus_we && (bus_addr[15:12] == P_WIN) && !eng_busy;
    win_addr  = TW'(bus_addr[11:0]);
    win_data  = data_t'(bus_wdata[DATA_W-1:0]);
    par_we    = bus_we && bus_addr[15] && !eng_busy;
    par_addr  = PAR_AW'(bus_addr[14:0]);
    par_data  = data_t'(bus_wdata[DATA_W-1:0]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done_q  <= 1'b0;
      y_q     <= '0;
      cyc_cnt <= '0;
      cyc_q   <= '0;
    end else begin
      if (eng_start) begin
        done_q  <= 1'b0;
        cyc_cnt <= 32'd1;
      end else if (eng_busy) begin
        cyc_cnt <= cyc_cnt + 32'd1;
      end
      if (eng_done) begin
        done_q <= 1'b1;
        y_q    <= eng_y;
        cyc_q  <= cyc_cnt;
      end
    end
  end

  always_comb begin
    unique case (bus_addr)
      A_CTRL:   bus_rdata = {30'b0, done_q, eng_busy};
      A_RESULT: bus_rdata = 32'(signed'(y_q));
      A_CYCLES: bus_rdata = cyc_q;
      default:  bus_rdata = '0;
    endcase
    irq = done_q;
  end
endmodule
