// tb_workload_runner: runs one model configuration of the forecaster top end
// to end through the host bus: loads random parameters, runs WINDOWS random
// windows, compares RESULT with the reference model and CYCLES with the
// expected latency. Reports its counts on output ports; instantiated by
// tb_workloads once per configuration.
module tb_workload_runner
  import fc_pkg::*;
  import tb_ref_pkg::*;
  import tb_tf_ref_pkg::*;
#(
  parameter model_e      MODEL   = MODEL_TRANSFORMER,
  parameter int unsigned SEQ_LEN = 6,
  parameter int unsigned D_MODEL = 8,
  parameter int unsigned HIDDEN  = 16,
  parameter int unsigned WINDOWS = 3
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic finished
);
  localparam int N = SEQ_LEN, D = D_MODEL, H = HIDDEN;
  localparam int NP  = (MODEL == MODEL_LSTM) ? 4*H*H + 9*H + 1 : 12*D*D + 16*D + 1;
  localparam int LAT = (MODEL == MODEL_LSTM)
                     ? N*(H*(H+2)+2) + H + 3
                     : (N*D+1) + 4*(N*D*D+1) + N*(2*N*D+2*N+32)+1 + 2*(N*D+1)
                       + 2*(4*N*D*D+1) + (N*D+1) + D+2;

  logic        bus_we = 0, irq;
  logic [15:0] bus_addr = '0;
  logic [31:0] bus_wdata = '0, bus_rdata;

  edge_forecaster #(.MODEL(MODEL), .SEQ_LEN(SEQ_LEN), .D_MODEL(D_MODEL), .HIDDEN(HIDDEN)) dut (
    .clk, .rst_n, .bus_we, .bus_addr, .bus_wdata, .bus_rdata, .irq
  );

  task automatic wr(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk); bus_we = 1; bus_addr = a; bus_wdata = d;
    @(negedge clk); bus_we = 0;
  endtask
  task automatic rd(input logic [15:0] a, output logic [31:0] d);
    @(negedge clk); bus_addr = a; #1 d = bus_rdata;
  endtask
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (model %0d n=%0d d=%0d h=%0d)", msg, MODEL, N, D, H); end
  endtask

  initial begin
    vec_t tp, x;
    lstm_par_t lp;
    int xi [];
    int hf [MAXH];
    logic [31:0] d;
    int y, expv;
    checks = 0; failures = 0; finished = 0;
    x = new[N]; xi = new[N];
    @(posedge rst_n);
    if (MODEL == MODEL_LSTM) begin
      r_rand_lstm(lp, 40, 40);
      for (int a = 0; a < NP; a++) wr(16'h8000 + 16'(a), 32'(r_lstm_flat(lp, H, a)));
    end else begin
      tp = r_rand_transformer(D, 8, 16);
      for (int a = 0; a < NP; a++) wr(16'h8000 + 16'(a), 32'(tp[a]));
    end
    for (int w = 0; w < WINDOWS; w++) begin
      foreach (x[t]) begin x[t] = r_rand(48); xi[t] = x[t]; end
      expv = (MODEL == MODEL_LSTM) ? r_lstm_model(lp, H, N, xi, hf) : r_transformer(tp, x, N, D);
      foreach (x[t]) wr(16'h1000 + 16'(t), 32'(x[t]));
      wr(16'h0000, 32'h1);
      while (!irq) @(negedge clk);
      rd(16'h0002, d); chk(d == 32'(LAT), $sformatf("CYCLES %0d expected %0d", d, LAT));
      rd(16'h0001, d); y = int'(signed'(d));
      chk(y == expv, $sformatf("result %0d expected %0d", y, expv));
    end
    finished = 1;
  end
endmodule
