// tb_edge_forecaster_lstm: end-to-end test of the forecaster top built with
// the LSTM engine (MODEL = MODEL_LSTM, window n = 24, hidden size 16: the
// paper's best LSTM for the 24-step window), driven only through the host bus.
//
// Loads all 1 169 parameters, runs a storm-like window and random windows,
// compares RESULT with the reference model and CYCLES with the expected
// latency N*(H*(H+2)+2)+H+3 = 6 979 cycles. Mechanism counters (test fails
// if any stays at zero): inferences, irq, start ignored while busy, writes
// dropped while busy, recurrent steps (N per inference), HardSigmoid
// saturation at 0 and at 1, HardTanh clipping of the candidate g and of the
// cell state c.
module tb_edge_forecaster_lstm;
  import fc_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 24, H = 16, NP = 4*H*H + 9*H + 1;
  localparam int LAT = N*(H*(H+2)+2) + H + 3;

  logic        clk = 0, rst_n = 0, bus_we = 0, irq;
  logic [15:0] bus_addr = '0;
  logic [31:0] bus_wdata = '0, bus_rdata;
  int checks = 0, failures = 0;

  edge_forecaster #(.MODEL(MODEL_LSTM)) dut (.*);
  always #5 clk = ~clk;

  int n_infer = 0, n_irq = 0, n_start_ignored = 0, n_wr_dropped = 0;
  int n_steps = 0, n_sig0 = 0, n_sig1 = 0, n_tanh_g = 0, n_tanh_c = 0;
  logic irq_q = 0;
  always @(posedge clk) begin
    irq_q <= irq;
    if (irq && !irq_q) n_irq++;
    if (dut.g_lstm.u_model.u_layer.u_cell.start && !dut.g_lstm.u_model.u_layer.u_cell.busy) n_steps++;
    if (dut.g_lstm.u_model.u_layer.u_cell.upd_valid) begin
      if (dut.g_lstm.u_model.u_layer.u_cell.gi == 0 || dut.g_lstm.u_model.u_layer.u_cell.gf == 0) n_sig0++;
      if (dut.g_lstm.u_model.u_layer.u_cell.gi == ONE || dut.g_lstm.u_model.u_layer.u_cell.go == ONE) n_sig1++;
      if (dut.g_lstm.u_model.u_layer.u_cell.pre_g > ONE || dut.g_lstm.u_model.u_layer.u_cell.pre_g < -ONE) n_tanh_g++;
      if (dut.g_lstm.u_model.u_layer.u_cell.c_new > ONE || dut.g_lstm.u_model.u_layer.u_cell.c_new < -ONE) n_tanh_c++;
    end
  end

  task automatic wr(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk); bus_we = 1; bus_addr = a; bus_wdata = d;
    @(negedge clk); bus_we = 0;
  endtask
  task automatic rd(input logic [15:0] a, output logic [31:0] d);
    @(negedge clk); bus_addr = a; #1 d = bus_rdata;
  endtask
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    lstm_par_t p;
    int x [];
    int hf [MAXH];
    logic [31:0] d;
    int y, expv;
    x = new[N];
    repeat (3) @(posedge clk);
    rst_n = 1;
    r_rand_lstm(p, 40, 40);
    for (int a = 0; a < NP; a++) wr(16'h8000 + 16'(a), 32'(r_lstm_flat(p, H, a)));
    for (int w = 0; w < 4; w++) begin
      foreach (x[t]) x[t] = (w == 0) ? 4 + (t * t) / 12 + r_rand(2) : r_rand(60);
      expv = r_lstm_model(p, H, N, x, hf);
      foreach (x[t]) wr(16'h1000 + 16'(t), 32'(x[t]));
      wr(16'h0000, 32'h1);
      if (w == 1) begin
        repeat (50) @(negedge clk);
        wr(16'h0000, 32'h1);
        rd(16'h0000, d);
        if (d[0]) n_start_ignored++;
        wr(16'h1005, 32'h7f);
        if (dut.eng_busy) n_wr_dropped++;
      end
      while (!irq) @(negedge clk);
      rd(16'h0002, d); chk(d == 32'(LAT), $sformatf("CYCLES %0d expected %0d", d, LAT));
      rd(16'h0001, d); y = int'(signed'(d));
      chk(y == expv, $sformatf("window %0d: result %0d expected %0d", w, y, expv));
      n_infer++;
    end
    chk(n_infer > 0,          "mechanism: inference completed");
    chk(n_irq == n_infer,     "mechanism: irq per inference");
    chk(n_start_ignored > 0,  "mechanism: start ignored while busy");
    chk(n_wr_dropped > 0,     "mechanism: writes dropped while busy");
    chk(n_steps == N*n_infer, $sformatf("mechanism: recurrent steps %0d", n_steps));
    chk(n_sig0 > 0,           "mechanism: HardSigmoid saturates at 0");
    chk(n_sig1 > 0,           "mechanism: HardSigmoid saturates at 1");
    chk(n_tanh_g > 0,         "mechanism: HardTanh clips candidate g");
    chk(n_tanh_c > 0,         "mechanism: HardTanh clips cell state");
    $display("mechanisms: infer=%0d irq=%0d start_ignored=%0d wr_dropped=%0d steps=%0d sig0=%0d sig1=%0d tanh_g=%0d tanh_c=%0d",
             n_infer, n_irq, n_start_ignored, n_wr_dropped, n_steps, n_sig0, n_sig1, n_tanh_g, n_tanh_c);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
