// tb_edge_forecaster: end-to-end test of the forecaster top at its default
// configuration (Transformer, window n = 24, d_model = 40), driven only
// through the host bus the way the microcontroller would drive it.
//
// Flow: load all 19 841 parameters, then for several windows (a rising,
// storm-like basin level and random ones) write the window, start, wait for
// irq, read RESULT and CYCLES and compare with the reference model and the
// expected latency. While an inference runs it tries a second start and
// overwrites the window and a parameter; afterwards it re-runs the same
// window and requires an identical result, which shows those accesses were
// dropped.
//
// Mechanism counters (the test fails if any stays at zero): completed
// inferences, irq, start ignored while busy, bus writes dropped while busy,
// parameter writes past the model's size ignored, positional encoding
// added, softmax rows normalised, softmax exponent underflow, ReLU clipping
// in the feed-forward block, saturation at a residual add.
module tb_edge_forecaster;
  import fc_pkg::*;
  import tb_ref_pkg::*;
  import tb_tf_ref_pkg::*;
  localparam int N = 24, D = 40, NP = 12*D*D + 16*D + 1;
  localparam int LAT = (N*D+1) + 4*(N*D*D+1) + N*(2*N*D+2*N+32)+1 + 2*(N*D+1)
                     + 2*(4*N*D*D+1) + (N*D+1) + D+2;

  logic        clk = 0, rst_n = 0, bus_we = 0, irq;
  logic [15:0] bus_addr = '0;
  logic [31:0] bus_wdata = '0, bus_rdata;
  int checks = 0, failures = 0;

  edge_forecaster dut (.*);
  always #5 clk = ~clk;

  // ---- mechanism probes -------------------------------------------------
  int n_infer = 0, n_irq = 0, n_start_ignored = 0, n_wr_dropped = 0, n_oob_ignored = 0;
  int n_pe = 0, n_rows = 0, n_underflow = 0, n_relu = 0, n_res_sat = 0;
  logic irq_q = 0;
  always @(posedge clk) begin
    irq_q <= irq;
    if (irq && !irq_q) n_irq++;
    if (dut.par_we && !dut.eng_we) n_oob_ignored++;
    if (dut.g_transformer.u_model.u_in.u_lin.y_we && dut.g_transformer.u_model.u_in.u_lin.r_data != 0)
      n_pe++;
    if (dut.g_transformer.u_model.u_att.u_core.state == 3'd3 &&     // A_DIV
        dut.g_transformer.u_model.u_att.u_core.dbit == '0)
      n_rows++;
    if (dut.g_transformer.u_model.u_att.u_core.state == 3'd2 &&     // A_EXP
        dut.g_transformer.u_model.u_att.u_core.e_val == '0)
      n_underflow++;
    if (dut.g_transformer.u_model.u_ffn.u_ffn1.y_we &&
        fxp_requant(dut.g_transformer.u_model.u_ffn.u_ffn1.acc_next) < 0)
      n_relu++;
    if (dut.g_transformer.u_model.u_ffn.u_ffn2.y_we &&
        (dut.g_transformer.u_model.u_ffn.u_ffn2.y_data == DATA_MAX ||
         dut.g_transformer.u_model.u_ffn.u_ffn2.y_data == DATA_MIN))
      n_res_sat++;
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

  // run one inference on window x; returns RESULT, checks CYCLES
  task automatic infer(input vec_t x, input bit disturb, output int y);
    logic [31:0] d;
    foreach (x[t]) wr(16'h1000 + 16'(t), 32'(x[t]));
    wr(16'h0000, 32'h1);
    if (disturb) begin
      repeat (100) @(negedge clk);
      wr(16'h0000, 32'h1);                       // second start, must be ignored
      rd(16'h0000, d);
      if (d[0]) n_start_ignored++;
      wr(16'h1000, 32'h7f);                      // window overwrite, must be dropped
      wr(16'h8000, 32'h7f);                      // parameter overwrite, must be dropped
      if (dut.eng_busy) n_wr_dropped += 2;
    end
    while (!irq) @(negedge clk);
    rd(16'h0000, d); chk(d[1:0] == 2'b10, "status done after irq");
    rd(16'h0002, d); chk(d == 32'(LAT), $sformatf("CYCLES %0d expected %0d", d, LAT));
    rd(16'h0001, d); y = int'(signed'(d));
    n_infer++;
  endtask

  initial begin
    vec_t p, x;
    logic [31:0] d;
    int y, y2, expv;
    x = new[N];
    repeat (3) @(posedge clk);
    rst_n = 1;
    p = r_rand_transformer(D, 8, 16);
    for (int a = 0; a < NP; a++) wr(16'h8000 + 16'(a), 32'(p[a]));
    // writes past the parameter count must not alias onto real parameters
    wr(16'h8000 + 16'(NP), 32'h7f);
    wr(16'h8000 + 16'(NP + 100), 32'h81);
    rd(16'h0000, d); chk(d == 0, "idle after loading");

    for (int w = 0; w < 4; w++) begin
      // window 0: normalised basin level rising during a storm; others random
      foreach (x[t]) x[t] = (w == 0) ? 4 + (t * t) / 12 + r_rand(2) : r_rand(40);
      expv = r_transformer(p, x, N, D);
      infer(x, w == 1, y);
      chk(y == expv, $sformatf("window %0d: result %0d expected %0d", w, y, expv));
      if (w == 1) begin
        infer(x, 1'b0, y2);
        chk(y2 == y, "re-run after dropped writes gives the same result");
      end
    end

    chk(n_infer > 0,         "mechanism: inference completed");
    chk(n_irq == n_infer,    $sformatf("mechanism: irq per inference (%0d/%0d)", n_irq, n_infer));
    chk(n_start_ignored > 0, "mechanism: start ignored while busy");
    chk(n_wr_dropped > 0,    "mechanism: writes dropped while busy");
    chk(n_oob_ignored > 0,   "mechanism: out-of-range parameter writes ignored");
    chk(n_pe > 0,            "mechanism: positional encoding added");
    chk(n_rows == n_infer*N, $sformatf("mechanism: softmax rows normalised (%0d)", n_rows));
    chk(n_underflow > 0,     "mechanism: softmax exponent underflow");
    chk(n_relu > 0,          "mechanism: ReLU clipping");
    chk(n_res_sat > 0,       "mechanism: residual saturation");
    $display("mechanisms: infer=%0d irq=%0d start_ignored=%0d wr_dropped=%0d oob=%0d pe=%0d rows=%0d underflow=%0d relu=%0d res_sat=%0d",
             n_infer, n_irq, n_start_ignored, n_wr_dropped, n_oob_ignored, n_pe, n_rows, n_underflow, n_relu, n_res_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
