// tb_workloads: the other model configurations selected for the sensor node,
// each run end to end through the forecaster top (host bus, window buffer,
// model engine): Transformer n=6/d=8 and n=12/d=16, LSTM n=6/h=16 and
// n=12/h=8. The n=24 configurations are covered by tb_edge_forecaster
// (Transformer, the default) and tb_edge_forecaster_lstm. Each runner checks
// the forecast against the reference model and the cycle count against the
// latency formula.
module tb_workloads;
  import fc_pkg::*;
  logic clk = 0, rst_n = 0;
  int   c [4], f [4];
  logic fin [4];
  int   checks, failures;
  always #5 clk = ~clk;

  tb_workload_runner #(.MODEL(MODEL_TRANSFORMER), .SEQ_LEN(6),  .D_MODEL(8))  u_tf6  (.clk, .rst_n, .checks(c[0]), .failures(f[0]), .finished(fin[0]));
  tb_workload_runner #(.MODEL(MODEL_TRANSFORMER), .SEQ_LEN(12), .D_MODEL(16)) u_tf12 (.clk, .rst_n, .checks(c[1]), .failures(f[1]), .finished(fin[1]));
  tb_workload_runner #(.MODEL(MODEL_LSTM),        .SEQ_LEN(6),  .HIDDEN(16))  u_ls6  (.clk, .rst_n, .checks(c[2]), .failures(f[2]), .finished(fin[2]));
  tb_workload_runner #(.MODEL(MODEL_LSTM),        .SEQ_LEN(12), .HIDDEN(8))   u_ls12 (.clk, .rst_n, .checks(c[3]), .failures(f[3]), .finished(fin[3]));

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (fin[0] && fin[1] && fin[2] && fin[3]);
    checks = c[0] + c[1] + c[2] + c[3];
    failures = f[0] + f[1] + f[2] + f[3];
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1] + c[2] + c[3], f[0] + f[1] + f[2] + f[3] + 1);
    $finish;
  end
endmodule
