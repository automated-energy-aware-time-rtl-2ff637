// tb_batchnorm: random folded scales/shifts and inputs at 24 x 40; checks
// every output, that each is written once, and the latency N*D + 1.
module tb_batchnorm;
  import tb_ref_pkg::*;
  import tb_tf_ref_pkg::*;
  localparam int N = 24, D = 40;
  logic clk = 0, rst_n = 0, w_we = 0, start = 0, busy, done, y_we;
  logic [$clog2(2*D)-1:0] w_addr = '0;
  logic signed [7:0] w_data = '0, x_data, y_data;
  logic [$clog2(N*D)-1:0] x_addr, y_addr;
  int xm [N*D], ym [N*D], yn [N*D];
  int checks = 0, failures = 0;

  batchnorm #(.SEQ_LEN(N), .D_MODEL(D)) dut (.*);
  always #5 clk = ~clk;
  assign x_data = 8'(xm[x_addr]);
  always @(posedge clk) if (y_we) begin ym[y_addr] <= y_data; yn[y_addr] <= yn[y_addr] + 1; end

  initial begin
    vec_t g, h, x, e;
    int cyc;
    g = new[D]; h = new[D]; x = new[N*D];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 4; trial++) begin
      foreach (g[i]) g[i] = r_rand(trial < 2 ? 24 : 127);
      foreach (h[i]) h[i] = r_rand(trial < 2 ? 24 : 127);
      foreach (x[i]) begin x[i] = r_rand(127); xm[i] = x[i]; yn[i] = 0; end
      for (int a = 0; a < 2*D; a++) begin
        @(negedge clk); w_we = 1; w_addr = a[$bits(w_addr)-1:0]; w_data = 8'((a < D) ? g[a] : h[a-D]);
      end
      @(negedge clk); w_we = 0;
      e = r_bn(x, N, D, g, h);
      start = 1; @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++; if (cyc != N*D+1) begin failures++; $display("FAIL latency %0d", cyc); end
      @(negedge clk);
      for (int i = 0; i < N*D; i++) begin
        checks++;
        if (yn[i] != 1 || ym[i] != e[i]) begin failures++; if (failures < 10) $display("FAIL y[%0d] = %0d expected %0d", i, ym[i], e[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
