// tb_feedforward: the FFN block at n = 24, d = 40 (hidden 160) with random
// weights on a random X1; compares R2 = ReLU(X1 W1 + b1) W2 + b2 + X1 with the
// reference and checks the latency 2*(4*N*D*D + 1).
module tb_feedforward;
  import tb_ref_pkg::*;
  import tb_tf_ref_pkg::*;
  localparam int N = 24, D = 40, P1 = 4*D*D + 4*D, P2 = 4*D*D + D;
  logic clk = 0, rst_n = 0, w_we = 0, start = 0, busy, done, y_we;
  logic [$clog2(P1+P2)-1:0] w_addr = '0;
  logic signed [7:0] w_data = '0, x_data, y_data;
  logic [$clog2(N*D)-1:0] x_addr, y_addr;
  int xm [N*D], ym [N*D], yn [N*D];
  int checks = 0, failures = 0;

  feedforward #(.SEQ_LEN(N), .D_MODEL(D)) dut (.*);
  always #5 clk = ~clk;
  assign x_data = 8'(xm[x_addr]);
  always @(posedge clk) if (y_we) begin ym[y_addr] <= y_data; yn[y_addr] <= yn[y_addr] + 1; end

  initial begin
    vec_t p, x, h, r, none;
    int cyc, lat;
    lat = 2*(4*N*D*D + 1);
    p = new[P1+P2]; x = new[N*D];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 2; trial++) begin
      foreach (p[i]) p[i] = r_rand(trial == 0 ? 4 : 10);
      foreach (x[i]) begin x[i] = r_rand(60); xm[i] = x[i]; yn[i] = 0; end
      for (int a = 0; a < P1+P2; a++) begin
        @(negedge clk); w_we = 1; w_addr = a[$bits(w_addr)-1:0]; w_data = 8'(p[a]);
      end
      @(negedge clk); w_we = 0;
      h = r_seq_linear(x, N, D, 4*D, r_slice(p, 0, 4*D*D), r_slice(p, 4*D*D, 4*D), none, 0, 1);
      r = r_seq_linear(h, N, 4*D, D, r_slice(p, P1, 4*D*D), r_slice(p, P1 + 4*D*D, D), x, 1, 0);
      start = 1; @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++; if (cyc != lat) begin failures++; $display("FAIL latency %0d expected %0d", cyc, lat); end
      @(negedge clk);
      for (int i = 0; i < N*D; i++) begin
        checks++;
        if (yn[i] != 1 || ym[i] != r[i]) begin failures++; if (failures < 10) $display("FAIL r2[%0d] = %0d expected %0d", i, ym[i], r[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (800000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
