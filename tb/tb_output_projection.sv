// tb_output_projection: pooling plus output linear at n = 24, d = 40 on
// random encoder outputs; checks the forecast and the latency N*D + D + 3.
module tb_output_projection;
  import tb_ref_pkg::*;
  import tb_tf_ref_pkg::*;
  localparam int N = 24, D = 40;
  logic clk = 0, rst_n = 0, w_we = 0, start = 0, busy, done;
  logic [$clog2(D+1)-1:0] w_addr = '0;
  logic signed [7:0] w_data = '0, x_data, y;
  logic [$clog2(N*D)-1:0] x_addr;
  int xm [N*D];
  int checks = 0, failures = 0;

  output_projection #(.SEQ_LEN(N), .D_MODEL(D)) dut (.*);
  always #5 clk = ~clk;
  assign x_data = 8'(xm[x_addr]);

  initial begin
    vec_t w, x, pooled;
    longint acc;
    int cyc, expv;
    w = new[D+1]; x = new[N*D];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 8; trial++) begin
      foreach (w[i]) w[i] = r_rand(trial < 4 ? 20 : 127);
      foreach (x[i]) begin x[i] = r_rand(127); xm[i] = x[i]; end
      for (int a = 0; a <= D; a++) begin
        @(negedge clk); w_we = 1; w_addr = a[$bits(w_addr)-1:0]; w_data = 8'(w[a]);
      end
      @(negedge clk); w_we = 0;
      pooled = r_gap(x, N, D);
      acc = longint'(w[D]) * 16;
      for (int c = 0; c < D; c++) acc += longint'(w[c]) * pooled[c];
      expv = r_rq(acc);
      start = 1; @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks += 2;
      if (cyc != N*D + D + 3) begin failures++; $display("FAIL latency %0d", cyc); end
      if (int'(y) != expv) begin failures++; $display("FAIL y = %0d expected %0d", y, expv); end
      @(negedge clk);
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
