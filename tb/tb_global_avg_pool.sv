// tb_global_avg_pool: random 24 x 40 inputs; checks every channel mean
// against the reference, one constant-channel case, and the latency N*D + 1.
module tb_global_avg_pool;
  import tb_ref_pkg::*;
  import tb_tf_ref_pkg::*;
  localparam int N = 24, D = 40;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  logic [$clog2(N*D)-1:0] x_addr;
  logic signed [7:0] x_data;
  logic signed [7:0] pooled [D];
  int xm [N*D];
  int checks = 0, failures = 0;

  global_avg_pool #(.SEQ_LEN(N), .D_MODEL(D)) dut (.*);
  always #5 clk = ~clk;
  assign x_data = 8'(xm[x_addr]);

  initial begin
    vec_t x, e;
    int cyc;
    x = new[N*D];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 6; trial++) begin
      // trial 0: channel c holds the constant c - 20 in every token
      foreach (x[i]) begin x[i] = (trial == 0) ? (i % D) - 20 : r_rand(127); xm[i] = x[i]; end
      e = r_gap(x, N, D);
      start = 1; @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++; if (cyc != N*D+1) begin failures++; $display("FAIL latency %0d", cyc); end
      for (int c = 0; c < D; c++) begin
        checks++;
        if (int'(pooled[c]) != e[c]) begin failures++; $display("FAIL pooled[%0d] = %0d expected %0d", c, pooled[c], e[c]); end
        if (trial == 0) begin
          checks++;
          if (int'(pooled[c]) != c - 20) begin failures++; $display("FAIL constant channel %0d: %0d", c, pooled[c]); end
        end
      end
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
