// tb_linear_layer: random weights, bias and inputs; compares y with the
// reference dot product and checks the latency of IN_DIM+2 cycles.
module tb_linear_layer;
  import tb_ref_pkg::*;
  localparam int D = 16;

  logic clk = 0, rst_n = 0;
  logic w_we = 0;
  logic [$clog2(D+1)-1:0] w_addr = '0;
  logic signed [7:0] w_data = '0;
  logic start = 0;
  logic signed [7:0] x [D];
  logic busy, done;
  logic signed [7:0] y;
  int checks = 0, failures = 0;
  lstm_par_t p;

  linear_layer #(.IN_DIM(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    int h [MAXH];
    int cyc, expv;
    for (int i = 0; i < D; i++) x[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 40; trial++) begin
      r_rand_lstm(p, (trial % 2) ? 127 : 20, (trial % 3) ? 127 : 10);
      for (int a = 0; a <= D; a++) begin
        @(negedge clk);
        w_we = 1; w_addr = a[$clog2(D+1)-1:0]; w_data = 8'((a < D) ? p.lw[a] : p.lb);
      end
      @(negedge clk); w_we = 0;
      for (int i = 0; i < MAXH; i++) h[i] = 0;
      for (int i = 0; i < D; i++) begin x[i] = 8'($urandom); h[i] = x[i]; end
      expv = r_linear(p, D, h);
      start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks += 2;
      if (int'(y) != expv) begin failures++; $display("FAIL y %0d expected %0d", y, expv); end
      if (cyc != D+2) begin failures++; $display("FAIL latency %0d expected %0d", cyc, D+2); end
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
