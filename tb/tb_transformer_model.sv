// tb_transformer_model: the whole Transformer at the paper's n = 24,
// d_model = 40. Loads all 19 841 parameters, runs random windows and compares
// the forecast with the reference model; checks the latency of 512 693 cycles.
module tb_transformer_model;
  import tb_ref_pkg::*;
  import tb_tf_ref_pkg::*;
  localparam int N = 24, D = 40, NP = 12*D*D + 16*D + 1;
  logic clk = 0, rst_n = 0, p_we = 0, start = 0, busy, done;
  logic [$clog2(NP)-1:0] p_addr = '0;
  logic signed [7:0] p_data = '0, x_data, y;
  logic [$clog2(N)-1:0] x_addr;
  int xm [N];
  int checks = 0, failures = 0;

  transformer_model #(.SEQ_LEN(N), .D_MODEL(D)) dut (.*);
  always #5 clk = ~clk;
  assign x_data = 8'(xm[x_addr]);

  initial begin
    vec_t p, x;
    int cyc, expv, lat;
    lat = (N*D+1) + 4*(N*D*D+1) + N*(2*N*D+2*N+32)+1 + 2*(N*D+1) + 2*(4*N*D*D+1) + (N*D+1) + D+2;
    x = new[N];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 2; trial++) begin
      p = r_rand_transformer(D, trial == 0 ? 4 : 8, 16);
      for (int a = 0; a < NP; a++) begin
        @(negedge clk); p_we = 1; p_addr = a[$bits(p_addr)-1:0]; p_data = 8'(p[a]);
      end
      @(negedge clk); p_we = 0;
      for (int rep = 0; rep < 2; rep++) begin
        foreach (x[i]) begin x[i] = r_rand(40); xm[i] = x[i]; end
        expv = r_transformer(p, x, N, D);
        start = 1; @(negedge clk); start = 0; cyc = 1;
        while (!done) begin @(negedge clk); cyc++; end
        checks += 2;
        if (cyc != lat) begin failures++; $display("FAIL latency %0d expected %0d", cyc, lat); end
        if (int'(y) != expv) begin failures++; $display("FAIL y = %0d expected %0d", y, expv); end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
