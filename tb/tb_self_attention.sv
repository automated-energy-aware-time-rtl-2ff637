// tb_self_attention: the attention block at n = 24, d = 40 with random
// Q/K/V/O projections on a random E; compares R1 = attention(E) Wo + bo + E
// with the reference and checks the latency 4*(N*D*D+1) + N*(2ND+2N+32) + 1.
module tb_self_attention;
  import tb_ref_pkg::*;
  import tb_tf_ref_pkg::*;
  localparam int N = 24, D = 40, PP = D*D + D;
  logic clk = 0, rst_n = 0, w_we = 0, start = 0, busy, done, y_we;
  logic [$clog2(4*PP)-1:0] w_addr = '0;
  logic signed [7:0] w_data = '0, e_data, y_data;
  logic [$clog2(N*D)-1:0] e_addr, y_addr;
  int em [N*D], ym [N*D], yn [N*D];
  int checks = 0, failures = 0;

  self_attention #(.SEQ_LEN(N), .D_MODEL(D)) dut (.*);
  always #5 clk = ~clk;
  assign e_data = 8'(em[e_addr]);
  always @(posedge clk) if (y_we) begin ym[y_addr] <= y_data; yn[y_addr] <= yn[y_addr] + 1; end

  initial begin
    vec_t p, e, q, k, v, a, r, none;
    int cyc, lat;
    lat = 4*(N*D*D+1) + N*(2*N*D + 2*N + 32) + 1;
    p = new[4*PP]; e = new[N*D];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 2; trial++) begin
      foreach (p[i]) p[i] = r_rand(trial == 0 ? 5 : 12);
      foreach (e[i]) begin e[i] = r_rand(60); em[i] = e[i]; yn[i] = 0; end
      for (int a2 = 0; a2 < 4*PP; a2++) begin
        @(negedge clk); w_we = 1; w_addr = a2[$bits(w_addr)-1:0]; w_data = 8'(p[a2]);
      end
      @(negedge clk); w_we = 0;
      q = r_seq_linear(e, N, D, D, r_slice(p, 0, D*D),        r_slice(p, D*D, D), none, 0, 0);
      k = r_seq_linear(e, N, D, D, r_slice(p, PP, D*D),       r_slice(p, PP + D*D, D), none, 0, 0);
      v = r_seq_linear(e, N, D, D, r_slice(p, 2*PP, D*D),     r_slice(p, 2*PP + D*D, D), none, 0, 0);
      a = r_attention(q, k, v, N, D);
      r = r_seq_linear(a, N, D, D, r_slice(p, 3*PP, D*D),     r_slice(p, 3*PP + D*D, D), e, 1, 0);
      start = 1; @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++; if (cyc != lat) begin failures++; $display("FAIL latency %0d expected %0d", cyc, lat); end
      @(negedge clk);
      for (int i = 0; i < N*D; i++) begin
        checks++;
        if (yn[i] != 1 || ym[i] != r[i]) begin failures++; if (failures < 10) $display("FAIL r1[%0d] = %0d expected %0d", i, ym[i], r[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
