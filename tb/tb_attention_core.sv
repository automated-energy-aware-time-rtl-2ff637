// tb_attention_core: random Q, K, V (24 tokens x 40 channels); compares the
// attention output with the reference integer softmax attention, checks that
// each element is written once and the latency N*(2ND+2N+32)+1. One case with
// identical keys checks the uniform-attention result (mean of V rows).
module tb_attention_core;
  import tb_ref_pkg::*;
  import tb_tf_ref_pkg::*;
  localparam int N = 24, D = 40;
  localparam int MAW = $clog2(N*D);

  logic clk = 0, rst_n = 0, start = 0, busy, done, a_we;
  logic [MAW-1:0] q_addr, k_addr, v_addr, a_addr;
  logic signed [7:0] q_data, k_data, v_data, a_data;
  int qm [N*D], km [N*D], vm [N*D], am [N*D], an [N*D];
  int checks = 0, failures = 0;

  attention_core #(.SEQ_LEN(N), .D_MODEL(D)) dut (.*);

  always #5 clk = ~clk;
  assign q_data = 8'(qm[q_addr]);
  assign k_data = 8'(km[k_addr]);
  assign v_data = 8'(vm[v_addr]);
  always @(posedge clk) if (a_we) begin am[a_addr] <= a_data; an[a_addr] <= an[a_addr] + 1; end

  initial begin
    vec_t q, k, v, e;
    int cyc;
    q = new[N*D]; k = new[N*D]; v = new[N*D];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 4; trial++) begin
      for (int i = 0; i < N*D; i++) begin
        q[i] = r_rand(trial == 0 ? 8 : 40);
        k[i] = (trial == 3) ? ((i % D) * 3 - 50) : r_rand(trial == 0 ? 8 : 40);  // trial 3: all keys equal
        v[i] = r_rand(127);
        qm[i] = q[i]; km[i] = k[i]; vm[i] = v[i]; an[i] = 0;
      end
      e = r_attention(q, k, v, N, D);
      start = 1; @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != N*(2*N*D + 2*N + 32) + 1) begin failures++; $display("FAIL latency %0d", cyc); end
      @(negedge clk);
      for (int i = 0; i < N*D; i++) begin
        checks++;
        if (an[i] != 1 || am[i] != e[i]) begin
          failures++;
          if (failures < 10) $display("FAIL trial %0d a[%0d] = %0d (x%0d) expected %0d", trial, i, am[i], an[i], e[i]);
        end
      end
      if (trial == 3) begin
        // equal scores: every e = 2^15, recip = floor(2^31/(N*2^15)), each
        // probability pu = round(2^15*recip/2^23) (11/256 for N = 24), so
        // A[s][o] = round(pu * sum_j V[j][o] / 256)
        for (int o = 0; o < D; o++) begin
          longint s, pu;
          s = 0;
          pu = (longint'(32768) * ((longint'(1) << 31) / (N * 32768)) + (longint'(1) << 22)) >>> 23;
          for (int j = 0; j < N; j++) s += v[j*D+o];
          checks++;
          if (am[o] != r_sat(r_floor_shift(s * pu + 128, 8))) begin
            failures++; $display("FAIL uniform a[0][%0d] = %0d", o, am[o]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
