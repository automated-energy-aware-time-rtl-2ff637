// tb_lstm_layer: full 24-step recurrence of a 16-unit layer on random windows;
// compares h_final with the reference and checks the latency of
// SEQ_LEN*(HIDDEN*(HIDDEN+2)+2)+1 cycles. Back-to-back windows check that h
// and c are cleared at every start.
module tb_lstm_layer;
  import tb_ref_pkg::*;
  localparam int H = 16;
  localparam int N = 24;
  localparam int NP = 8*H + 4*H*H;

  logic clk = 0, rst_n = 0;
  logic w_we = 0;
  logic [$clog2(NP)-1:0] w_addr = '0;
  logic signed [7:0] w_data = '0;
  logic start = 0;
  logic [$clog2(N)-1:0] x_addr;
  logic signed [7:0] x_data;
  logic busy, done;
  logic signed [7:0] h_final [H];
  int checks = 0, failures = 0;
  lstm_par_t p;
  logic signed [7:0] xs [N];

  lstm_layer #(.HIDDEN(H), .SEQ_LEN(N)) dut (.*);

  assign x_data = xs[x_addr];
  always #5 clk = ~clk;

  initial begin
    int xi [];
    int hf [MAXH];
    int cyc, lat;
    lat = N*(H*(H+2)+2)+1;
    xi = new[N];
    for (int t = 0; t < N; t++) xs[t] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 6; trial++) begin
      r_rand_lstm(p, (trial < 2) ? 10 : (trial < 4 ? 40 : 127), 40);
      for (int a = 0; a < NP; a++) begin
        @(negedge clk);
        w_we = 1; w_addr = a[$clog2(NP)-1:0]; w_data = 8'(r_lstm_flat(p, H, a));
      end
      @(negedge clk); w_we = 0;
      for (int rep = 0; rep < 2; rep++) begin
        for (int t = 0; t < N; t++) begin xs[t] = 8'(r_rand(48)); xi[t] = xs[t]; end
        void'(r_lstm_model(p, H, N, xi, hf));
        start = 1;
        @(negedge clk); start = 0;
        cyc = 1;
        while (!done) begin @(negedge clk); cyc++; end
        for (int j = 0; j < H; j++) begin
          checks++;
          if (int'(h_final[j]) != hf[j]) begin
            failures++;
            $display("FAIL trial %0d h[%0d] = %0d expected %0d", trial, j, h_final[j], hf[j]);
          end
        end
        checks++;
        if (cyc != lat) begin failures++; $display("FAIL latency %0d expected %0d", cyc, lat); end
        @(negedge clk);
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
