// tb_lstm_model: the whole LSTM forecaster at the paper's n = 24, h_size = 16
// configuration. Loads all 1169 parameters through the flat parameter map,
// runs random windows and compares the forecast with the reference model;
// checks the latency SEQ_LEN*(H*(H+2)+2)+H+3 cycles.
module tb_lstm_model;
  import tb_ref_pkg::*;
  localparam int H = 16;
  localparam int N = 24;
  localparam int NP = 4*H*H + 9*H + 1;

  logic clk = 0, rst_n = 0;
  logic p_we = 0;
  logic [$clog2(NP)-1:0] p_addr = '0;
  logic signed [7:0] p_data = '0;
  logic start = 0;
  logic [$clog2(N)-1:0] x_addr;
  logic signed [7:0] x_data;
  logic busy, done;
  logic signed [7:0] y;
  int checks = 0, failures = 0;
  lstm_par_t p;
  logic signed [7:0] xs [N];

  lstm_model #(.HIDDEN(H), .SEQ_LEN(N)) dut (.*);

  assign x_data = xs[x_addr];
  always #5 clk = ~clk;

  initial begin
    int xi [];
    int hf [MAXH];
    int cyc, lat, expv;
    lat = N*(H*(H+2)+2)+H+3;
    xi = new[N];
    for (int t = 0; t < N; t++) xs[t] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 5; trial++) begin
      r_rand_lstm(p, (trial < 2) ? 12 : 60, 40);
      for (int a = 0; a < NP; a++) begin
        @(negedge clk);
        p_we = 1; p_addr = a[$clog2(NP)-1:0]; p_data = 8'(r_lstm_flat(p, H, a));
      end
      @(negedge clk); p_we = 0;
      for (int rep = 0; rep < 2; rep++) begin
        for (int t = 0; t < N; t++) begin xs[t] = 8'(r_rand(40)); xi[t] = xs[t]; end
        expv = r_lstm_model(p, H, N, xi, hf);
        start = 1;
        @(negedge clk); start = 0;
        cyc = 1;
        while (!done) begin @(negedge clk); cyc++; end
        checks += 2;
        if (int'(y) != expv) begin failures++; $display("FAIL trial %0d y %0d expected %0d", trial, y, expv); end
        if (cyc != lat) begin failures++; $display("FAIL latency %0d expected %0d", cyc, lat); end
        @(negedge clk);
        checks++;
        if (busy) begin failures++; $display("FAIL still busy after done"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
