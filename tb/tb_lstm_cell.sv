// tb_lstm_cell: loads random parameters into lstm_cell, runs single steps on
// random x, h, c and compares every unit's c_t and h_t with the reference.
// Also checks the step latency, HIDDEN*(HIDDEN+2)+1 cycles from start to done,
// and that every unit is reported exactly once.
module tb_lstm_cell;
  import tb_ref_pkg::*;
  localparam int H = 16;
  localparam int NP = 8*H + 4*H*H;

  logic clk = 0, rst_n = 0;
  logic w_we = 0;
  logic [$clog2(NP)-1:0] w_addr = '0;
  logic signed [7:0] w_data = '0;
  logic start = 0;
  logic signed [7:0] x_t = '0;
  logic signed [7:0] h_prev [H], c_prev [H];
  logic busy, done, upd_valid;
  logic [$clog2(H)-1:0] upd_idx;
  logic signed [7:0] c_new, h_new;
  int checks = 0, failures = 0;
  lstm_par_t p;

  lstm_cell #(.HIDDEN(H)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    int href [MAXH], cref [MAXH];
    int seen [H];
    int cyc;
    for (int i = 0; i < H; i++) begin h_prev[i] = '0; c_prev[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 12; trial++) begin
      // weight range grows with the trial to reach the saturating regions
      r_rand_lstm(p, (trial < 4) ? 8 : (trial < 8 ? 40 : 127), (trial < 6) ? 16 : 100);
      for (int a = 0; a < NP; a++) begin
        @(negedge clk);
        w_we = 1; w_addr = a[$clog2(NP)-1:0]; w_data = 8'(r_lstm_flat(p, H, a));
      end
      @(negedge clk); w_we = 0;
      for (int rep = 0; rep < 3; rep++) begin
        x_t = 8'(r_rand(127));
        for (int i = 0; i < MAXH; i++) begin href[i] = 0; cref[i] = 0; end
        for (int i = 0; i < H; i++) begin
          h_prev[i] = 8'(r_rand(16)); c_prev[i] = 8'($urandom);
          href[i] = h_prev[i]; cref[i] = c_prev[i]; seen[i] = 0;
        end
        r_lstm_step(p, H, x_t, href, cref);
        start = 1;
        @(negedge clk); start = 0;
        cyc = 1;
        while (!done) begin
          if (upd_valid) begin
            seen[upd_idx]++;
            checks += 2;
            if (int'(c_new) != cref[upd_idx]) begin
              failures++;
              $display("FAIL trial %0d unit %0d: c %0d expected %0d", trial, upd_idx, c_new, cref[upd_idx]);
            end
            if (int'(h_new) != href[upd_idx]) begin
              failures++;
              $display("FAIL trial %0d unit %0d: h %0d expected %0d", trial, upd_idx, h_new, href[upd_idx]);
            end
          end
          @(negedge clk);
          cyc++;
        end
        checks++;
        if (cyc != H*(H+2)+1) begin
          failures++;
          $display("FAIL latency %0d cycles, expected %0d", cyc, H*(H+2)+1);
        end
        for (int i = 0; i < H; i++) begin
          checks++;
          if (seen[i] != 1) begin failures++; $display("FAIL unit %0d reported %0d times", i, seen[i]); end
        end
        @(negedge clk);  // busy drops one cycle after done
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
