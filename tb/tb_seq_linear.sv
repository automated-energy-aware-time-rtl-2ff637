// tb_seq_linear: two seq_linear instances, a plain one (8 -> 12) and one with
// residual add and ReLU (12 -> 5), on random weights and sequences. Checks
// every written element against the reference, that every element is written
// once, and the latency SEQ_LEN*OUT*IN + 1.
module tb_seq_linear;
  import tb_ref_pkg::*;
  import tb_tf_ref_pkg::*;
  localparam int N = 6;
  localparam int I0 = 8, O0 = 12;   // plain
  localparam int I1 = 12, O1 = 5;   // residual + relu

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // instance 0
  logic w0_we = 0, st0 = 0, b0, d0, y0_we;
  logic [$clog2(O0*I0+O0)-1:0] w0_addr = '0;
  logic signed [7:0] w0_data = '0, x0_data, y0_data;
  logic [$clog2(N*I0)-1:0] x0_addr;
  logic [$clog2(N*O0)-1:0] r0_addr, y0_addr;
  // instance 1
  logic w1_we = 0, st1 = 0, b1, d1, y1_we;
  logic [$clog2(O1*I1+O1)-1:0] w1_addr = '0;
  logic signed [7:0] w1_data = '0, x1_data, r1_data, y1_data;
  logic [$clog2(N*I1)-1:0] x1_addr;
  logic [$clog2(N*O1)-1:0] r1_addr, y1_addr;

  seq_linear #(.IN_DIM(I0), .OUT_DIM(O0), .SEQ_LEN(N), .RELU(1'b0), .RESIDUAL(1'b0)) dut0 (
    .clk, .rst_n, .w_we(w0_we), .w_addr(w0_addr), .w_data(w0_data), .start(st0), .busy(b0), .done(d0),
    .x_addr(x0_addr), .x_data(x0_data), .r_addr(r0_addr), .r_data(8'sd0),
    .y_we(y0_we), .y_addr(y0_addr), .y_data(y0_data));
  seq_linear #(.IN_DIM(I1), .OUT_DIM(O1), .SEQ_LEN(N), .RELU(1'b1), .RESIDUAL(1'b1)) dut1 (
    .clk, .rst_n, .w_we(w1_we), .w_addr(w1_addr), .w_data(w1_data), .start(st1), .busy(b1), .done(d1),
    .x_addr(x1_addr), .x_data(x1_data), .r_addr(r1_addr), .r_data(r1_data),
    .y_we(y1_we), .y_addr(y1_addr), .y_data(y1_data));

  int x0 [N*I0], x1 [N*I1], r1 [N*O1];
  int y0 [N*O0], y1 [N*O1], n0 [N*O0], n1 [N*O1];
  assign x0_data = 8'(x0[x0_addr]);
  assign x1_data = 8'(x1[x1_addr]);
  assign r1_data = 8'(r1[r1_addr]);
  always @(posedge clk) begin
    if (y0_we) begin y0[y0_addr] <= y0_data; n0[y0_addr] <= n0[y0_addr] + 1; end
    if (y1_we) begin y1[y1_addr] <= y1_data; n1[y1_addr] <= n1[y1_addr] + 1; end
  end

  int checks = 0, failures = 0;

  initial begin
    vec_t w0, bb0, w1, bb1, xv0, xv1, rv1, e0, e1, none;
    int cyc;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 8; trial++) begin
      w0 = new[O0*I0]; bb0 = new[O0]; w1 = new[O1*I1]; bb1 = new[O1];
      xv0 = new[N*I0]; xv1 = new[N*I1]; rv1 = new[N*O1];
      foreach (w0[i]) w0[i] = r_rand(trial < 4 ? 12 : 127);
      foreach (bb0[i]) bb0[i] = r_rand(60);
      foreach (w1[i]) w1[i] = r_rand(trial < 4 ? 12 : 127);
      foreach (bb1[i]) bb1[i] = r_rand(60);
      foreach (xv0[i]) begin xv0[i] = r_rand(128) ; if (xv0[i] > 127) xv0[i] = 127; x0[i] = xv0[i]; end
      foreach (xv1[i]) begin xv1[i] = r_rand(127); x1[i] = xv1[i]; end
      foreach (rv1[i]) begin rv1[i] = r_rand(127); r1[i] = rv1[i]; end
      for (int a = 0; a < O0*I0 + O0; a++) begin
        @(negedge clk); w0_we = 1; w0_addr = a[$bits(w0_addr)-1:0]; w0_data = 8'((a < O0*I0) ? w0[a] : bb0[a-O0*I0]);
      end
      @(negedge clk); w0_we = 0;
      for (int a = 0; a < O1*I1 + O1; a++) begin
        @(negedge clk); w1_we = 1; w1_addr = a[$bits(w1_addr)-1:0]; w1_data = 8'((a < O1*I1) ? w1[a] : bb1[a-O1*I1]);
      end
      @(negedge clk); w1_we = 0;
      e0 = r_seq_linear(xv0, N, I0, O0, w0, bb0, none, 0, 0);
      e1 = r_seq_linear(xv1, N, I1, O1, w1, bb1, rv1, 1, 1);
      foreach (n0[i]) n0[i] = 0;
      foreach (n1[i]) n1[i] = 0;
      // instance 0
      st0 = 1; @(negedge clk); st0 = 0; cyc = 1;
      while (!d0) begin @(negedge clk); cyc++; end
      checks++; if (cyc != N*O0*I0+1) begin failures++; $display("FAIL latency0 %0d", cyc); end
      @(negedge clk);
      st1 = 1; @(negedge clk); st1 = 0; cyc = 1;
      while (!d1) begin @(negedge clk); cyc++; end
      checks++; if (cyc != N*O1*I1+1) begin failures++; $display("FAIL latency1 %0d", cyc); end
      @(negedge clk);
      for (int i = 0; i < N*O0; i++) begin
        checks++;
        if (n0[i] != 1 || y0[i] != e0[i]) begin failures++; $display("FAIL y0[%0d]=%0d (x%0d) exp %0d", i, y0[i], n0[i], e0[i]); end
      end
      for (int i = 0; i < N*O1; i++) begin
        checks++;
        if (n1[i] != 1 || y1[i] != e1[i]) begin failures++; $display("FAIL y1[%0d]=%0d (x%0d) exp %0d", i, y1[i], n1[i], e1[i]); end
      end
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
