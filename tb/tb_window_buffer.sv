// tb_window_buffer: writes random windows, reads them back through the
// asynchronous port, and checks that out-of-range writes are dropped.
module tb_window_buffer;
  localparam int N = 24;
  localparam int TW = $clog2(N);
  logic clk = 0;
  logic we = 0;
  logic [TW-1:0] waddr = '0, raddr = '0;
  logic signed [7:0] wdata = '0, rdata;
  logic signed [7:0] model [N];
  int checks = 0, failures = 0;

  window_buffer #(.SEQ_LEN(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    for (int rep = 0; rep < 4; rep++) begin
      for (int t = 0; t < N; t++) begin
        @(negedge clk); we = 1; waddr = TW'(t); wdata = 8'($urandom); model[t] = wdata;
      end
      // out-of-range addresses must not alias onto the window
      for (int t = N; t < (1 << TW); t++) begin
        @(negedge clk); we = 1; waddr = TW'(t); wdata = 8'($urandom);
      end
      @(negedge clk); we = 0;
      for (int t = 0; t < N; t++) begin
        raddr = TW'(t); #1;
        checks++;
        if (rdata != model[t]) begin failures++; $display("FAIL x[%0d] = %0d expected %0d", t, rdata, model[t]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
