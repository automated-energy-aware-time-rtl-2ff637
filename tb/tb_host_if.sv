// tb_host_if: drives the host bus against a small behavioural engine (busy
// for a random number of cycles after start, then done with a random y).
// Checks write forwarding to window and parameters, the address map, that
// writes and starts are dropped while busy, the sticky done/irq flag, the
// result register and the cycle counter.
module tb_host_if;
  localparam int N = 24, PAW = 15;
  logic clk = 0, rst_n = 0;
  logic bus_we = 0;
  logic [15:0] bus_addr = '0;
  logic [31:0] bus_wdata = '0, bus_rdata;
  logic irq, win_we, par_we, eng_start;
  logic [$clog2(N)-1:0] win_addr;
  logic [PAW-1:0] par_addr;
  logic signed [7:0] win_data, par_data, eng_y;
  logic eng_busy, eng_done;
  int checks = 0, failures = 0;

  host_if #(.SEQ_LEN(N), .PAR_AW(PAW)) dut (.*);
  always #5 clk = ~clk;

  // behavioural engine
  int busy_left = 0, run_len = 0, starts = 0;
  logic signed [7:0] y_next = '0;
  always_ff @(posedge clk) begin
    eng_done <= 1'b0;
    if (eng_start) begin
      busy_left <= run_len;
      starts++;
    end else if (busy_left > 0) begin
      busy_left <= busy_left - 1;
      if (busy_left == 1) eng_done <= 1'b1;
    end
  end
  assign eng_busy = (busy_left > 0) || eng_done;
  assign eng_y = y_next;

  // forwarded writes
  int win_w = 0, par_w = 0;
  int last_win_addr, last_win_data, last_par_addr, last_par_data;
  always @(posedge clk) begin
    if (win_we) begin win_w++; last_win_addr = win_addr; last_win_data = win_data; end
    if (par_we) begin par_w++; last_par_addr = par_addr; last_par_data = par_data; end
  end

  task automatic wr(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk); bus_we = 1; bus_addr = a; bus_wdata = d;
    @(negedge clk); bus_we = 0;
  endtask
  task automatic rd(input logic [15:0] a, output logic [31:0] d);
    @(negedge clk); bus_addr = a; #1 d = bus_rdata;
  endtask
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    logic [31:0] d;
    int w0, p0, s0;
    eng_done = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    rd(16'h0000, d); chk(d == 0, "status after reset");
    for (int k = 0; k < 20; k++) begin
      int t = $urandom_range(N-1), p = $urandom_range(20000), v = $urandom_range(255);
      wr(16'h1000 + 16'(t), 32'(v));
      chk(last_win_addr == t && (last_win_data & 255) == v, "window write forwarded");
      wr(16'h8000 + 16'(p), 32'(v));
      chk(last_par_addr == p && (last_par_data & 255) == v, "parameter write forwarded");
    end
    for (int k = 0; k < 6; k++) begin
      run_len = 5 + $urandom_range(40);
      y_next  = 8'($urandom);
      wr(16'h0000, 32'h1);
      rd(16'h0000, d); chk(d[0] == 1 && d[1] == 0, "busy, done cleared after start");
      // writes and a second start while busy are dropped
      w0 = win_w; p0 = par_w; s0 = starts;
      wr(16'h1003, 32'h55); wr(16'h8007, 32'h66); wr(16'h0000, 32'h1);
      chk(win_w == w0 && par_w == p0 && starts == s0, "writes and start dropped while busy");
      while (!irq) @(negedge clk);
      rd(16'h0000, d); chk(d[1] == 1 && d[0] == 0, "done flag set, not busy");
      rd(16'h0001, d); chk(d == 32'(signed'(y_next)), "result register");
      rd(16'h0002, d); chk(d == 32'(run_len + 1), "cycle counter");
      rd(16'h0005, d); chk(d == 0, "unmapped address reads 0");
      repeat (3) @(negedge clk);
      chk(irq == 1, "irq sticky");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
