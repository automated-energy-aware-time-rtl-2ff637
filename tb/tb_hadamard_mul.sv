// tb_hadamard_mul: random and corner-case check of the element-wise product
// (rounding and saturation) with three lanes.
module tb_hadamard_mul;
  import tb_ref_pkg::*;
  localparam int L = 3;
  logic signed [7:0] a [L], b [L], y [L];
  int checks = 0, failures = 0;

  hadamard_mul #(.LANES(L)) dut (.a, .b, .y);

  task automatic check_all();
    #1;
    for (int i = 0; i < L; i++) begin
      checks++;
      if (int'(y[i]) != r_mul(a[i], b[i])) begin
        failures++;
        $display("FAIL lane %0d: %0d*%0d = %0d, expected %0d", i, a[i], b[i], y[i], r_mul(a[i], b[i]));
      end
    end
  endtask

  initial begin
    for (int n = 0; n < 2000; n++) begin
      for (int i = 0; i < L; i++) begin
        a[i] = 8'($urandom);
        b[i] = 8'($urandom);
      end
      check_all();
    end
    // corners: 1.0*1.0, saturation, -0.5 rounding
    a[0] = 8'sd16;   b[0] = 8'sd16;
    a[1] = -8'sd128; b[1] = -8'sd128;
    a[2] = -8'sd1;   b[2] = 8'sd8;
    check_all();
    checks++; if (y[0] != 8'sd16 || y[1] != 8'sd127 || y[2] != 8'sd0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
