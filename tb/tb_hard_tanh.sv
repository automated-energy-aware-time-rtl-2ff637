// tb_hard_tanh: exhaustive check of hard_tanh over all 256 inputs.
module tb_hard_tanh;
  import tb_ref_pkg::*;
  logic signed [7:0] x, y;
  int checks = 0, failures = 0;

  hard_tanh dut (.x, .y);

  initial begin
    for (int v = -128; v < 128; v++) begin
      x = 8'(v);
      #1;
      checks++;
      if (int'(y) != r_htanh(v)) begin
        failures++;
        $display("FAIL htanh(%0d) = %0d, expected %0d", v, y, r_htanh(v));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
