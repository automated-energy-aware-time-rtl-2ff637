// tb_hard_sigmoid: exhaustive check of hard_sigmoid over all 256 inputs
// against the integer reference, plus the saturation points (-3 -> 0, +3 -> 1).
module tb_hard_sigmoid;
  import tb_ref_pkg::*;
  logic signed [7:0] x, y;
  int checks = 0, failures = 0;

  hard_sigmoid dut (.x, .y);

  initial begin
    for (int v = -128; v < 128; v++) begin
      x = 8'(v);
      #1;
      checks++;
      if (int'(y) != r_hsig(v)) begin
        failures++;
        $display("FAIL hsig(%0d) = %0d, expected %0d", v, y, r_hsig(v));
      end
    end
    // key points: hsig(-3.0) = 0, hsig(0) = 0.5, hsig(+3.0) = 1.0
    x = -8'sd48; #1; checks++; if (y != 0)  failures++;
    x = 8'sd0;   #1; checks++; if (y != 8)  failures++;
    x = 8'sd48;  #1; checks++; if (y != 16) failures++;
    x = 8'sd127; #1; checks++; if (y != 16) failures++;
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
