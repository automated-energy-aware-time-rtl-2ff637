// tb_positional_encoding: compares the whole 24 x 40 table with the reference
// sinusoids and checks fixed points (position 0: sin = 0, cos = 1.0 = 16).
module tb_positional_encoding;
  import tb_tf_ref_pkg::*;
  localparam int N = 24, D = 40;
  logic [$clog2(N*D)-1:0] idx;
  logic signed [7:0] pe;
  int checks = 0, failures = 0;

  positional_encoding #(.SEQ_LEN(N), .D_MODEL(D)) dut (.idx, .pe);

  initial begin
    vec_t t = r_pe(N, D);
    for (int i = 0; i < N*D; i++) begin
      idx = i[$bits(idx)-1:0]; #1;
      checks++;
      if (int'(pe) != t[i]) begin failures++; $display("FAIL pe[%0d] = %0d expected %0d", i, pe, t[i]); end
    end
    for (int c = 0; c < D; c++) begin
      idx = c[$bits(idx)-1:0]; #1;
      checks++;
      if (int'(pe) != ((c % 2) ? 16 : 0)) begin failures++; $display("FAIL pe[0][%0d] = %0d", c, pe); end
    end
    // position 1, channel 0: sin(1) = 0.841 -> 13
    idx = D; #1; checks++; if (pe != 8'sd13) begin failures++; $display("FAIL pe[1][0] = %0d", pe); end
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
