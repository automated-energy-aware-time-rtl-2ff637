// positional_encoding: constant sinusoidal position table added to the input
// projection (the "Positional Encoding" block of Fig. 2),
//   PE[p][2m]   = sin(p / 10000^(2m/D_MODEL)),
//   PE[p][2m+1] = cos(p / 10000^(2m/D_MODEL)),
// quantized to the fc_pkg tensor format (round(PE * 2^FRAC_W)).
//
// The paper names the block without its form. The sinusoidal form is chosen
// because the paper's Transformer size of 19.84 KB for d_model = 40 is met
// exactly (19 841 8-bit values) only if the encoding has no trained
// parameters. The table is computed at elaboration and read as a ROM:
// idx = p*D_MODEL + c, combinational.
module positional_encoding
  import fc_pkg::*;
#(
  parameter int unsigned SEQ_LEN = 24,
  parameter int unsigned D_MODEL = 40,
  localparam int unsigned IAW = $clog2(SEQ_LEN*D_MODEL)
) (
  input  logic [IAW-1:0] idx,
  output data_t          pe
);
  typedef data_t tab_t [SEQ_LEN*D_MODEL];

  function automatic tab_t make_table();
    tab_t t;
    for (int p = 0; p < SEQ_LEN; p++) begin
      for (int c = 0; c < D_MODEL; c++) begin
        real ang, v;
        ang = real'(p) / $pow(10000.0, real'(2*(c/2)) / real'(D_MODEL));
        v   = (c % 2 == 0) ? $sin(ang) : $cos(ang);
        t[p*D_MODEL + c] = data_t'($rtoi($floor(v * real'(1 << FRAC_W) + 0.5)));
      end
    end
    return t;
  endfunction

  localparam tab_t PE_TAB = make_table();

  always_comb pe = (32'(idx) < 32'(SEQ_LEN*D_MODEL)) ? PE_TAB[idx] : '0;
endmodule
