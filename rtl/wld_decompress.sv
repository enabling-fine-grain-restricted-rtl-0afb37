// wld_decompress -- Word-Level Decompression (WLD) of one 512-bit line.
//
// Inverse of WLC: for each word the top data bit (b58) is copied into the
// reclaimed bits b63..b59, like sign extension, which restores the original
// word because WLC only accepted words whose b63..b58 were all equal (paper
// Sec. VI). Word i occupies line bits 64*i+63..64*i.
//
// Interface: data_i (decoded b58..b0 per word) in, line_o out. Combinational.
module wld_decompress
  import wlcrc_pkg::*;
#(
  parameter int NUM_W = NUM_WORDS,
  parameter int K     = K_MSB
) (
  input  logic [NUM_W-1:0][WORD_BITS-K:0]  data_i,
  output logic [NUM_W*WORD_BITS-1:0]       line_o
);

  always_comb begin
    for (int i = 0; i < NUM_W; i++)
      line_o[i*WORD_BITS +: WORD_BITS] = {{(K-1){data_i[i][WORD_BITS-K]}}, data_i[i]};
  end

endmodule
