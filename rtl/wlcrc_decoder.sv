// wlcrc_decoder -- the WLCRC-16 decoder: eight restricted word decoders in
// parallel on a line read from memory (paper Fig. 7, "Decoder" with
// Restricted [W'0]..[W'7]). Each returns its word's 59 data bits, which WLD
// extends back to 64 bits. The E input of Fig. 7 (the line's flag) gates the
// outputs to zero for lines stored raw, so the decoder is quiet on them.
//
// Interface: en_i, line_i in; data_o (b58..b0 per word) out. Combinational.
module wlcrc_decoder
  import wlcrc_pkg::*;
#(
  parameter int NUM_W = NUM_WORDS
) (
  input  logic                        en_i,
  input  logic [NUM_W*WORD_BITS-1:0]  line_i,
  output wdata_t [NUM_W-1:0]          data_o
);

  wdata_t dec [NUM_W];

  for (genvar i = 0; i < NUM_W; i++) begin : g_word
    rcc_word_decoder u_dec (
      .word_i (line_i[i*WORD_BITS +: WORD_BITS]),
      .data_o (dec[i])
    );
    assign data_o[i] = en_i ? dec[i] : '0;
  end

endmodule
