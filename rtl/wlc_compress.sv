// wlc_compress -- Word-Level Compression (WLC) check for one 512-bit line.
//
// A 64-bit word is compressible when its K_MSB most significant bits
// (b63..b58 for K_MSB = 6) are all 0 or all 1: they then carry one bit of
// information, which b58 keeps, and b63..b59 are free for the coset encoder's
// auxiliary bits. The line is compressible only if all eight words are. The
// data part b58..b0 of each word leaves unchanged, so differential writes still
// see the original bit positions. Rule, K_MSB = 6 and the b58/b59 split follow
// the paper (Sec. VI, Fig. 6(a)).
//
// Interface: line_i (word i = bits 64*i+63..64*i) in, compressible_o and the
// per-word data parts data_o out. Purely combinational.
module wlc_compress
  import wlcrc_pkg::*;
#(
  parameter int NUM_W = NUM_WORDS,
  parameter int K     = K_MSB
) (
  input  logic [NUM_W*WORD_BITS-1:0]            line_i,
  output logic                                  compressible_o,
  output logic [NUM_W-1:0]                      word_ok_o,
  output logic [NUM_W-1:0][WORD_BITS-K:0]       data_o
);

  always_comb begin
    for (int i = 0; i < NUM_W; i++) begin
      logic [K-1:0] msbs;
      msbs         = line_i[i*WORD_BITS + WORD_BITS-K +: K];
      word_ok_o[i] = (msbs == '0) || (msbs == '1);
      data_o[i]    = line_i[i*WORD_BITS +: WORD_BITS-K+1];
    end
    compressible_o = &word_ok_o;
  end

endmodule
