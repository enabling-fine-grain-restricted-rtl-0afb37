// rcc_word_decoder -- restricted coset decoder for one stored 64-bit word
// ("Restricted [W'i]" of the WLCRC-16 decoder).
//
// b63 names the word's coset group (0 = C1/C2, 1 = C1/C3) and b62..b59 the
// candidate of each block (0 = C1, 1 = the group's other one; b62 for block
// b15..b0 up to b59 for block b58..b48, wiring from the paper's Fig. 6(b)).
// Each coded cell is mapped back with the inverse of its candidate; b58 was
// stored uncoded and passes. The result is the compressed word b58..b0, which
// WLD then extends to 64 bits. This mirrors rcc_word_encoder exactly.
//
// Interface: word_i in, data_o out. Combinational.
module rcc_word_decoder
  import wlcrc_pkg::*;
(
  input  word_t  word_i,
  output wdata_t data_o
);

  logic                       group;
  logic [BLOCKS_PER_WORD-1:0] sel;

  always_comb begin
    group = word_i[WORD_BITS-1];
    for (int b = 0; b < BLOCKS_PER_WORD; b++)
      sel[b] = word_i[WORD_BITS-2-b];
    for (int s = 0; s < CODED_SYMS; s++) begin
      coset_e c;
      if (!sel[s / SYMS_PER_BLOCK]) c = C1;
      else if (group)               c = C3;
      else                          c = C2;
      data_o[2*s +: 2] = coset_decode(c, word_i[2*s +: 2]);
    end
    data_o[DATA_BITS-1] = word_i[DATA_BITS-1];
  end

endmodule
