// wlcrc_encoder -- the WLCRC-16 encoder: eight restricted word encoders that
// work in parallel on the eight compressed words of a line (paper Fig. 7,
// "Encoder" with Restricted [W0]..[W7]).
//
// Word i of the new line is encoded against word i of the line now stored in
// memory (old_line_i), so each word's coset choice minimises its differential
// write energy. en_i is the WLC "compressible" output (the E input in Fig. 7);
// while it is low all word encoders output zero.
//
// Interface: en_i, data_i (b58..b0 per word), old_line_i in; line_o (encoded
// line, word i at bits 64*i+63..64*i) and cost_o (sum of the chosen data
// energies, pJ) out. Combinational; the multi-objective threshold is passed
// to every word encoder (0 = off, the paper's main configuration), and so are
// the S3/S4 SET energies E_S3/E_S4 (default 307/547 pJ).
module wlcrc_encoder
  import wlcrc_pkg::*;
#(
  parameter int          NUM_W         = NUM_WORDS,
  parameter int unsigned MO_T_PERMILLE = 0,
  parameter int unsigned E_S3          = E_SET_S3,
  parameter int unsigned E_S4          = E_SET_S4
) (
  input  logic                           en_i,
  input  wdata_t [NUM_W-1:0]             data_i,
  input  logic [NUM_W*WORD_BITS-1:0]     old_line_i,
  output logic [NUM_W*WORD_BITS-1:0]     line_o,
  output logic [NUM_W-1:0]               group_o,
  output logic [NUM_W*BLOCKS_PER_WORD-1:0] sel_o,
  output logic [31:0]                    cost_o
);

  cost_t word_cost [NUM_W];

  for (genvar i = 0; i < NUM_W; i++) begin : g_word
    rcc_word_encoder #(.MO_T_PERMILLE(MO_T_PERMILLE), .E_S3(E_S3), .E_S4(E_S4)) u_enc (
      .en_i    (en_i),
      .data_i  (data_i[i]),
      .old_i   (old_line_i[i*WORD_BITS +: WORD_BITS]),
      .word_o  (line_o[i*WORD_BITS +: WORD_BITS]),
      .group_o (group_o[i]),
      .sel_o   (sel_o[i*BLOCKS_PER_WORD +: BLOCKS_PER_WORD]),
      .cost_o  (word_cost[i])
    );
  end

  always_comb begin
    cost_o = '0;
    for (int i = 0; i < NUM_W; i++) cost_o = cost_o + 32'(word_cost[i]);
  end

endmodule
