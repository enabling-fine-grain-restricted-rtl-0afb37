// rcc_word_encoder -- restricted coset encoder for one compressed 64-bit word
// ("Restricted [Wi]" of the WLCRC-16 encoder).
//
// The word's 59 data bits b58..b0 form four blocks: three 16-bit blocks
// b47..b32, b31..b16, b15..b0 and an 11-bit top block b58..b48. For every
// block the energy of writing it with candidate C1, C2 and C3 is computed in
// parallel against the word now stored in memory (differential write: an
// unchanged cell costs nothing). Then, as in the paper's Algorithm 1,
//   cost12 = sum over blocks of min(C1, C2),  cost13 = sum of min(C1, C3),
// and the word uses group C1/C2 if cost12 < cost13, else group C1/C3. Inside
// the group each block takes C1 or the group's other candidate, whichever is
// cheaper. The five reclaimed bits hold the choice:
//   b63      group: 0 = C1/C2, 1 = C1/C3
//   b62..b59 one bit per block, 0 = C1, 1 = the other candidate; b62 serves
//            block b15..b0, b61 b31..b16, b60 b47..b32, b59 b58..b48.
// The block-to-bit wiring is read from Fig. 6(b) of the paper; the 0/1 values
// are this design's choice (the paper only says bit '0' marks C1).
//
// The top block is coded on its five whole cells b57..b48; b58 shares cell
// (b59,b58) with an auxiliary bit and is stored uncoded. The auxiliary bits are
// not part of the cost, as in Algorithm 1, so all blocks are encoded in
// parallel (the paper's "fully parallel" choice). Ties pick C1 inside a block
// and C1/C3 between groups ("else" in Algorithm 1).
//
// Optional multi-objective rule (paper Sec. VII-D): when MO_T_PERMILLE > 0 and
// |cost12 - cost13| * 1000 < MO_T_PERMILLE * max(cost12, cost13), the group
// that programs fewer cells is used instead (ties keep the energy choice).
// The default 0 turns it off, which is the paper's main WLCRC-16 result; the
// paper's example uses T = 1 % (MO_T_PERMILLE = 10). Measuring T against the
// larger cost is this design's reading of "smaller than a threshold T".
//
// Interface: en_i (E, from WLC), data_i, old_i in; word_o (all zero while
// en_i is low, to keep the unused encoder quiet), group_o, sel_o, cost_o (data
// energy of the chosen encoding, pJ) out. Combinational.
//
// E_S3 / E_S4 set the SET energies the cost uses for states S3 and S4; the
// defaults are the paper's 307 / 547 pJ, and its energy-sensitivity study
// uses 152/273, 75/135 and 50/80 pJ. S1, S2 and the 36 pJ RESET stay fixed.
module rcc_word_encoder
  import wlcrc_pkg::*;
#(
  parameter int unsigned MO_T_PERMILLE = 0,
  parameter int unsigned E_S3          = E_SET_S3,   // SET energy of S3, pJ
  parameter int unsigned E_S4          = E_SET_S4    // SET energy of S4, pJ
) (
  input  logic                        en_i,
  input  wdata_t                      data_i,
  input  word_t                       old_i,
  output word_t                       word_o,
  output logic                        group_o,
  output logic [BLOCKS_PER_WORD-1:0]  sel_o,
  output cost_t                       cost_o
);

  cost_t cost_c [3][BLOCKS_PER_WORD];   // per candidate, per block energy
  logic [5:0] ncell_c [3][BLOCKS_PER_WORD]; // per candidate, per block updated cells
  logic [1:0] enc_c [3][CODED_SYMS];    // coded cell under each candidate

  cost_t cost12, cost13, diff, cmax;
  logic [BLOCKS_PER_WORD-1:0] sel12, sel13;
  logic [7:0] n12, n13;
  logic group_energy;

  // Per-candidate cell encodings and per-block energies.
  always_comb begin
    for (int c = 0; c < 3; c++) begin
      for (int b = 0; b < BLOCKS_PER_WORD; b++) begin
        cost_c[c][b]  = '0;
        ncell_c[c][b] = '0;
      end
      for (int s = 0; s < CODED_SYMS; s++) begin
        enc_c[c][s] = coset_encode(coset_e'(c), data_i[2*s +: 2]);
        cost_c[c][s / SYMS_PER_BLOCK] = cost_c[c][s / SYMS_PER_BLOCK]
                                        + cell_cost(enc_c[c][s], old_i[2*s +: 2], E_S3, E_S4);
        ncell_c[c][s / SYMS_PER_BLOCK] = ncell_c[c][s / SYMS_PER_BLOCK]
                                         + 6'(enc_c[c][s] != old_i[2*s +: 2]);
      end
    end
  end

  // Group costs (Algorithm 1, lines 4-5) and per-block choices.
  always_comb begin
    cost12 = '0;
    cost13 = '0;
    n12    = '0;
    n13    = '0;
    for (int b = 0; b < BLOCKS_PER_WORD; b++) begin
      sel12[b] = cost_c[C2][b] < cost_c[C1][b];
      sel13[b] = cost_c[C3][b] < cost_c[C1][b];
      cost12   = cost12 + (sel12[b] ? cost_c[C2][b] : cost_c[C1][b]);
      cost13   = cost13 + (sel13[b] ? cost_c[C3][b] : cost_c[C1][b]);
      n12      = n12 + 8'(sel12[b] ? ncell_c[C2][b] : ncell_c[C1][b]);
      n13      = n13 + 8'(sel13[b] ? ncell_c[C3][b] : ncell_c[C1][b]);
    end
    group_energy = !(cost12 < cost13);          // 1 = C1/C3
    diff = (cost12 > cost13) ? cost12 - cost13 : cost13 - cost12;
    cmax = (cost12 > cost13) ? cost12 : cost13;
    group_o = group_energy;
    if (MO_T_PERMILLE != 0 &&
        32'(diff) * 32'd1000 < 32'(MO_T_PERMILLE) * 32'(cmax) && n12 != n13)
      group_o = n13 < n12;
    sel_o  = group_o ? sel13 : sel12;
    cost_o = group_o ? cost13 : cost12;
  end

  // Assemble the stored word.
  always_comb begin
    word_o = '0;
    if (en_i) begin
      for (int s = 0; s < CODED_SYMS; s++) begin
        if (!sel_o[s / SYMS_PER_BLOCK]) word_o[2*s +: 2] = enc_c[C1][s];
        else if (group_o)               word_o[2*s +: 2] = enc_c[C3][s];
        else                            word_o[2*s +: 2] = enc_c[C2][s];
      end
      word_o[DATA_BITS-1] = data_i[DATA_BITS-1];     // b58, uncoded
      word_o[WORD_BITS-1] = group_o;                 // b63
      for (int b = 0; b < BLOCKS_PER_WORD; b++)
        word_o[WORD_BITS-2-b] = sel_o[b];            // b62..b59
    end
  end

endmodule
