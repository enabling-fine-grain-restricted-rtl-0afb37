// tb_ref_pkg -- reference model of WLCRC-16 for the testbenches.
//
// Written separately from the RTL: the coset candidates are the columns of
// Table I typed in as lookup tables (symbol value -> state index 0..3 for
// S1..S4), and the encoder is a brute-force search over all 2 groups x 16
// per-block patterns instead of the RTL's per-block minimum. Among patterns of
// equal energy the one with fewest non-C1 blocks wins, which is the same
// tie rule the RTL follows (C1 on a tie inside a block). Group C1/C3 is taken
// unless C1/C2 is strictly cheaper.
package tb_ref_pkg;

  // state index (0=S1..3=S4) of data symbol 00,01,10,11 under each candidate
  localparam int ST_C1 [4] = '{0, 3, 1, 2};   // 00->S1 01->S4 10->S2 11->S3
  localparam int ST_C2 [4] = '{1, 3, 2, 0};   // 00->S2 01->S4 10->S3 11->S1
  localparam int ST_C3 [4] = '{2, 1, 3, 0};   // 00->S3 01->S2 10->S4 11->S1
  // stored bit pair for each state under the array's default mapping
  localparam int BITS_OF_ST [4] = '{0, 2, 3, 1};
  localparam int ENERGY_ST  [4] = '{36, 56, 343, 583};  // RESET + SET, pJ

  function automatic int st_of_bits(input int b);
    for (int s = 0; s < 4; s++) if (BITS_OF_ST[s] == b) return s;
    return 0;
  endfunction

  // cand: 1, 2 or 3
  function automatic logic [1:0] ref_enc_sym(input int cand, input logic [1:0] sym);
    int st;
    case (cand)
      2:       st = ST_C2[sym];
      3:       st = ST_C3[sym];
      default: st = ST_C1[sym];
    endcase
    return 2'(BITS_OF_ST[st]);
  endfunction

  function automatic logic [1:0] ref_dec_sym(input int cand, input logic [1:0] stored);
    for (int v = 0; v < 4; v++)
      if (ref_enc_sym(cand, 2'(v)) == stored) return 2'(v);
    return 2'b00;
  endfunction

  // e3 / e4: SET energies of S3 / S4 (defaults from Table II)
  function automatic int ref_cell_cost(input logic [1:0] nb, input logic [1:0] ob,
                                       input int e3 = 307, input int e4 = 547);
    int st;
    if (nb == ob) return 0;
    st = st_of_bits(int'(nb));
    if (st == 2) return 36 + e3;
    if (st == 3) return 36 + e4;
    return ENERGY_ST[st];
  endfunction

  // block of cell s (0..28) of a word: 16-bit blocks from the bottom
  function automatic int blk_of(input int s);
    if (s < 8)  return 0;
    if (s < 16) return 1;
    if (s < 24) return 2;
    return 3;
  endfunction

  // Encode data bits b58..b0 with a given group (0: C1/C2, 1: C1/C3) and
  // per-block pattern; returns the 64-bit stored word.
  function automatic logic [63:0] ref_build(input logic [58:0] d, input int grp, input int pat);
    logic [63:0] w;
    w = '0;
    for (int s = 0; s < 29; s++) begin
      int cand;
      cand = ((pat >> blk_of(s)) & 1) ? (grp ? 3 : 2) : 1;
      w[2*s +: 2] = ref_enc_sym(cand, d[2*s +: 2]);
    end
    w[58] = d[58];
    w[63] = grp[0];
    for (int b = 0; b < 4; b++) w[62-b] = pat[b];
    return w;
  endfunction

  // Data-cell energy of a stored word against the old one (cells 0..28 only).
  function automatic int ref_data_cost(input logic [63:0] w, input logic [63:0] old,
                                       input int e3 = 307, input int e4 = 547);
    int c;
    c = 0;
    for (int s = 0; s < 29; s++) c += ref_cell_cost(w[2*s +: 2], old[2*s +: 2], e3, e4);
    return c;
  endfunction

  function automatic int ref_ncells(input logic [63:0] w, input logic [63:0] old);
    int n;
    n = 0;
    for (int s = 0; s < 29; s++) n += int'(w[2*s +: 2] != old[2*s +: 2]);
    return n;
  endfunction

  // Best pattern of one group: minimum energy, then fewest non-C1 blocks.
  function automatic int ref_best_pat(input logic [58:0] d, input logic [63:0] old, input int grp,
                                      output int best_cost, input int e3 = 307, input int e4 = 547);
    int best;
    best = 0;
    best_cost = 32'h7fffffff;
    for (int p = 0; p < 16; p++) begin
      int c;
      c = ref_data_cost(ref_build(d, grp, p), old, e3, e4);
      if (c < best_cost || (c == best_cost && $countones(p) < $countones(best))) begin
        best = p;
        best_cost = c;
      end
    end
    return best;
  endfunction

  // Full restricted encoding of a word. mo_permille = 0 disables the
  // multi-objective rule.
  function automatic logic [63:0] ref_encode_word(input logic [58:0] d, input logic [63:0] old,
                                                  input int mo_permille, output int cost,
                                                  input int e3 = 307, input int e4 = 547);
    int c12, c13, p12, p13, grp, n12, n13, dif, cmax;
    p12 = ref_best_pat(d, old, 0, c12, e3, e4);
    p13 = ref_best_pat(d, old, 1, c13, e3, e4);
    grp = (c12 < c13) ? 0 : 1;
    if (mo_permille != 0) begin
      n12  = ref_ncells(ref_build(d, 0, p12), old);
      n13  = ref_ncells(ref_build(d, 1, p13), old);
      dif  = (c12 > c13) ? c12 - c13 : c13 - c12;
      cmax = (c12 > c13) ? c12 : c13;
      if (dif * 1000 < mo_permille * cmax && n12 != n13) grp = (n13 < n12) ? 1 : 0;
    end
    cost = grp ? c13 : c12;
    return grp ? ref_build(d, 1, p13) : ref_build(d, 0, p12);
  endfunction

  function automatic logic [58:0] ref_decode_word(input logic [63:0] w);
    logic [58:0] d;
    for (int s = 0; s < 29; s++) begin
      int cand;
      cand = w[62 - blk_of(s)] ? (w[63] ? 3 : 2) : 1;
      d[2*s +: 2] = ref_dec_sym(cand, w[2*s +: 2]);
    end
    d[58] = w[58];
    return d;
  endfunction

  // Random 64-bit word in one of several styles seen in memory data:
  // 0 small positive, 1 small negative, 2 zero, 3 all ones, 4 random.
  function automatic logic [63:0] gen_word(input int style);
    logic [63:0] w;
    int sh;
    w = {$urandom, $urandom};
    sh = $urandom_range(4, 56);
    case (style)
      0: w = w >> sh;
      1: w = ~(w >> sh);
      2: w = '0;
      3: w = '1;
      default: ;
    endcase
    return w;
  endfunction

  // 59-bit compressed word with biased content.
  function automatic logic [58:0] gen_data(input int style);
    logic [63:0] w;
    w = gen_word(style);
    return w[58:0];
  endfunction

endpackage
