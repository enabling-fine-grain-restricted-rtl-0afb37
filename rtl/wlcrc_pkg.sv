// wlcrc_pkg -- constants, types and symbol mappings shared by the WLCRC-16
// encoder/decoder datapath for 4-level-cell (MLC) phase change memory.
//
// A 512-bit memory line is stored in 256 two-bit cells. Each cell is in one of
// four resistance states S1..S4, numbered by the energy needed to program it
// (S1 cheapest, S4 dearest). The memory array always interprets stored bit
// pairs with the default mapping 00->S1, 10->S2, 11->S3, 01->S4 (candidate
// C1). A coset candidate is a different symbol-to-state mapping; to apply it,
// the encoder stores the bit pair whose default state equals the state the
// candidate wants, so every candidate is a 2-bit permutation here.
//
// Candidates C1..C3 and the programming energies (36 pJ RESET plus 0/20/307/547
// pJ SET for S1..S4) follow the paper's Table I / Table II. C4 is not used by
// WLCRC. The flag cell uses S1 for "compressed+encoded" and S2 for "raw line",
// as the paper states. The bit order of words inside a line (word i = line bits
// 64*i+63 .. 64*i) is this design's choice.
package wlcrc_pkg;

  // ---- geometry (paper: 512-bit line, eight 64-bit words, 16-bit blocks) ----
  localparam int LINE_BITS       = 512;
  localparam int WORD_BITS       = 64;
  localparam int NUM_WORDS       = LINE_BITS / WORD_BITS;   // 8
  localparam int K_MSB           = 6;                        // compared MSBs b63..b58
  localparam int RECLAIM_BITS    = K_MSB - 1;                // b63..b59 freed
  localparam int DATA_BITS       = WORD_BITS - RECLAIM_BITS; // b58..b0 = 59
  localparam int BLOCKS_PER_WORD = 4;
  localparam int BLOCK_BITS      = 16;
  localparam int SYMS_PER_BLOCK  = BLOCK_BITS / 2;           // 8 cells per full block
  // The top block b58..b48 has 11 bits: cells (b57,b56)..(b49,b48) are coded,
  // b58 shares cell (b59,b58) with an auxiliary bit and is stored as is.
  localparam int CODED_SYMS      = 29;                       // cells 0..28 of a word
  localparam int LINE_CELLS      = LINE_BITS / 2;            // 256
  localparam int STORED_CELLS    = LINE_CELLS + 1;           // + flag cell
  localparam int STORED_BITS     = 2 * STORED_CELLS;         // 514

  // ---- programming energy, pJ (Table II) ----
  localparam int unsigned E_RESET = 36;
  localparam int unsigned E_SET_S1 = 0;
  localparam int unsigned E_SET_S2 = 20;
  localparam int unsigned E_SET_S3 = 307;
  localparam int unsigned E_SET_S4 = 547;

  // Largest word cost: 29 cells * (36+547) = 16907 pJ -> 15 bits; 16 bits hold
  // SET energies up to 2223 pJ.
  typedef logic [15:0] cost_t;

  typedef enum logic [1:0] {S1 = 2'd0, S2 = 2'd1, S3 = 2'd2, S4 = 2'd3} state_e;
  typedef enum logic [1:0] {C1 = 2'd0, C2 = 2'd1, C3 = 2'd2} coset_e;

  typedef logic [DATA_BITS-1:0] wdata_t;   // compressed word b58..b0
  typedef logic [WORD_BITS-1:0] word_t;

  // Flag cell contents (bits that the array maps to S1 / S2).
  localparam logic [1:0] FLAG_COMPRESSED = 2'b00;  // S1
  localparam logic [1:0] FLAG_RAW        = 2'b10;  // S2

  // Default mapping: stored bit pair -> state.
  function automatic state_e state_of(input logic [1:0] b);
    unique case (b)
      2'b00:   return S1;
      2'b10:   return S2;
      2'b11:   return S3;
      default: return S4;   // 2'b01
    endcase
  endfunction

  // Inverse of the default mapping: state -> stored bit pair.
  function automatic logic [1:0] bits_of(input state_e s);
    unique case (s)
      S1:      return 2'b00;
      S2:      return 2'b10;
      S3:      return 2'b11;
      default: return 2'b01;
    endcase
  endfunction

  // State that candidate c assigns to data symbol sym (Table I columns).
  function automatic state_e coset_state(input coset_e c, input logic [1:0] sym);
    state_e s;
    unique case (c)
      C2: unique case (sym)            // 11->S1 00->S2 10->S3 01->S4
            2'b11:   s = S1;
            2'b00:   s = S2;
            2'b10:   s = S3;
            default: s = S4;
          endcase
      C3: unique case (sym)            // 11->S1 01->S2 00->S3 10->S4
            2'b11:   s = S1;
            2'b01:   s = S2;
            2'b00:   s = S3;
            default: s = S4;
          endcase
      default: s = state_of(sym);      // C1 = default mapping
    endcase
    return s;
  endfunction

  // Bit pair to store so that the array holds the state candidate c wants.
  function automatic logic [1:0] coset_encode(input coset_e c, input logic [1:0] sym);
    return bits_of(coset_state(c, sym));
  endfunction

  // Data symbol recovered from a stored bit pair written with candidate c.
  function automatic logic [1:0] coset_decode(input coset_e c, input logic [1:0] stored);
    logic [1:0] sym;
    sym = 2'b00;
    for (int v = 0; v < 4; v++)
      if (coset_encode(c, 2'(v)) == stored) sym = 2'(v);
    return sym;
  endfunction

  // Energy of programming one cell under differential write: nothing when the
  // cell already holds the state, else one RESET plus the SET energy. The S3
  // and S4 SET energies are arguments so that designs can be built for other
  // cell technologies (S1 and S2 are fixed by the RESET / single SET pulse).
  function automatic cost_t cell_cost(input logic [1:0] new_bits, input logic [1:0] old_bits,
                                      input int unsigned e_s3 = E_SET_S3,
                                      input int unsigned e_s4 = E_SET_S4);
    cost_t  e;
    state_e st;
    st = state_of(new_bits);
    unique case (st)
      S1:      e = cost_t'(E_RESET + E_SET_S1);
      S2:      e = cost_t'(E_RESET + E_SET_S2);
      S3:      e = cost_t'(E_RESET + e_s3);
      default: e = cost_t'(E_RESET + e_s4);
    endcase
    if (new_bits == old_bits) e = '0;
    return e;
  endfunction

endpackage
