// wlcrc_top -- on-chip WLCRC-16 write and read paths between a memory
// controller and an MLC PCM main memory (the paper's Fig. 7).
//
// Write path. A new 512-bit line goes to WLC. If every word's six MSBs are
// equal, WLC enables the encoder, whose eight word encoders pick restricted
// cosets against the line now stored (old_line_i, which the controller reads
// before every differential write), and the flag cell is set to S1 (bits 00).
// Otherwise the line is written unencoded and the flag is S2 (bits 10). A 2:1
// multiplexer picks the image; DIFF then compares the 514-bit image (256 data
// cells + flag cell) with the stored one and gives the per-cell program
// enables. Flag polarity follows the paper; everything about the interface is
// this design's own.
//
// Read path. The stored flag selects, through the second 2:1 multiplexer,
// either the raw 512 bits or the output of decoder + WLD. Any flag other than
// 00 is read as "raw".
//
// Timing (this design's choice; the paper gives only combinational delays,
// 2.63 ns write / 0.89 ns read in 45 nm): both paths are combinational with
// one register stage at their outputs, so results appear one clock after
// wr_req_i / rd_req_i, and a new request can be taken every clock. Reset is
// active low and clears the valid outputs.
//
// E_S3 / E_S4 are the SET energies the encoder and DIFF use for states S3 and
// S4 (defaults 307 / 547 pJ from the paper; lower values model newer cells).
module wlcrc_top
  import wlcrc_pkg::*;
#(
  parameter int unsigned MO_T_PERMILLE = 0,        // multi-objective threshold, 0 = off
  parameter int unsigned E_S3          = E_SET_S3, // SET energy of S3, pJ (Table II)
  parameter int unsigned E_S4          = E_SET_S4  // SET energy of S4, pJ (Table II)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // write request from the memory controller
  input  logic                      wr_req_i,
  input  logic [LINE_BITS-1:0]      wr_line_i,       // new data block
  input  logic [LINE_BITS-1:0]      wr_old_line_i,   // old data block (stored image)
  input  logic [1:0]                wr_old_flag_i,   // stored flag cell
  // write to the PCM array
  output logic                      wr_valid_o,
  output logic [STORED_BITS-1:0]    wr_image_o,      // {flag, line}: 514 bits
  output logic [STORED_CELLS-1:0]   wr_cell_en_o,    // cells to program
  output logic                      wr_encoded_o,
  output logic [8:0]                wr_ncells_o,
  output logic [31:0]               wr_energy_o,     // pJ, with differential write
  output logic [NUM_WORDS-1:0]      wr_group_o,      // per word: 0 = C1/C2, 1 = C1/C3
  output logic [NUM_WORDS*BLOCKS_PER_WORD-1:0] wr_sel_o, // per block: 0 = C1
  output logic [31:0]               wr_enc_cost_o,   // encoder's data-cell estimate, pJ
  // read from the PCM array
  input  logic                      rd_req_i,
  input  logic [LINE_BITS-1:0]      rd_line_i,       // stored (encoded) line
  input  logic [1:0]                rd_flag_i,
  // read data to the memory controller
  output logic                      rd_valid_o,
  output logic [LINE_BITS-1:0]      rd_line_o,
  output logic                      rd_encoded_o
);

  // ---------------- write path ----------------
  logic                          compressible;
  logic [NUM_WORDS-1:0]          word_ok;
  wdata_t [NUM_WORDS-1:0]        cdata;
  logic [LINE_BITS-1:0]          enc_line;
  logic [NUM_WORDS-1:0]          enc_group;
  logic [NUM_WORDS*BLOCKS_PER_WORD-1:0] enc_sel;
  logic [31:0]                   enc_cost;
  logic [STORED_BITS-1:0]        img, old_img;
  logic [STORED_CELLS-1:0]       cell_en;
  logic [8:0]                    ncells;
  logic [31:0]                   energy;

  wlc_compress u_wlc (
    .line_i         (wr_line_i),
    .compressible_o (compressible),
    .word_ok_o      (word_ok),
    .data_o         (cdata)
  );

  wlcrc_encoder #(.MO_T_PERMILLE(MO_T_PERMILLE), .E_S3(E_S3), .E_S4(E_S4)) u_enc (
    .en_i       (compressible),
    .data_i     (cdata),
    .old_line_i (wr_old_line_i),
    .line_o     (enc_line),
    .group_o    (enc_group),
    .sel_o      (enc_sel),
    .cost_o     (enc_cost)
  );

  always_comb begin
    img     = compressible ? {FLAG_COMPRESSED, enc_line} : {FLAG_RAW, wr_line_i};
    old_img = {wr_old_flag_i, wr_old_line_i};
  end

  diff_write #(.NCELLS(STORED_CELLS), .E_S3(E_S3), .E_S4(E_S4)) u_diff (
    .new_i     (img),
    .old_i     (old_img),
    .cell_en_o (cell_en),
    .ncells_o  (ncells),
    .energy_o  (energy)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_valid_o   <= 1'b0;
      wr_image_o   <= '0;
      wr_cell_en_o <= '0;
      wr_encoded_o <= 1'b0;
      wr_ncells_o  <= '0;
      wr_energy_o  <= '0;
      wr_group_o   <= '0;
      wr_sel_o     <= '0;
      wr_enc_cost_o <= '0;
    end else begin
      wr_valid_o <= wr_req_i;
      if (wr_req_i) begin
        wr_image_o   <= img;
        wr_cell_en_o <= cell_en;
        wr_encoded_o <= compressible;
        wr_ncells_o  <= ncells;
        wr_energy_o  <= energy;
        wr_group_o   <= compressible ? enc_group : '0;
        wr_sel_o     <= compressible ? enc_sel : '0;
        wr_enc_cost_o <= compressible ? enc_cost : '0;
      end
    end
  end

  // ---------------- read path ----------------
  logic                   rd_enc;
  wdata_t [NUM_WORDS-1:0] ddata;
  logic [LINE_BITS-1:0]   dline;

  assign rd_enc = (rd_flag_i == FLAG_COMPRESSED);

  wlcrc_decoder u_dec (
    .en_i   (rd_enc),
    .line_i (rd_line_i),
    .data_o (ddata)
  );

  wld_decompress u_wld (
    .data_i (ddata),
    .line_o (dline)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_valid_o   <= 1'b0;
      rd_line_o    <= '0;
      rd_encoded_o <= 1'b0;
    end else begin
      rd_valid_o <= rd_req_i;
      if (rd_req_i) begin
        rd_line_o    <= rd_enc ? dline : rd_line_i;
        rd_encoded_o <= rd_enc;
      end
    end
  end

  // An encoded image must carry the S1 flag and a raw one the S2 flag.
  a_flag: assert property (@(posedge clk) disable iff (!rst_n)
    wr_valid_o |-> (wr_image_o[STORED_BITS-1 -: 2] == (wr_encoded_o ? FLAG_COMPRESSED : FLAG_RAW)));

endmodule
