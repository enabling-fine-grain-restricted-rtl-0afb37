// tb_wlcrc_top -- end-to-end test of the WLCRC-16 write and read paths with
// every parameter at its default, against a behavioural PCM array.
//
// Each step picks a line address, makes a new 512-bit line (biased words that
// compress, or random words that usually do not), reads the stored image,
// issues the write, checks the image, cell enables and one-cycle latency
// against the reference model, lets the array program the enabled cells, and
// then reads the line back through the decoder and WLD, which must return the
// line the controller wrote. A shadow array written without any encoding gives
// the plain differential-write energy for comparison. The run counts how often
// each mechanism occurs (encoded and raw writes, both coset groups, C2 and C3
// blocks, skipped unchanged cells, flag-cell changes in both directions,
// encoded and raw reads, write and read in the same cycle) and fails if one
// never happens.
module tb_wlcrc_top;
  import wlcrc_pkg::*;
  import tb_ref_pkg::*;

  localparam int NL = 16;
  localparam int NSTEPS = 3000;

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;

  // DUT
  logic                    wr_req, wr_valid, wr_encoded, rd_req, rd_valid, rd_encoded;
  logic [LINE_BITS-1:0]    wr_line, wr_old_line, rd_line, rd_line_o;
  logic [1:0]              wr_old_flag, rd_flag;
  logic [STORED_BITS-1:0]  wr_image;
  logic [STORED_CELLS-1:0] wr_cell_en;
  logic [8:0]              wr_ncells;
  logic [31:0]             wr_energy, wr_enc_cost;
  logic [NUM_WORDS-1:0]    wr_group;
  logic [4*NUM_WORDS-1:0]  wr_sel;

  wlcrc_top dut (
    .clk, .rst_n,
    .wr_req_i(wr_req), .wr_line_i(wr_line), .wr_old_line_i(wr_old_line), .wr_old_flag_i(wr_old_flag),
    .wr_valid_o(wr_valid), .wr_image_o(wr_image), .wr_cell_en_o(wr_cell_en),
    .wr_encoded_o(wr_encoded), .wr_ncells_o(wr_ncells), .wr_energy_o(wr_energy),
    .wr_group_o(wr_group), .wr_sel_o(wr_sel), .wr_enc_cost_o(wr_enc_cost),
    .rd_req_i(rd_req), .rd_line_i(rd_line), .rd_flag_i(rd_flag),
    .rd_valid_o(rd_valid), .rd_line_o(rd_line_o), .rd_encoded_o(rd_encoded));

  // PCM array
  logic                   m_we;
  logic [3:0]             m_waddr, m_raddr;
  logic [STORED_BITS-1:0] m_rimage;
  longint                 m_energy, m_cells;

  pcm_mem_model #(.NLINES(NL)) u_mem (
    .clk, .we(m_we), .waddr(m_waddr), .wimage(wr_image), .wcell_en(wr_cell_en),
    .raddr(m_raddr), .rimage(m_rimage), .energy_total(m_energy), .cells_total(m_cells));

  // Shadow of the line contents and an unencoded baseline array.
  logic [LINE_BITS-1:0] shadow [NL];
  longint base_energy = 0, base_cells = 0;

  int checks = 0, failures = 0;
  int n_enc_wr = 0, n_raw_wr = 0, n_g12 = 0, n_g13 = 0, n_c2 = 0, n_c3 = 0;
  int n_skip = 0, n_flag_up = 0, n_flag_down = 0, n_enc_rd = 0, n_raw_rd = 0, n_same_cycle = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (NSTEPS * 6 + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [LINE_BITS-1:0] gen_line(input int kind);
    logic [LINE_BITS-1:0] l;
    int style;
    style = $urandom_range(0, 4);
    for (int k = 0; k < NUM_WORDS; k++) begin
      logic [63:0] w;
      if (kind == 0) begin
        w = gen_word(($urandom_range(0, 3) == 0) ? $urandom_range(0, 3) : style);
        w[63:58] = {6{w[57]}};
      end else begin
        w = {$urandom, $urandom};
      end
      l[64*k +: 64] = w;
    end
    return l;
  endfunction

  // Small change to a stored line: a few words replaced, the way data evolves.
  function automatic logic [LINE_BITS-1:0] mutate(input logic [LINE_BITS-1:0] l);
    int nw;
    nw = $urandom_range(1, 3);
    for (int i = 0; i < nw; i++) begin
      int k;
      logic [63:0] w;
      k = $urandom_range(0, NUM_WORDS - 1);
      w = l[64*k +: 64] + 64'($urandom_range(1, 4096));
      l[64*k +: 64] = w;
    end
    return l;
  endfunction

  initial begin
    rst_n = 0;
    wr_req = 0; rd_req = 0; m_we = 0; m_waddr = '0; m_raddr = '0;
    wr_line = '0; wr_old_line = '0; wr_old_flag = '0; rd_line = '0; rd_flag = '0;
    for (int a = 0; a < NL; a++) shadow[a] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    for (int step = 0; step < NSTEPS; step++) begin
      int a, kind, sel;
      logic [STORED_BITS-1:0]  old_img, exp_img;
      logic [STORED_CELLS-1:0] exp_en;
      logic                    comp;
      int                      benergy;

      a = $urandom_range(0, NL - 1);
      sel = $urandom_range(0, 9);
      kind = (sel == 0) ? 1 : 0;
      m_raddr = 4'(a);
      #1;
      old_img = m_rimage;

      // ---- write ----
      wr_line     = (sel >= 1 && sel < 6 && step > 20) ? mutate(shadow[a]) : gen_line(kind);
      if (sel == 9) wr_line = shadow[a];           // rewrite of the same data
      wr_old_line = old_img[LINE_BITS-1:0];
      wr_old_flag = old_img[STORED_BITS-1 -: 2];
      wr_req      = 1;
      // read another line in the same cycle now and then
      rd_req = ($urandom_range(0, 3) == 0);
      if (rd_req) begin
        m_raddr = 4'($urandom_range(0, NL - 1));
        #1;
        rd_line = m_rimage[LINE_BITS-1:0];
        rd_flag = m_rimage[STORED_BITS-1 -: 2];
      end

      comp = 1;
      for (int k = 0; k < NUM_WORDS; k++)
        if (!(wr_line[64*k+58 +: 6] == 6'h00 || wr_line[64*k+58 +: 6] == 6'h3f)) comp = 0;
      if (comp) begin
        for (int k = 0; k < NUM_WORDS; k++) begin
          int c;
          exp_img[64*k +: 64] = ref_encode_word(wr_line[64*k +: 59], wr_old_line[64*k +: 64], 0, c);
        end
        exp_img[STORED_BITS-1 -: 2] = 2'b00;
      end else begin
        exp_img = {2'b10, wr_line};
      end
      for (int j = 0; j < STORED_CELLS; j++) exp_en[j] = exp_img[2*j +: 2] != old_img[2*j +: 2];

      @(posedge clk);
      #1;
      wr_req = 0;
      check(wr_valid, "write latency: valid one cycle after request");
      check(wr_encoded == comp, "compressible decision");
      check(wr_image == exp_img, "written image");
      check(wr_cell_en == exp_en, "cell enables");
      check(int'(wr_ncells) == $countones(exp_en), "cell count");
      if (rd_req) begin
        check(rd_valid, "read in the same cycle as a write");
        n_same_cycle++;
      end
      rd_req = 0;

      // mechanism counters
      if (comp) n_enc_wr++; else n_raw_wr++;
      if (comp) for (int k = 0; k < NUM_WORDS; k++) begin
        if (wr_group[k]) n_g13++; else n_g12++;
        for (int b = 0; b < 4; b++) if (wr_sel[4*k+b]) begin
          if (wr_group[k]) n_c3++; else n_c2++;
        end
      end
      if ($countones(exp_en) < STORED_CELLS) n_skip++;
      if (old_img[STORED_BITS-1 -: 2] != exp_img[STORED_BITS-1 -: 2]) begin
        if (comp) n_flag_down++; else n_flag_up++;
      end

      // baseline: unencoded differential write of the raw line (plus no flag)
      benergy = 0;
      for (int j = 0; j < LINE_CELLS; j++) benergy += ref_cell_cost(wr_line[2*j +: 2], shadow[a][2*j +: 2]);
      base_energy += benergy;
      for (int j = 0; j < LINE_CELLS; j++) base_cells += longint'(wr_line[2*j +: 2] != shadow[a][2*j +: 2]);

      // array programs the enabled cells
      m_we = 1; m_waddr = 4'(a);
      @(posedge clk);
      #1;
      m_we = 0;
      shadow[a] = wr_line;

      // ---- read back ----
      m_raddr = 4'(a);
      #1;
      check(m_rimage == exp_img, "array holds the written image");
      rd_line = m_rimage[LINE_BITS-1:0];
      rd_flag = m_rimage[STORED_BITS-1 -: 2];
      rd_req  = 1;
      @(posedge clk);
      #1;
      rd_req = 0;
      check(rd_valid, "read latency: valid one cycle after request");
      check(rd_line_o == shadow[a], "read data equals written data");
      check(rd_encoded == comp, "read flag");
      if (rd_encoded) n_enc_rd++; else n_raw_rd++;
      @(posedge clk);
      #1;
      check(!rd_valid && !wr_valid, "valid drops after one cycle");
    end

    $display("writes: encoded %0d raw %0d | groups C1/C2 %0d C1/C3 %0d | blocks C2 %0d C3 %0d",
             n_enc_wr, n_raw_wr, n_g12, n_g13, n_c2, n_c3);
    $display("writes with skipped cells %0d | flag S2->S1 %0d S1->S2 %0d | reads encoded %0d raw %0d | same-cycle %0d",
             n_skip, n_flag_down, n_flag_up, n_enc_rd, n_raw_rd, n_same_cycle);
    $display("energy: WLCRC-16 %0d pJ (%0d cells), plain differential write %0d pJ (%0d cells)",
             m_energy, m_cells, base_energy, base_cells);
    check(n_enc_wr > 0, "encoded write happened");
    check(n_raw_wr > 0, "raw write happened");
    check(n_g12 > 0 && n_g13 > 0, "both coset groups used");
    check(n_c2 > 0 && n_c3 > 0, "C2 and C3 blocks used");
    check(n_skip > 0, "differential write skipped cells");
    check(n_flag_down > 0 && n_flag_up > 0, "flag cell changed both ways");
    check(n_enc_rd > 0 && n_raw_rd > 0, "both read kinds");
    check(n_same_cycle > 0, "write and read in one cycle");
    check(m_energy < base_energy, "encoding saves energy on this biased data");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
