// tb_wlcrc_workloads -- runs line-write streams through the WLCRC-16 write
// path and reports, per stream and configuration, the share of compressed
// lines, the programming energy and the number of programmed cells, next to
// plain differential write of the same lines under the same cell energies.
//
// Two streams stand in for the data classes the scheme is evaluated on
// (application traces are not available here, so both are generated):
//   random  uniformly random 512-bit lines. WLC can almost never compress
//           them (each word's six MSBs are equal with probability 1/32), so
//           they go out raw and cost what plain differential write costs, plus
//           at most a flag-cell write.
//   biased  lines of small positive and negative integers, zeros and all-ones
//           words, updated a few words at a time like live program data.
//           Nearly all compress, and the coset choice must save energy.
// Five configurations see the same stream, each with its own PCM array:
//   0  default (Table II energies, energy-only choice)
//   1  multi-objective rule at T = 1 % (MO_T_PERMILLE = 10): should program
//      no more cells for at most a small energy increase
//   2..4  S3/S4 SET energies lowered to 152/273, 75/135 and 50/80 pJ: the
//      encoder must still beat plain differential write at each point.
// Write disturbance is reported too: every programmed cell is RESET first,
// and each idle neighbour in the same line (cell j-1 or j+1) is disturbed
// with a probability set by its state, 12.3 % (S1), 0 (S2), 27.6 % (S3) and
// 15.2 % (S4). The sum of these probabilities over a write is its expected
// number of disturbance errors.
module tb_wlcrc_workloads;
  import wlcrc_pkg::*;
  import tb_ref_pkg::*;

  localparam int NL = 16;
  localparam int NLINES = 1500;
  localparam int NCFG = 5;
  localparam int CFG_MO [NCFG] = '{0, 10, 0, 0, 0};
  localparam int CFG_E3 [NCFG] = '{307, 307, 152, 75, 50};
  localparam int CFG_E4 [NCFG] = '{547, 547, 273, 135, 80};

  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;

  logic                 wr_req, m_we;
  logic [LINE_BITS-1:0] wr_line;
  logic [3:0]           addr;

  logic [STORED_BITS-1:0]  old_img [NCFG];
  logic [STORED_BITS-1:0]  img     [NCFG];
  logic [STORED_CELLS-1:0] cen     [NCFG];
  logic                    val     [NCFG];
  logic                    enc     [NCFG];
  longint                  etot    [NCFG];
  longint                  ctot    [NCFG];

  for (genvar g = 0; g < NCFG; g++) begin : g_cfg
    wlcrc_top #(.MO_T_PERMILLE(CFG_MO[g]), .E_S3(CFG_E3[g]), .E_S4(CFG_E4[g])) u_top (
      .clk, .rst_n, .wr_req_i(wr_req), .wr_line_i(wr_line),
      .wr_old_line_i(old_img[g][LINE_BITS-1:0]), .wr_old_flag_i(old_img[g][STORED_BITS-1 -: 2]),
      .wr_valid_o(val[g]), .wr_image_o(img[g]), .wr_cell_en_o(cen[g]), .wr_encoded_o(enc[g]),
      .wr_ncells_o(), .wr_energy_o(), .wr_group_o(), .wr_sel_o(), .wr_enc_cost_o(),
      .rd_req_i(1'b0), .rd_line_i('0), .rd_flag_i(2'b00),
      .rd_valid_o(), .rd_line_o(), .rd_encoded_o());
    pcm_mem_model #(.NLINES(NL), .E_S3(CFG_E3[g]), .E_S4(CFG_E4[g])) u_mem (
      .clk, .we(m_we), .waddr(addr), .wimage(img[g]), .wcell_en(cen[g]),
      .raddr(addr), .rimage(old_img[g]), .energy_total(etot[g]), .cells_total(ctot[g]));
  end

  logic [LINE_BITS-1:0] shadow [NL];

  // disturbance probability of an idle cell, in units of 0.1 %
  function automatic int der_permille(input logic [1:0] b);
    case (b)
      2'b00:   return 123;   // S1
      2'b10:   return 0;     // S2
      2'b11:   return 276;   // S3
      default: return 152;   // S4
    endcase
  endfunction

  // Expected disturbance errors of programming the cells marked in pe over an
  // array holding cur: sum over idle cells of 1 - (1 - p)^n, n the
  // number of programmed neighbours.
  function automatic real exp_disturb(input logic [STORED_BITS-1:0] cur,
                                      input logic [STORED_CELLS-1:0] pe, input int ncell);
    real t;
    t = 0.0;
    for (int j = 0; j < ncell; j++) begin
      int n;
      real p;
      n = 0;
      if (!pe[j]) begin
        if (j > 0 && pe[j-1]) n++;
        if (j < ncell - 1 && pe[j+1]) n++;
        p = real'(der_permille(cur[2*j +: 2])) / 1000.0;
        t += 1.0 - (1.0 - p) ** n;
      end
    end
    return t;
  endfunction
  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (2 * NLINES * 4 + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [LINE_BITS-1:0] biased_line(input logic [LINE_BITS-1:0] prev, input bit fresh);
    logic [LINE_BITS-1:0] l;
    l = prev;
    for (int k = 0; k < NUM_WORDS; k++) begin
      if (fresh || $urandom_range(0, 3) == 0) begin
        logic [63:0] w;
        w = gen_word($urandom_range(0, 3));
        w[63:58] = {6{w[57]}};
        if ($urandom_range(0, 399) == 0) w = {$urandom, $urandom};  // rare wide value
        l[64*k +: 64] = w;
      end
    end
    return l;
  endfunction

  task automatic run_stream(input bit biased, input string name);
    longint e0 [NCFG], c0 [NCFG], base_e [NCFG], de [NCFG], dc [NCFG];
    longint base_c;
    real wd_enc [NCFG], wd_base;
    int ncomp;
    for (int g = 0; g < NCFG; g++) begin
      e0[g] = etot[g]; c0[g] = ctot[g]; base_e[g] = 0; wd_enc[g] = 0.0;
    end
    base_c = 0; ncomp = 0; wd_base = 0.0;
    for (int i = 0; i < NLINES; i++) begin
      addr = 4'($urandom_range(0, NL - 1));
      if (biased) wr_line = biased_line(shadow[addr], i < NL);
      else for (int j = 0; j < LINE_BITS; j += 32) wr_line[j +: 32] = $urandom;
      for (int j = 0; j < LINE_CELLS; j++) begin
        for (int g = 0; g < NCFG; g++)
          base_e[g] += longint'(ref_cell_cost(wr_line[2*j +: 2], shadow[addr][2*j +: 2], CFG_E3[g], CFG_E4[g]));
        base_c += longint'(wr_line[2*j +: 2] != shadow[addr][2*j +: 2]);
      end
      wr_req = 1;
      @(posedge clk); #1;
      wr_req = 0;
      for (int g = 0; g < NCFG; g++) check(val[g] && enc[g] == enc[0], "write valid after one clock");
      if (enc[0]) ncomp++;
      begin
        logic [STORED_CELLS-1:0] pe;
        for (int j = 0; j < LINE_CELLS; j++) pe[j] = wr_line[2*j +: 2] != shadow[addr][2*j +: 2];
        pe[STORED_CELLS-1] = 1'b0;
        wd_base += exp_disturb({2'b10, shadow[addr]}, pe, LINE_CELLS);
        for (int g = 0; g < NCFG; g++) wd_enc[g] += exp_disturb(old_img[g], cen[g], STORED_CELLS);
      end
      m_we = 1;
      @(posedge clk); #1;
      m_we = 0;
      shadow[addr] = wr_line;
    end
    for (int g = 0; g < NCFG; g++) begin
      de[g] = etot[g] - e0[g];
      dc[g] = ctot[g] - c0[g];
    end
    $display("%s: compressed %0d of %0d lines, plain differential write programs %0d cells, %0.3f expected disturbance errors per line",
             name, ncomp, NLINES, base_c, wd_base / NLINES);
    for (int g = 0; g < NCFG; g++)
      $display("  S3/S4 SET %0d/%0d pJ, T %0d permille: energy %0d pJ vs plain %0d pJ (%0d%% saved), %0d cells, %0.3f disturbance errors per line",
               CFG_E3[g], CFG_E4[g], CFG_MO[g], de[g], base_e[g],
               100 - int'(de[g] * 100 / base_e[g]), dc[g], wd_enc[g] / NLINES);
    if (biased) begin
      check(ncomp * 10 > NLINES * 8, "biased lines mostly compress");
      for (int g = 0; g < NCFG; g++) check(de[g] < base_e[g], "encoding saves energy on biased lines");
      check(dc[1] <= dc[0], "multi-objective programs no more cells");
      check(wd_enc[0] < wd_base, "encoding does not add write disturbance on biased lines");
      check(de[1] * 100 <= de[0] * 105, "multi-objective costs at most 5% more energy");
    end else begin
      check(ncomp == 0, "random lines do not compress");
      for (int g = 0; g < NCFG; g++)
        check(de[g] >= base_e[g] && de[g] <= base_e[g] + longint'(NL) * 56, "random lines cost plain energy");
      check(wd_enc[0] <= wd_base * 1.01, "random lines see plain write disturbance");
    end
  endtask

  initial begin
    rst_n = 0; wr_req = 0; m_we = 0; addr = '0; wr_line = '0;
    for (int a = 0; a < NL; a++) shadow[a] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    run_stream(1'b0, "random");
    run_stream(1'b1, "biased");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
