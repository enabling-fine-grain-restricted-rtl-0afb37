// tb_diff_write -- checks the differential-write unit on 257-cell images:
// per-cell enables, number of changed cells and programming energy, for
// images that differ from the stored one in a random number of cells. A second
// instance uses lower S3/S4 SET energies (50 / 80 pJ) and is checked for energy.
module tb_diff_write;
  import wlcrc_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  logic [STORED_BITS-1:0]  nw, od;
  logic [STORED_CELLS-1:0] en;
  logic [8:0]              n;
  logic [31:0]             e, e2;

  diff_write dut (.new_i(nw), .old_i(od), .cell_en_o(en), .ncells_o(n), .energy_o(e));
  diff_write #(.E_S3(50), .E_S4(80)) dut_e (
    .new_i(nw), .old_i(od), .cell_en_o(), .ncells_o(), .energy_o(e2));

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      int nchg, energy, energy2, pct;
      nchg = 0;
      energy = 0;
      energy2 = 0;
      pct = $urandom_range(0, 100);
      for (int j = 0; j < STORED_BITS; j += 32) od[j +: 32] = $urandom;
      nw = od;
      for (int j = 0; j < STORED_CELLS; j++)
        if ($urandom_range(0, 99) < pct) nw[2*j +: 2] = 2'($urandom);
      @(posedge clk);
      for (int j = 0; j < STORED_CELLS; j++) begin
        bit chg;
        chg = nw[2*j +: 2] != od[2*j +: 2];
        nchg   += int'(chg);
        energy += ref_cell_cost(nw[2*j +: 2], od[2*j +: 2]);
        energy2 += ref_cell_cost(nw[2*j +: 2], od[2*j +: 2], 50, 80);
        check(en[j] == chg, "cell enable");
      end
      check(int'(n) == nchg, "cell count");
      check(int'(e) == energy, "energy");
      check(int'(e2) == energy2, "energy (S3/S4 = 50/80 pJ)");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
