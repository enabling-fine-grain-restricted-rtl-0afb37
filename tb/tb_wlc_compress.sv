// tb_wlc_compress -- checks the WLC compressibility test and the data split.
// Lines are built word by word: most words have equal b63..b58, some have one
// of those six bits flipped, so both outcomes and every failing bit position
// occur.
module tb_wlc_compress;
  import wlcrc_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  logic [LINE_BITS-1:0]              line;
  logic                              comp;
  logic [NUM_WORDS-1:0]              ok;
  logic [NUM_WORDS-1:0][DATA_BITS-1:0] data;

  wlc_compress dut (.line_i(line), .compressible_o(comp), .word_ok_o(ok), .data_o(data));

  int checks = 0, failures = 0, n_comp = 0, n_raw = 0;

  task automatic check(input bit ok_, input string what);
    checks++;
    if (!ok_) begin
      failures++;
      if (failures < 10) $display("FAIL %s line=%h", what, line);
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
    logic [NUM_WORDS-1:0] exp_ok;
    for (int i = 0; i < 3000; i++) begin
      for (int k = 0; k < NUM_WORDS; k++) begin
        logic [63:0] wd;
        wd = gen_word($urandom_range(0, 3));
        wd[63:58] = {6{wd[57]}};                 // make it compressible
        if ($urandom_range(0, 40) == 0) wd[58 + $urandom_range(0, 5)] ^= 1'b1;
        if ($urandom_range(0, 200) == 0) wd = {$urandom, $urandom};
        line[64*k +: 64] = wd;
        exp_ok[k] = (wd[63:58] == 6'h00) || (wd[63:58] == 6'h3f);
      end
      @(posedge clk);
      check(ok == exp_ok, "per-word flag");
      check(comp == (exp_ok == '1), "line flag");
      for (int k = 0; k < NUM_WORDS; k++) check(data[k] == line[64*k +: 59], "data part");
      if (comp) n_comp++; else n_raw++;
    end
    $display("compressible %0d, not compressible %0d", n_comp, n_raw);
    check(n_comp > 0 && n_raw > 0, "both outcomes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
