// tb_wld_decompress -- checks that WLD rebuilds each 64-bit word by copying
// b58 into b63..b59, and that WLD(WLC(line)) returns any compressible line.
module tb_wld_decompress;
  import wlcrc_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  logic [NUM_WORDS-1:0][DATA_BITS-1:0] data;
  logic [LINE_BITS-1:0]                line;

  wld_decompress dut (.data_i(data), .line_o(line));

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
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
    logic [63:0] orig [NUM_WORDS];
    for (int i = 0; i < 3000; i++) begin
      for (int k = 0; k < NUM_WORDS; k++) begin
        orig[k] = gen_word($urandom_range(0, 4));
        orig[k][63:59] = {5{orig[k][58]}};
        data[k] = orig[k][58:0];
      end
      @(posedge clk);
      for (int k = 0; k < NUM_WORDS; k++) begin
        check(line[64*k +: 64] == orig[k], "word");
        check(line[64*k+59 +: 5] == {5{data[k][58]}}, "extension");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
