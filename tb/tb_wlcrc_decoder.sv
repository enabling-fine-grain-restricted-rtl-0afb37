// tb_wlcrc_decoder -- checks the eight-word decoder on reference-encoded
// lines (must return the data) and on random lines (must match the reference
// inverse), and that its output is zero while its enable is low.
module tb_wlcrc_decoder;
  import wlcrc_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  logic                    en;
  logic [LINE_BITS-1:0]    line;
  wdata_t [NUM_WORDS-1:0]  data;

  wlcrc_decoder dut (.en_i(en), .line_i(line), .data_o(data));

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
    wdata_t src [NUM_WORDS];
    for (int i = 0; i < 800; i++) begin
      bit coded;
      coded = 1'($urandom_range(0, 1));
      for (int k = 0; k < NUM_WORDS; k++) begin
        int c;
        src[k] = gen_data($urandom_range(0, 4));
        line[64*k +: 64] = coded ? ref_encode_word(src[k], {$urandom, $urandom}, 0, c)
                                 : 64'({$urandom, $urandom});
      end
      en = ($urandom_range(0, 9) != 0);
      @(posedge clk);
      for (int k = 0; k < NUM_WORDS; k++) begin
        if (!en)        check(data[k] == '0, "disabled");
        else if (coded) check(data[k] == src[k], "round trip");
        else            check(data[k] == ref_decode_word(line[64*k +: 64]), "random word");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
