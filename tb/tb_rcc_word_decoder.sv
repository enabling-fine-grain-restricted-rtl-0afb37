// tb_rcc_word_decoder -- checks one restricted word decoder: arbitrary stored
// words are decoded and compared with the reference inverse mapping, and
// words produced by the reference encoder must decode to their data.
module tb_rcc_word_decoder;
  import wlcrc_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  word_t  w;
  wdata_t d;
  rcc_word_decoder dut (.word_i(w), .data_o(d));

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s word=%h got=%h", what, w, d);
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
    wdata_t data;
    int     c;
    for (int i = 0; i < 3000; i++) begin
      w = {$urandom, $urandom};
      @(posedge clk);
      check(d == ref_decode_word(w), "random word");
      data = gen_data($urandom_range(0, 4));
      w = ref_encode_word(data, {$urandom, $urandom}, 0, c);
      @(posedge clk);
      check(d == data, "round trip");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
