// tb_wlcrc_encoder -- checks the eight-word encoder: every word must equal
// the reference encoding of that word against the same word of the stored
// line, the reported energy must be the sum of the reference energies, and
// the output must be zero while the WLC enable is low.
module tb_wlcrc_encoder;
  import wlcrc_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  logic                      en;
  wdata_t [NUM_WORDS-1:0]    data;
  logic [LINE_BITS-1:0]      old, line;
  logic [NUM_WORDS-1:0]      grp;
  logic [4*NUM_WORDS-1:0]    sel;
  logic [31:0]               cost;

  wlcrc_encoder dut (.en_i(en), .data_i(data), .old_line_i(old), .line_o(line),
                     .group_o(grp), .sel_o(sel), .cost_o(cost));

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
    for (int i = 0; i < 600; i++) begin
      int style;
      style = $urandom_range(0, 4);
      for (int k = 0; k < NUM_WORDS; k++) begin
        data[k] = gen_data(($urandom_range(0, 3) == 0) ? $urandom_range(0, 4) : style);
        old[64*k +: 64] = ($urandom_range(0, 1) == 0) ? 64'({$urandom, $urandom}) : gen_word(style);
      end
      en = ($urandom_range(0, 9) != 0);
      @(posedge clk);
      if (en) begin
        int total;
        total = 0;
        for (int k = 0; k < NUM_WORDS; k++) begin
          logic [63:0] exp;
          int c;
          exp = ref_encode_word(data[k], old[64*k +: 64], 0, c);
          total += c;
          check(line[64*k +: 64] == exp, $sformatf("word %0d", k));
          check(grp[k] == exp[63], "group");
        end
        check(cost == 32'(total), "energy sum");
      end else begin
        check(line == '0, "disabled");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
