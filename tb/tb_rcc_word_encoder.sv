// tb_rcc_word_encoder -- checks one restricted word encoder against the
// brute-force reference in tb_ref_pkg: stored word, chosen energy, group and
// per-block bits, and that the output is zero while disabled. A second
// instance runs the multi-objective rule with T = 1 % (MO_T_PERMILLE = 10), and
// a third uses lower S3/S4 SET energies (75 / 135 pJ).
// Inputs are biased words (small positive / negative, zero, all-ones) and
// random ones, against old words that are random, zero, or a nearby value.
module tb_rcc_word_encoder;
  import wlcrc_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  logic   en;
  wdata_t data;
  word_t  old;
  word_t  w0, w1;
  logic   g0, g1;
  logic [3:0] s0, s1;
  cost_t  c0, c1, c2;
  word_t  w2;
  logic   g2;
  logic [3:0] s2;

  rcc_word_encoder dut (
    .en_i(en), .data_i(data), .old_i(old),
    .word_o(w0), .group_o(g0), .sel_o(s0), .cost_o(c0));
  rcc_word_encoder #(.MO_T_PERMILLE(10)) dut_mo (
    .en_i(en), .data_i(data), .old_i(old),
    .word_o(w1), .group_o(g1), .sel_o(s1), .cost_o(c1));
  rcc_word_encoder #(.E_S3(75), .E_S4(135)) dut_e (
    .en_i(en), .data_i(data), .old_i(old),
    .word_o(w2), .group_o(g2), .sel_o(s2), .cost_o(c2));

  int checks = 0, failures = 0;
  int n_g12 = 0, n_g13 = 0, n_sel = 0, n_mo = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s data=%h old=%h", what, data, old);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t exp0, exp1, exp2;
    int    ec0, ec1, ec2;
    for (int i = 0; i < 4000; i++) begin
      data = gen_data($urandom_range(0, 4));
      case ($urandom_range(0, 3))
        0: old = {$urandom, $urandom};
        1: old = '0;
        2: old = gen_word($urandom_range(0, 4));
        default: old = ref_encode_word(gen_data($urandom_range(0, 1)), '0, 0, ec0);
      endcase
      en = ($urandom_range(0, 15) != 0);
      @(posedge clk);
      if (en) begin
        exp0 = ref_encode_word(data, old, 0, ec0);
        exp1 = ref_encode_word(data, old, 10, ec1);
        check(w0 == exp0, "word");
        check(int'(c0) == ec0, "cost");
        check(g0 == exp0[63] && s0 == {exp0[59], exp0[60], exp0[61], exp0[62]}, "group/sel");
        check(ref_decode_word(w0) == data, "round trip");
        check(w1 == exp1, "word (multi-objective)");
        exp2 = ref_encode_word(data, old, 0, ec2, 75, 135);
        check(w2 == exp2 && int'(c2) == ec2, "word and cost (S3/S4 = 75/135 pJ)");
        if (g0) n_g13++; else n_g12++;
        if (s0 != 0) n_sel++;
        if (w1 != w0) n_mo++;
      end else begin
        check(w0 == '0, "disabled output");
      end
    end
    $display("groups C1/C2=%0d C1/C3=%0d, non-C1 blocks in %0d words, multi-objective changed %0d",
             n_g12, n_g13, n_sel, n_mo);
    check(n_g12 > 0 && n_g13 > 0 && n_sel > 0 && n_mo > 0, "all choices exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
