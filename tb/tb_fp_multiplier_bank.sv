// tb_fp_multiplier_bank -- each of the five units, selected by a one-hot
// enable, against the reference product at its mantissa width; checks that
// the disabled units see only zeros (operand isolation) and that with no unit
// enabled the outputs are zero.
module tb_fp_multiplier_bank;
  import fpmul_pkg::*;
  import fpmul_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  fp_word_t  wa, wb, p;
  logic [4:0] en;
  fp_flags_t f;

  fp_multiplier_bank u_dut (.word_a(wa), .word_b(wb), .unit_en(en), .product(p), .flags(f));

  logic [4:0] busy;  // units whose operand inputs are not all zero
  assign busy = {u_dut.g_unit[4].a_man != 0 || u_dut.g_unit[4].a_exp != 0,
                 u_dut.g_unit[3].a_man != 0 || u_dut.g_unit[3].a_exp != 0,
                 u_dut.g_unit[2].a_man != 0 || u_dut.g_unit[2].a_exp != 0,
                 u_dut.g_unit[1].a_man != 0 || u_dut.g_unit[1].a_exp != 0,
                 u_dut.g_unit[0].a_man != 0 || u_dut.g_unit[0].a_exp != 0};

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned u, w;
    logic [63:0] r;
    for (int i = 0; i < 5000; i++) begin
      u  = $urandom_range(0, 4);
      w  = ref_mode_w(u + 1);
      wa = ref_round(rand_word(), w);
      wb = ref_round(rand_word(), w);
      wa.exp[0] = 1'b1;  // a nonzero exponent, so the active unit is visibly busy
      en = 5'(1 << u);
      #1;
      r = ref_mul(wa, wb, w);
      checks += 3;
      if (p !== r) begin
        failures++;
        if (failures < 10) $display("unit %0d: %h * %h gave %h expected %h", u, wa, wb, p, r);
      end
      if ({f.zero, f.infinity, f.nan, f.denormal} !== ref_flags(r)) failures++;
      if (busy !== en) begin
        failures++;
        if (failures < 10) $display("unit %0d enabled, busy units %b", u, busy);
      end
      @(posedge clk);
    end
    en = 0;
    #1;
    checks++;
    if (p !== '0 || f !== '0 || busy !== 0) begin failures++; $display("outputs not zero with no unit on"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
