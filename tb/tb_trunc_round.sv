// tb_trunc_round -- rounding of both operands for every fixed mode against
// the reference rounding, including mantissas that round up into the
// exponent, infinities and NaNs; mode 6 must pass the operands unchanged.
module tb_trunc_round;
  import fpmul_pkg::*;
  import fpmul_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  mode_e    mode;
  fp_word_t wa, wb, ra, rb;

  trunc_round u_dut (.mode(mode), .word_a(wa), .word_b(wb), .rnd_a(ra), .rnd_b(rb));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int unsigned code, n_carry = 0, n_up = 0;
    for (int i = 0; i < 6000; i++) begin
      code = $urandom_range(1, 5);
      mode = mode_e'(code);
      wa = rand_word(); wb = rand_word();
      #1;
      checks += 2;
      if (ra !== ref_round(wa, ref_mode_w(code))) begin
        failures++;
        if (failures < 10) $display("mode %0d: %h gave %h expected %h", code, wa, ra, ref_round(wa, ref_mode_w(code)));
      end
      if (rb !== ref_round(wb, ref_mode_w(code))) begin
        failures++;
        if (failures < 10) $display("mode %0d: %h gave %h", code, wb, rb);
      end
      if (ra.exp != wa.exp) n_carry++;
      if (ra.man > wa.man) n_up++;
      @(posedge clk);
    end
    checks++;
    if (n_carry == 0 || n_up == 0) begin
      failures++;
      $display("coverage: carry into exponent %0d, round up %0d", n_carry, n_up);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
