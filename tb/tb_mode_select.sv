// tb_mode_select -- mode decoding: fixed modes, the auto-mode choice from the
// operand mantissas (random mantissas with trailing zero runs of every
// length), mismatched and unused mode codes raising the error with no unit
// enabled, and the one-hot unit enable.
module tb_mode_select;
  import fpmul_pkg::*;
  import fpmul_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [2:0]  ma, mb;
  logic [51:0] xa, xb;
  mode_e       mode;
  logic [4:0]  en;
  logic        err;

  mode_select u_dut (.mode_a(ma), .mode_b(mb), .man_a(xa), .man_b(xb),
                     .mode(mode), .unit_en(en), .mode_error(err));

  function automatic logic [51:0] rand_man();
    logic [51:0] m;
    int unsigned keep;
    m = 52'({$urandom, $urandom});
    keep = $urandom_range(0, 52);
    m = (keep == 0) ? '0 : (m >> (52 - keep)) << (52 - keep);
    if ($urandom_range(0, 3) == 0) m[51 - $urandom_range(0, 51)] = 1'b1;
    return m;
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned exp_code, seen [8];
    logic exp_err;
    foreach (seen[k]) seen[k] = 0;
    for (int i = 0; i < 6000; i++) begin
      ma = 3'($urandom_range(0, 7));
      mb = ($urandom_range(0, 7) == 0) ? 3'($urandom) : ma;
      if (i % 2 == 1) begin ma = 0; mb = 0; end
      xa = rand_man(); xb = rand_man();
      #1;
      exp_err = (ma != mb) || (ma > 5);
      if (ma == 0) begin
        exp_code = ref_w_code(ref_auto_w(xa) > ref_auto_w(xb) ? ref_auto_w(xa) : ref_auto_w(xb));
      end else begin
        exp_code = int'(ma);
      end
      checks++;
      if (err !== exp_err) begin
        failures++;
        $display("modes %0d %0d: error %b", ma, mb, err);
      end
      if (!exp_err) begin
        checks += 2;
        if (int'(mode) != exp_code) begin
          failures++;
          if (failures < 10) $display("mode %0d, man %h %h: chose %0d expected %0d", ma, xa, xb, mode, exp_code);
        end
        if (en !== 5'(1 << (exp_code - 1))) begin
          failures++;
          $display("enable %b for mode %0d", en, exp_code);
        end
        if (ma == 0) seen[exp_code]++;
      end else begin
        checks++;
        if (en !== 0) begin failures++; $display("unit enabled on error"); end
        seen[0]++;
      end
      @(posedge clk);
    end
    // every auto-mode outcome and the error must have occurred
    for (int k = 0; k <= 5; k++) begin
      checks++;
      if (seen[k] == 0) begin failures++; $display("outcome %0d never seen", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
