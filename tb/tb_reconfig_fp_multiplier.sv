// tb_reconfig_fp_multiplier -- end-to-end test of the reconfigurable
// multiplier at its default size.
//
// Random operand pairs are issued with random gaps, back to back included, in
// every mode: the five fixed modes, auto mode, mismatched mode fields and
// unused codes. Each issue's expected outcome is computed from the reference
// model (auto-mode choice, rounding, truncated product, flags) and checked
// when it must appear: done and the result exactly one cycle after the
// loading edge, mode_error instead of done on a bad mode field, with product
// and flags left unchanged. A final directed sequence checks reset.
//
// Coverage counters make sure every mechanism happened at least once: each
// fixed mode, each auto-mode outcome, the mode select error, a rounding
// carry into the exponent, overflow to infinity, underflow to a denormal,
// zero and NaN results, and back-to-back operations.
module tb_reconfig_fp_multiplier;
  import fpmul_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        rst, ready;
  logic [66:0] a, b;
  logic [63:0] product;
  logic        zero, infinity, nan, denormal, mode_error, done;
  logic [2:0]  active_mode;

  reconfig_fp_multiplier u_dut (
    .clk(clk), .rst(rst), .ready(ready), .a(a), .b(b),
    .product(product), .zero(zero), .infinity(infinity), .nan(nan), .denormal(denormal),
    .mode_error(mode_error), .done(done), .active_mode(active_mode)
  );

  localparam int NOPS = 20000;

  initial begin
    repeat (NOPS * 4 + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // coverage
  int cov_fixed [1:5];
  int cov_auto  [1:5];
  int cov_error = 0, cov_round_carry = 0, cov_overflow = 0, cov_underflow = 0;
  int cov_zero = 0, cov_nan = 0, cov_back_to_back = 0;

  // state of the expected outputs
  logic        exp_pending, exp_err;
  logic [63:0] exp_prod, last_prod;
  logic [3:0]  exp_flags, last_flags;
  logic [2:0]  exp_mode, last_mode;

  task automatic issue(output logic [66:0] oa, output logic [66:0] ob);
    logic [63:0] wa, wb, ra, rb;
    logic [2:0]  ca, cb;
    int unsigned k, w, code;
    k  = $urandom_range(0, 19);
    wa = rand_word();
    wb = rand_word();
    if (k < 12) ca = 3'($urandom_range(1, 5));       // fixed mode
    else if (k < 18) ca = 3'b000;                    // auto
    else ca = 3'($urandom_range(6, 7));              // unused code
    cb = ca;
    if (k == 19) cb = ca ^ 3'($urandom_range(1, 7)); // mismatch
    if (ca == 0 && $urandom_range(0, 1) == 1) begin
      // short mantissas so that auto mode picks narrow units too
      wa[51:0] = (wa[51:0] >> $urandom_range(0, 52)) << $urandom_range(30, 52);
      wb[51:0] = (wb[51:0] >> $urandom_range(0, 52)) << $urandom_range(30, 52);
    end
    oa = {ca, wa};
    ob = {cb, wb};
    exp_err = (ca != cb) || (ca > 5);
    if (exp_err) begin
      cov_error++;
      return;
    end
    if (ca == 0) begin
      w = ref_auto_w(wa[51:0]) > ref_auto_w(wb[51:0]) ? ref_auto_w(wa[51:0]) : ref_auto_w(wb[51:0]);
      code = ref_w_code(w);
      cov_auto[code]++;
    end else begin
      code = int'(ca);
      w = ref_mode_w(code);
      cov_fixed[code]++;
    end
    ra = ref_round(wa, w);
    rb = ref_round(wb, w);
    if (ra[62:52] != wa[62:52] || rb[62:52] != wb[62:52]) cov_round_carry++;
    exp_prod  = ref_mul(ra, rb, w);
    exp_flags = ref_flags(exp_prod);
    exp_mode  = 3'(code);
    if (exp_flags[2] && ra[62:52] != 11'h7ff && rb[62:52] != 11'h7ff) cov_overflow++;
    if (exp_flags[0]) cov_underflow++;
    if (exp_flags[3]) cov_zero++;
    if (exp_flags[1]) cov_nan++;
  endtask

  initial begin
    int gap, prev_issue;
    foreach (cov_fixed[k]) begin cov_fixed[k] = 0; cov_auto[k] = 0; end
    rst = 1; ready = 0; a = '0; b = '0;
    exp_pending = 0;
    last_prod = '0; last_flags = '0; last_mode = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 0;
    prev_issue = -10;
    for (int n = 0, cyc = 0; n < NOPS; cyc++) begin
      // drive on the falling edge
      @(negedge clk);
      gap = $urandom_range(0, 3);
      ready = (gap != 0) || (n % 7 == 0);
      if (ready) begin
        issue(a, b);
        if (prev_issue == cyc - 1) cov_back_to_back++;
        prev_issue = cyc;
        n++;
      end else begin
        a = 67'({$urandom, $urandom, $urandom});  // ignored while ready is low
        b = 67'({$urandom, $urandom, $urandom});
      end
      // loading edge
      @(posedge clk);
      // result edge: the outputs written here belong to the issue of the
      // previous cycle, if there was one
      begin
        automatic logic        p_ready = ready;
        automatic logic        p_err   = exp_err;
        automatic logic [63:0] p_prod  = exp_prod;
        automatic logic [3:0]  p_flags = exp_flags;
        automatic logic [2:0]  p_mode  = exp_mode;
      fork begin
        @(posedge clk);
        #1;
        if (p_ready) begin
          checks += 2;
          if (done !== !p_err) begin failures++; $display("done %b, error expected %b", done, p_err); end
          if (mode_error !== p_err) begin failures++; $display("mode_error %b expected %b", mode_error, p_err); end
          if (!p_err) begin
            last_prod = p_prod; last_flags = p_flags; last_mode = p_mode;
          end
          checks += 3;
          if (product !== last_prod) begin
            failures++;
            if (failures < 10) $display("product %h expected %h", product, last_prod);
          end
          if ({zero, infinity, nan, denormal} !== last_flags) begin
            failures++;
            if (failures < 10) $display("flags %b expected %b", {zero, infinity, nan, denormal}, last_flags);
          end
          if (active_mode !== last_mode) begin
            failures++;
            if (failures < 10) $display("active mode %0d expected %0d", active_mode, last_mode);
          end
        end else begin
          checks++;
          if (done !== 0) begin failures++; $display("done without an operation"); end
        end
      end join_none
      end
    end
    @(negedge clk) ready = 0;
    repeat (3) @(posedge clk);
    // reset clears the outputs
    #1 rst = 1;
    #1;
    checks++;
    if (product !== '0 || done !== 0 || mode_error !== 0) begin failures++; $display("reset did not clear"); end

    for (int k = 1; k <= 5; k++) begin
      checks += 2;
      if (cov_fixed[k] == 0) begin failures++; $display("fixed mode code %0d never used", k); end
      if (cov_auto[k] == 0) begin failures++; $display("auto mode never chose code %0d", k); end
    end
    checks += 7;
    if (cov_error == 0)        begin failures++; $display("no mode select error"); end
    if (cov_round_carry == 0)  begin failures++; $display("no rounding carry into the exponent"); end
    if (cov_overflow == 0)     begin failures++; $display("no overflow"); end
    if (cov_underflow == 0)    begin failures++; $display("no denormal result"); end
    if (cov_zero == 0)         begin failures++; $display("no zero result"); end
    if (cov_nan == 0)          begin failures++; $display("no NaN result"); end
    if (cov_back_to_back == 0) begin failures++; $display("no back-to-back operations"); end
    $display("coverage: fixed %0d %0d %0d %0d %0d  auto %0d %0d %0d %0d %0d", cov_fixed[1], cov_fixed[2],
             cov_fixed[3], cov_fixed[4], cov_fixed[5], cov_auto[1], cov_auto[2], cov_auto[3], cov_auto[4], cov_auto[5]);
    $display("coverage: error %0d round-carry %0d overflow %0d denormal %0d zero %0d nan %0d back-to-back %0d",
             cov_error, cov_round_carry, cov_overflow, cov_underflow, cov_zero, cov_nan, cov_back_to_back);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
