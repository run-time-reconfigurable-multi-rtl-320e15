// tb_normalizer -- feeds the normalizer the significand product and summed
// exponent of random finite operand pairs (normal, denormal, overflowing and
// underflowing) and compares the exponent and mantissa fields with the
// reference product, at 52 and at 8 mantissa bits.
module tb_normalizer;
  import fpmul_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [105:0] prod52;  logic signed [12:0] e52;  logic [10:0] xo52;  logic [51:0] mo52;
  logic [17:0]  prod8;   logic signed [12:0] e8;   logic [10:0] xo8;   logic [7:0]  mo8;

  normalizer          u52 (.prod(prod52), .exp_in(e52), .exp_out(xo52), .man_out(mo52));
  normalizer #(.MW(8)) u8 (.prod(prod8),  .exp_in(e8),  .exp_out(xo8),  .man_out(mo8));

  int n_over = 0, n_under = 0, n_shift = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] a, b, r;
    int ea, eb;
    for (int i = 0; i < 6000; i++) begin
      a = rand_word(); b = rand_word();
      if (a[62:52] == 11'h7ff) a[62:52] = 11'h7fe;
      if (b[62:52] == 11'h7ff) b[62:52] = 11'h7fe;
      if (i % 2 == 1) begin a[43:0] = 0; b[43:0] = 0; end
      ea = (a[62:52] == 0) ? 1 : int'(a[62:52]);
      eb = (b[62:52] == 0) ? 1 : int'(b[62:52]);
      prod52 = 106'({a[62:52] != 0, a[51:0]}) * 106'({b[62:52] != 0, b[51:0]});
      e52    = 13'(ea + eb - 1023);
      prod8  = 18'({a[62:52] != 0, a[51:44]}) * 18'({b[62:52] != 0, b[51:44]});
      e8     = e52;
      #1;
      r = ref_mul(a, b, 52);
      checks++;
      if ({xo52, mo52} !== r[62:0]) begin
        failures++;
        if (failures < 10) $display("52: %h * %h gave %h %h expected %h", a, b, xo52, mo52, r[62:0]);
      end
      r = ref_mul(a, b, 8);
      checks++;
      if ({xo8, mo8} !== {r[62:52], r[51:44]}) begin
        failures++;
        if (failures < 10) $display("8: %h * %h gave %h %h expected %h", a, b, xo8, mo8, r[62:0]);
      end
      if (xo52 == 11'h7ff) n_over++;
      if (xo52 == 0 && mo52 != 0) n_under++;
      if (prod52[105]) n_shift++;
      @(posedge clk);
    end
    checks++;
    if (n_over == 0 || n_under == 0 || n_shift == 0) begin
      failures++;
      $display("coverage: overflow %0d underflow %0d shift %0d", n_over, n_under, n_shift);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
