// tb_fp_multiplier -- the floating point multiplier at 52 mantissa bits
// (double precision) and at 23 bits, on random operands including zeros,
// denormals, infinities, NaNs and overflowing / underflowing pairs, against
// the reference product and flags; plus exact products of small numbers
// checked against the simulator's own real arithmetic.
module tb_fp_multiplier;
  import fpmul_pkg::*;
  import fpmul_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [63:0] a, b, p52;
  logic [22:0] p23_man;
  logic [10:0] p23_exp;
  logic        p23_sign;
  fp_flags_t   f52, f23;

  fp_multiplier u52 (
    .a_sign(a[63]), .a_exp(a[62:52]), .a_man(a[51:0]),
    .b_sign(b[63]), .b_exp(b[62:52]), .b_man(b[51:0]),
    .p_sign(p52[63]), .p_exp(p52[62:52]), .p_man(p52[51:0]), .flags(f52)
  );
  fp_multiplier #(.MW(23)) u23 (
    .a_sign(a[63]), .a_exp(a[62:52]), .a_man(a[51:29]),
    .b_sign(b[63]), .b_exp(b[62:52]), .b_man(b[51:29]),
    .p_sign(p23_sign), .p_exp(p23_exp), .p_man(p23_man), .flags(f23)
  );

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("%s: %h * %h gave %h expected %h", what, a, b, got, exp);
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] r;
    real x, y;
    for (int i = 0; i < 5000; i++) begin
      a = rand_word(); b = rand_word();
      #1;
      r = ref_mul(a, b, 52);
      check("52", p52, r);
      check("52 flags", 64'({f52.zero, f52.infinity, f52.nan, f52.denormal}), 64'(ref_flags(r)));
      r = ref_mul(a, b, 23);
      check("23", {p23_sign, p23_exp, p23_man, 29'd0}, r);
      check("23 flags", 64'({f23.zero, f23.infinity, f23.nan, f23.denormal}), 64'(ref_flags(r)));
      @(posedge clk);
    end
    // Small integers and halves multiply exactly in both widths.
    for (int i = 0; i < 500; i++) begin
      x = real'($urandom_range(0, 2000)) / 4.0 - 250.0;
      y = real'($urandom_range(0, 2000)) / 4.0 - 250.0;
      a = $realtobits(x); b = $realtobits(y);
      #1;
      if (x * y != 0.0) begin
        check("exact 52", p52, $realtobits(x * y));
        check("exact 23", {p23_sign, p23_exp, p23_man, 29'd0}, $realtobits(x * y));
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
