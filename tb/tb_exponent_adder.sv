// tb_exponent_adder -- checks exp_a + exp_b - bias over random and extreme
// exponents, for the double-precision default (11 bits, bias 1023) and the
// single-precision variant (8 bits, bias 127), including negative results.
module tb_exponent_adder;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [10:0] a11, b11;  logic signed [12:0] p11;
  logic [7:0]  a8,  b8;   logic signed [9:0]  p8;

  exponent_adder                          u11 (.exp_a(a11), .exp_b(b11), .exp_p(p11));
  exponent_adder #(.EW(8), .BIAS(127))    u8  (.exp_a(a8),  .exp_b(b8),  .exp_p(p8));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4000; i++) begin
      a11 = 11'($urandom); b11 = 11'($urandom);
      a8  = 8'($urandom);  b8  = 8'($urandom);
      if (i == 0) begin a11 = 0; b11 = 0; a8 = 0; b8 = 0; end
      if (i == 1) begin a11 = '1; b11 = '1; a8 = '1; b8 = '1; end
      #1;
      checks += 2;
      if (int'(p11) != int'(a11) + int'(b11) - 1023) begin
        failures++;
        $display("11: %0d + %0d gave %0d", a11, b11, p11);
      end
      if (int'(p8) != int'(a8) + int'(b8) - 127) begin
        failures++;
        $display("8: %0d + %0d gave %0d", a8, b8, p8);
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
