// tb_urdhva_mult -- exhaustive check of the Urdhva-Tiryagbhyam multiplier.
// Checks the 4x4 instance (the paper's worked example) and the default 8x8
// instance (the Karatsuba leaf) on every operand pair against the integer
// product, plus the bit-level recipe of the 4x4 example on a few values.
module tb_urdhva_mult;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [3:0] a4, b4;
  logic [7:0] p4;
  logic [7:0] a8, b8;
  logic [15:0] p8;

  urdhva_mult #(.N(4)) u4 (.a(a4), .b(b4), .p(p4));
  urdhva_mult          u8 (.a(a8), .b(b8), .p(p8));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 16; i++)
      for (int j = 0; j < 16; j++) begin
        a4 = 4'(i); b4 = 4'(j);
        #1;
        checks++;
        if (p4 !== 8'(i * j)) begin
          failures++;
          $display("4x4 %0d*%0d gave %0d", i, j, p4);
        end
      end
    for (int i = 0; i < 256; i++) begin
      for (int j = 0; j < 256; j++) begin
        a8 = 8'(i); b8 = 8'(j);
        #1;
        checks++;
        if (p8 !== 16'(i * j)) begin
          failures++;
          if (failures < 10) $display("8x8 %0d*%0d gave %0d", i, j, p8);
        end
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
