// tb_carry_select_adder -- checks the carry select adder at its default
// 16 bits and at 21 bits (a short top block) against integer addition, with
// both carry-in values, random operands and carry chains across every block.
module tb_carry_select_adder;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [15:0] a16, b16, s16;  logic ci16, co16;
  logic [20:0] a21, b21, s21;  logic ci21, co21;

  carry_select_adder           u16 (.a(a16), .b(b16), .cin(ci16), .s(s16), .cout(co16));
  carry_select_adder #(.W(21)) u21 (.a(a21), .b(b21), .cin(ci21), .s(s21), .cout(co21));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 5000; i++) begin
      a16 = 16'($urandom); b16 = 16'($urandom); ci16 = 1'($urandom);
      a21 = 21'($urandom); b21 = 21'($urandom); ci21 = 1'($urandom);
      if (i < 2) begin a16 = '1; b16 = 0; ci16 = 1; a21 = '1; b21 = 0; ci21 = 1; end
      if (i == 2) begin a16 = 16'h00ff; b16 = 16'h0001; ci16 = 0; a21 = 21'h0000ff; b21 = 21'h1; ci21 = 0; end
      #1;
      checks += 2;
      if ({co16, s16} !== 17'(a16) + 17'(b16) + 17'(ci16)) begin
        failures++;
        $display("16: %h + %h + %b gave %b %h", a16, b16, ci16, co16, s16);
      end
      if ({co21, s21} !== 22'(a21) + 22'(b21) + 22'(ci21)) begin
        failures++;
        $display("21: %h + %h + %b gave %b %h", a21, b21, ci21, co21, s21);
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
