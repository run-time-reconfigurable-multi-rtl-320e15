// tb_carry_save_adder -- checks that sum + 2*carry equals a + b + c, and that
// every bit position is a full adder, for random 16-bit words.
module tb_carry_save_adder;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [15:0] a, b, c, s, cy;

  carry_save_adder u_dut (.a(a), .b(b), .c(c), .sum(s), .carry(cy));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 3000; i++) begin
      a = 16'($urandom); b = 16'($urandom); c = 16'($urandom);
      #1;
      checks++;
      if (18'(s) + (18'(cy) << 1) !== 18'(a) + 18'(b) + 18'(c)) begin
        failures++;
        $display("%h+%h+%h gave sum %h carry %h", a, b, c, s, cy);
      end
      for (int k = 0; k < 16; k++) begin
        checks++;
        if ({cy[k], s[k]} !== 2'(a[k]) + 2'(b[k]) + 2'(c[k])) failures++;
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
