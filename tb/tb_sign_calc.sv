// tb_sign_calc -- the product sign for all four sign combinations.
module tb_sign_calc;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic sa, sb, sp;

  sign_calc u_dut (.sign_a(sa), .sign_b(sb), .sign_p(sp));

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4; i++) begin
      {sa, sb} = 2'(i);
      #1;
      checks++;
      // negative exactly when the signs differ
      if (sp !== (i == 1 || i == 2)) begin
        failures++;
        $display("signs %b %b gave %b", sa, sb, sp);
      end
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
