// tb_exception_flags -- the Zero / Infinity / NaN / Denormal classification
// for random words biased to the special exponents.
module tb_exception_flags;
  import fpmul_pkg::*;
  import fpmul_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [63:0] w;
  fp_flags_t f;

  exception_flags u_dut (.exp(w[62:52]), .man(w[51:0]), .flags(f));

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int seen [4] = '{0, 0, 0, 0};
    for (int i = 0; i < 4000; i++) begin
      w = rand_word();
      #1;
      checks++;
      if ({f.zero, f.infinity, f.nan, f.denormal} !== ref_flags(w)) begin
        failures++;
        $display("%h gave %b", w, f);
      end
      if (f.zero) seen[0]++;
      if (f.infinity) seen[1]++;
      if (f.nan) seen[2]++;
      if (f.denormal) seen[3]++;
      @(posedge clk);
    end
    foreach (seen[k]) begin
      checks++;
      if (seen[k] == 0) begin failures++; $display("flag %0d never seen", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
