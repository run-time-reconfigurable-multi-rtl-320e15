// tb_input_registers -- loading on ready, holding while ready is low, the
// one-cycle `loaded` flag and the asynchronous reset.
module tb_input_registers;
  import fpmul_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst, ready, loaded;
  operand_t a_in, b_in, a_q, b_q;

  input_registers u_dut (.clk(clk), .rst(rst), .ready(ready), .a_in(a_in), .b_in(b_in),
                         .a_q(a_q), .b_q(b_q), .loaded(loaded));

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    operand_t ea, eb;
    logic     exp_loaded;
    rst = 1; ready = 0; a_in = '0; b_in = '0;
    #12;
    checks += 3;
    if (a_q !== '0 || b_q !== '0 || loaded !== 0) failures += 1;
    rst = 0;
    ea = '0; eb = '0; exp_loaded = 0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      ready = 1'($urandom);
      a_in  = operand_t'({$urandom, $urandom, $urandom});
      b_in  = operand_t'({$urandom, $urandom, $urandom});
      @(posedge clk);
      if (ready) begin ea = a_in; eb = b_in; end
      exp_loaded = ready;
      #1;
      checks += 3;
      if (a_q !== ea) failures++;
      if (b_q !== eb) failures++;
      if (loaded !== exp_loaded) failures++;
    end
    // asynchronous reset in the middle of a cycle
    @(negedge clk);
    #2 rst = 1;
    #1;
    checks++;
    if (a_q !== '0 || b_q !== '0 || loaded !== 0) begin failures++; $display("reset did not clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
