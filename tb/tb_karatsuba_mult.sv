// tb_karatsuba_mult -- random and corner-case check of the Karatsuba /
// Urdhva-Tiryagbhyam multiplier at the default 53 bits (double-precision
// significand) and at the 8, 16, 24 and 32-bit sizes the paper reports on,
// against the integer product.
module tb_karatsuba_mult;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [52:0]  x53, y53;  logic [105:0] p53;
  logic [7:0]   x8,  y8;   logic [15:0]  p8;
  logic [15:0]  x16, y16;  logic [31:0]  p16;
  logic [23:0]  x24, y24;  logic [47:0]  p24;
  logic [31:0]  x32, y32;  logic [63:0]  p32;

  karatsuba_mult           u53 (.x(x53), .y(y53), .p(p53));
  karatsuba_mult #(.N(8))  u8  (.x(x8),  .y(y8),  .p(p8));
  karatsuba_mult #(.N(16)) u16 (.x(x16), .y(y16), .p(p16));
  karatsuba_mult #(.N(24)) u24 (.x(x24), .y(y24), .p(p24));
  karatsuba_mult #(.N(32)) u32 (.x(x32), .y(y32), .p(p32));

  task automatic check(string what, logic [127:0] got, logic [127:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("%s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 3000; i++) begin
      case (i % 4)
        0: begin x53 = '1; y53 = 53'({$urandom, $urandom}); end
        default: begin x53 = 53'({$urandom, $urandom}); y53 = 53'({$urandom, $urandom}); end
      endcase
      if (i == 0) begin x53 = '1; y53 = '1; end
      if (i == 1) begin x53 = 0; y53 = '1; end
      if (i == 2) begin x53 = 53'(1) << 52; y53 = 53'(1) << 52; end
      {x8, y8}   = 16'($urandom);
      {x16, y16} = $urandom;
      x24 = 24'($urandom); y24 = 24'($urandom);
      x32 = $urandom; y32 = $urandom;
      if (i == 3) begin x8 = '1; y8 = '1; x16 = '1; y16 = '1; x24 = '1; y24 = '1; x32 = '1; y32 = '1; end
      #1;
      check("53", 128'(p53), 128'(106'(x53) * 106'(y53)));
      check("8",  128'(p8),  128'(16'(x8) * 16'(y8)));
      check("16", 128'(p16), 128'(32'(x16) * 32'(y16)));
      check("24", 128'(p24), 128'(48'(x24) * 48'(y24)));
      check("32", 128'(p32), 128'(64'(x32) * 64'(y32)));
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
