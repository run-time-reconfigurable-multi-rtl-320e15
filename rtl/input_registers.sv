// input_registers -- operand registers at the input of the multiplier.
//
// On a rising clock edge with ready high, both 67-bit operands (mode field and
// double-precision word) are captured, and `loaded` is high for the next
// cycle to start the operation on them. The registers hold their contents
// while ready is low. An asynchronous, active-high reset clears the registers
// and `loaded`.
//
// Interface: clk, rst, ready, a_in, b_in in; a_q, b_q, loaded out.
// Timing: operands sampled at the edge where ready is high, visible on a_q and
// b_q right after it. The paper shows the registers and the Reset and Ready
// inputs; the load-on-ready behaviour, the asynchronous reset and `loaded`
// are this design's choices.
module input_registers
  import fpmul_pkg::*;
(
  input  logic     clk,
  input  logic     rst,
  input  logic     ready,
  input  operand_t a_in,
  input  operand_t b_in,
  output operand_t a_q,
  output operand_t b_q,
  output logic     loaded
);

  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      a_q    <= '0;
      b_q    <= '0;
      loaded <= 1'b0;
    end else begin
      loaded <= ready;
      if (ready) begin
        a_q <= a_in;
        b_q <= b_in;
      end
    end
  end

endmodule
