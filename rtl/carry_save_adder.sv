// carry_save_adder -- W-bit 3:2 carry save adder.
//
// Adds three W-bit words without propagating carries: each bit position is a
// full adder whose sum bit goes to `sum` and whose carry bit goes to `carry`.
// a + b + c == sum + 2 * carry. The Karatsuba multiplier uses it to merge its
// three-operand subtraction before a single carry-propagate adder.
//
// Interface: a, b, c in; sum, carry out (both W bits, carry not yet shifted).
// Combinational. The paper names carry save adders as one of the adders of the
// multiplier; where they sit is this design's choice.
module carry_save_adder #(
  parameter int unsigned W = 16
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] c,
  output logic [W-1:0] sum,
  output logic [W-1:0] carry
);

  always_comb begin
    sum   = a ^ b ^ c;
    carry = (a & b) | (a & c) | (b & c);
  end

endmodule
