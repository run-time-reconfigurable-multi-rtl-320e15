// sign_calc -- sign of a floating point product.
//
// The product is negative exactly when the two operands have opposite signs,
// so the sign is the XOR of the two sign bits. Combinational.
// Interface: sign_a, sign_b in; sign_p out. Follows the paper.
module sign_calc (
  input  logic sign_a,
  input  logic sign_b,
  output logic sign_p
);

  assign sign_p = sign_a ^ sign_b;

endmodule
