// normalizer -- turns a significand product into exponent and mantissa fields.
//
// The product of two SW-bit significands (SW = MW+1, one integer bit each) is
// a 2SW-bit number with two integer bits. The leading 1 is moved to the place
// just left of the binary point: for two normal operands this is at most one
// right shift, which adds one to the exponent; with a denormal operand the
// leading 1 can lie further right and is shifted left, taking one off the
// exponent per place. The MW bits after the leading 1 become the mantissa;
// the bits below are dropped (truncation, no rounding of the product).
//
// The exponent then decides the result class:
//   exp >= 2^EW - 1  overflow: infinity (exponent all ones, mantissa 0)
//   exp <= 0         underflow: the significand is shifted right by 1 - exp
//                    places and stored with exponent 0 (a denormal, or zero
//                    when nothing is left)
//   product == 0     zero
//
// Interface: prod (2SW bits), exp_in (EW+2 bits, signed, from the exponent
// adder) in; exp_out (EW bits), man_out (MW bits) out. Combinational.
// Follows the paper: normalisation by shifting with the matching exponent
// change. This design's choices: truncation of the product, the left shift
// for denormal operands and the handling of overflow and underflow, which the
// paper leaves open.
module normalizer #(
  parameter int unsigned MW = 52,
  parameter int unsigned EW = 11
) (
  input  logic [2*MW+1:0]      prod,
  input  logic signed [EW+1:0] exp_in,
  output logic [EW-1:0]        exp_out,
  output logic [MW-1:0]        man_out
);

  localparam int unsigned PW   = 2 * MW + 2;  // product width
  localparam int          EMAX = (1 << EW) - 1;
  localparam int          XW   = EW + 3;      // width of the adjusted exponent

  int unsigned         lead;      // position of the leading 1
  logic [PW-1:0]       aligned;   // leading 1 at bit PW-1
  logic signed [XW-1:0] exp_adj;  // exponent after normalisation
  logic [MW:0]         sig;       // hidden bit and mantissa
  logic [MW:0]         sig_den;   // significand shifted for underflow
  int unsigned         rshift;

  always_comb begin
    lead = 0;
    for (int i = 0; i < PW; i++) begin
      if (prod[i]) lead = i;
    end

    // Binary point sits between bits PW-3 and PW-2: a leading 1 at PW-2 needs
    // no shift, at PW-1 one right shift, below PW-2 left shifts.
    aligned = prod << (PW - 1 - lead);
    exp_adj = XW'(exp_in) + XW'(signed'(lead)) - XW'(PW - 2);
    sig     = aligned[PW-1 -: MW + 1];

    rshift  = 0;
    sig_den = '0;
    if (exp_adj <= 0) begin
      rshift  = (int'(exp_adj) < -int'(MW)) ? MW + 1 : 1 - int'(exp_adj);
      sig_den = sig >> rshift;
    end

    if (prod == '0) begin
      exp_out = '0;
      man_out = '0;
    end else if (int'(exp_adj) >= EMAX) begin
      exp_out = '1;
      man_out = '0;
    end else if (exp_adj <= 0) begin
      exp_out = '0;
      man_out = sig_den[MW-1:0];
    end else begin
      exp_out = EW'(exp_adj);
      man_out = sig[MW-1:0];
    end
  end

endmodule
