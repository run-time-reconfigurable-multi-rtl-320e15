// karatsuba_mult -- N x N unsigned multiplier, Karatsuba at the top levels and
// Urdhva-Tiryagbhyam at the bottom.
//
// An operand is split into a most significant part X_l (N-M bits) and a least
// significant part X_r (M = ceil(N/2) bits): X = 2^M X_l + X_r. Three smaller
// products are formed, X_l*Y_l, X_r*Y_r and (X_l+X_r)*(Y_l+Y_r); the middle
// term X_l*Y_r + X_r*Y_l is obtained by subtracting the first two from the
// third, and the product is
//     2^(2M) X_l Y_l + 2^M (middle term) + X_r Y_r.
// Each of the three products is again a karatsuba_mult, so the splitting
// repeats until the operands are at most LEAF (8) bits wide; those are done by
// urdhva_mult.
//
// The subtracter adds the two's complements: middle = P_sum + ~P_hh + ~P_ll + 2,
// merged by a carry save adder and finished by a carry select adder (one of
// the two +1s enters as the carry in, the other fills the empty LSB of the
// shifted carry word). Because X_l*Y_l and X_r*Y_r do not overlap, the
// "shift and add" of the paper's diagram is a concatenation plus one carry
// select addition of the shifted middle term.
//
// Interface: x, y (N bits) in, p (2N bits) out. Combinational.
// Follows the paper: the three-product recursion, stopping at 8 bits, the
// Urdhva leaves and the use of carry save and carry select adders. This
// design's choices: the split point for odd widths (low half rounded up) and
// the (M+1)-bit width of the sum operands, which are multiplied by a
// recursive instance one bit wider.
//
// Lint note: when this module is linted on its own as the top of a design,
// the Verilator linter reports p_hh, p_ll and p_ss as undriven, because it
// does not expand the recursive instances in that run. They are driven: the module
// simulates and is linted cleanly inside fp_multiplier, and its testbench
// checks every product bit.
module karatsuba_mult #(
  parameter int unsigned N    = 53,
  parameter int unsigned LEAF = 8
) (
  input  logic [N-1:0]   x,
  input  logic [N-1:0]   y,
  output logic [2*N-1:0] p
);

  if (N <= LEAF) begin : g_leaf
    urdhva_mult #(.N(N)) u_urdhva (.a(x), .b(y), .p(p));
  end else begin : g_split
    localparam int unsigned M  = (N + 1) / 2;  // width of the low halves
    localparam int unsigned H  = N - M;        // width of the high halves
    localparam int unsigned MW = 2 * M + 2;    // width of the middle product

    logic [H-1:0]     xl, yl;
    logic [M-1:0]     xr, yr;
    logic [M:0]       xs, ys;     // X_l + X_r, Y_l + Y_r
    logic [2*H-1:0]   p_hh;       // X_l * Y_l
    logic [2*M-1:0]   p_ll;       // X_r * Y_r
    logic [MW-1:0]    p_ss;       // (X_l + X_r) * (Y_l + Y_r)
    logic [MW-1:0]    csa_s, csa_c;
    logic [MW-1:0]    mid;        // X_l * Y_r + X_r * Y_l
    logic [2*N-1:0]   mid_shift;

    assign xl = x[N-1:M];
    assign xr = x[M-1:0];
    assign yl = y[N-1:M];
    assign yr = y[M-1:0];
    assign xs = (M + 1)'(xl) + (M + 1)'(xr);
    assign ys = (M + 1)'(yl) + (M + 1)'(yr);

    karatsuba_mult #(.N(H),     .LEAF(LEAF)) u_hh (.x(xl), .y(yl), .p(p_hh));
    karatsuba_mult #(.N(M),     .LEAF(LEAF)) u_ll (.x(xr), .y(yr), .p(p_ll));
    karatsuba_mult #(.N(M + 1), .LEAF(LEAF)) u_ss (.x(xs), .y(ys), .p(p_ss));

    // Subtracter: P_ss - P_hh - P_ll.
    carry_save_adder #(.W(MW)) u_csa (
      .a    (p_ss),
      .b    (~MW'(p_hh)),
      .c    (~MW'(p_ll)),
      .sum  (csa_s),
      .carry(csa_c)
    );

    carry_select_adder #(.W(MW)) u_sub (
      .a   (csa_s),
      .b   ({csa_c[MW-2:0], 1'b1}),
      .cin (1'b1),
      .s   (mid),
      .cout()
    );

    // Shift and add.
    assign mid_shift = (2 * N)'(mid) << M;

    carry_select_adder #(.W(2 * N)) u_add (
      .a   ({p_hh, p_ll}),
      .b   (mid_shift),
      .cin (1'b0),
      .s   (p),
      .cout()
    );
  end

endmodule
