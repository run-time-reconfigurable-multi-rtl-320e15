// reconfig_fp_multiplier -- run-time reconfigurable multi-precision floating
// point multiplier (top level).
//
// Each operand is 67 bits: a 3-bit mode field (bits 66..64) on top of an IEEE
// double-precision word (sign, 11-bit exponent, 52-bit mantissa). The mode
// field picks how many mantissa bits take part in the multiplication:
//   000 mode 1  auto: the narrowest mode that holds both mantissas
//   001 mode 2   8-bit mantissa      100 mode 5  36-bit mantissa
//   010 mode 3  16-bit mantissa      101 mode 6  52-bit (full double)
//   011 mode 4  23-bit mantissa
// Both operands must carry the same mode; otherwise mode_error is raised and
// no product is computed.
//
// Structure: input_registers capture the operands when ready is high.
// mode_select checks and decodes the mode fields (and runs the auto-mode
// analysis); trunc_round rounds both mantissas to the mode's width;
// fp_multiplier_bank feeds them to the one multiplier unit of that width,
// whose inputs alone are not held at zero. The result, in double-precision
// layout with the unused low mantissa bits zero, and the Zero, Infinity, NaN
// and Denormal flags are registered at the output.
//
// Timing: ready high at clock edge k loads the operands; the result registers
// are written at edge k+1, and done is high for the cycle after that edge.
// One new operation can start every cycle. On a mode select error, done stays
// low, mode_error goes high and product and flags keep their previous values.
// rst is asynchronous and active high and clears every register.
//
// Follows the paper: the 67-bit operand layout, the six modes and their codes,
// the mode check, rounding before the multiplier, separate multipliers per
// mode of which only one is active, the 64-bit product and the five status
// outputs. This design's choices: the clock, the output register, done and
// active_mode, the use of the double-precision exponent (11 bits, bias 1023)
// in every mode, and truncation of the product.
module reconfig_fp_multiplier
  import fpmul_pkg::*;
(
  input  logic                clk,
  input  logic                rst,
  input  logic                ready,
  input  logic [OPND_W-1:0]   a,
  input  logic [OPND_W-1:0]   b,
  output logic [WORD_W-1:0]   product,
  output logic                zero,
  output logic                infinity,
  output logic                nan,
  output logic                denormal,
  output logic                mode_error,
  output logic                done,
  output logic [MODE_W-1:0]   active_mode
);

  operand_t                a_q, b_q;
  logic                    loaded;
  mode_e                   mode;
  logic [NUM_UNITS-1:0]    unit_en;
  logic                    mode_err_c;
  fp_word_t                rnd_a, rnd_b;
  fp_word_t                prod_c;
  fp_flags_t               flags_c;

  input_registers u_inreg (
    .clk   (clk),
    .rst   (rst),
    .ready (ready),
    .a_in  (operand_t'(a)),
    .b_in  (operand_t'(b)),
    .a_q   (a_q),
    .b_q   (b_q),
    .loaded(loaded)
  );

  mode_select u_mode (
    .mode_a    (a_q.mode),
    .mode_b    (b_q.mode),
    .man_a     (a_q.word.man),
    .man_b     (b_q.word.man),
    .mode      (mode),
    .unit_en   (unit_en),
    .mode_error(mode_err_c)
  );

  trunc_round u_round (
    .mode  (mode),
    .word_a(a_q.word),
    .word_b(b_q.word),
    .rnd_a (rnd_a),
    .rnd_b (rnd_b)
  );

  fp_multiplier_bank u_bank (
    .word_a (rnd_a),
    .word_b (rnd_b),
    .unit_en(unit_en),
    .product(prod_c),
    .flags  (flags_c)
  );

  // Output register.
  always_ff @(posedge clk or posedge rst) begin
    if (rst) begin
      product     <= '0;
      zero        <= 1'b0;
      infinity    <= 1'b0;
      nan         <= 1'b0;
      denormal    <= 1'b0;
      mode_error  <= 1'b0;
      done        <= 1'b0;
      active_mode <= '0;
    end else begin
      done <= loaded & ~mode_err_c;
      if (loaded) begin
        mode_error <= mode_err_c;
        if (!mode_err_c) begin
          product     <= prod_c;
          zero        <= flags_c.zero;
          infinity    <= flags_c.infinity;
          nan         <= flags_c.nan;
          denormal    <= flags_c.denormal;
          active_mode <= mode;
        end
      end
    end
  end

  // At most one multiplier unit is ever enabled, and none on a mode error.
  a_unit_onehot : assert property (@(posedge clk) disable iff (rst)
    $onehot0(unit_en) && (!mode_err_c || unit_en == '0));

endmodule
