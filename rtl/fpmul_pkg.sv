// fpmul_pkg -- types and constants shared by the run-time reconfigurable
// multi-precision floating point multiplier.
//
// An operand is 67 bits: a 3-bit mode field on top (bits 66..64) followed by a
// double-precision word (sign bit 63, 11-bit exponent 62..52, 52-bit mantissa
// 51..0). Mode codes 000..101 select modes 1..6; mode 1 is automatic. Modes
// 2..6 work with mantissas of 8, 16, 23, 36 and 52 bits. The field layout,
// the mode codes and the mantissa widths follow the paper; the extra
// "invalid" handling of codes 110 and 111 is this design's own choice.
package fpmul_pkg;

  localparam int unsigned MODE_W = 3;   // mode select field
  localparam int unsigned EXP_W  = 11;  // exponent field
  localparam int unsigned MAN_W  = 52;  // full mantissa field
  localparam int unsigned WORD_W = 1 + EXP_W + MAN_W;  // 64
  localparam int unsigned OPND_W = MODE_W + WORD_W;    // 67
  localparam int unsigned DP_BIAS = 1023;  // double-precision exponent bias

  // Number of fixed-precision multiplier units (modes 2..6).
  localparam int unsigned NUM_UNITS = 5;

  // Mode select codes (Table I of the paper).
  typedef enum logic [MODE_W-1:0] {
    MODE_AUTO = 3'b000,  // mode 1
    MODE_M8   = 3'b001,  // mode 2:  8-bit mantissa
    MODE_M16  = 3'b010,  // mode 3: 16-bit mantissa
    MODE_M23  = 3'b011,  // mode 4: 23-bit mantissa
    MODE_M36  = 3'b100,  // mode 5: 36-bit mantissa
    MODE_M52  = 3'b101   // mode 6: full double precision
  } mode_e;

  // A double-precision word.
  typedef struct packed {
    logic             sign;
    logic [EXP_W-1:0] exp;
    logic [MAN_W-1:0] man;
  } fp_word_t;

  // A 67-bit operand as it arrives at the multiplier.
  typedef struct packed {
    logic [MODE_W-1:0] mode;
    fp_word_t          word;
  } operand_t;

  // Exception flags of a product.
  typedef struct packed {
    logic zero;
    logic infinity;
    logic nan;
    logic denormal;
  } fp_flags_t;

  // Mantissa width of fixed mode unit u (u = 0 for mode 2 ... 4 for mode 6).
  function automatic int unsigned unit_man_w(int unsigned u);
    case (u)
      0:       return 8;
      1:       return 16;
      2:       return 23;
      3:       return 36;
      default: return 52;
    endcase
  endfunction

  // Unit index (0..4) of a fixed mode code (001..101).
  function automatic int unsigned mode_unit(mode_e m);
    return int'(m) - 1;
  endfunction

endpackage
