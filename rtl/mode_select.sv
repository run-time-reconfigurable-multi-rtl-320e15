// mode_select -- checks and decodes the mode fields of the two operands.
//
// Both operands carry a 3-bit mode field (000 auto, 001..101 modes 2..6).
// If the two fields differ, or hold one of the unused codes 110 and 111, the
// mode select error is raised and no multiplier unit is enabled, so nothing
// is computed. Otherwise the fixed mode is passed on, or, in auto mode (000),
// worked out from the operands:
//
//   For each mantissa, scan from its most significant bit for the first 1
//   that is followed by at least six 0s (bits past the end of the field count
//   as 0s). Let p be the number of mantissa bits before that 1 (p = 0 when it
//   is the top bit; an all-zero mantissa needs no bits). The mantissa needs
//   the 8-bit mode if p < 8, else the 16-bit mode if p < 16, the 23-bit mode
//   if p < 23, the 36-bit mode if p < 36, and the full 52-bit mode otherwise.
//   The wider of the two operands' needs is chosen.
//
// unit_en is one-hot over the five fixed-precision multipliers (bit 0: 8-bit
// mantissa ... bit 4: 52-bit) and all zero on an error; only the enabled unit
// receives operands.
//
// Interface: mode_a, mode_b, man_a, man_b in; mode (fixed mode), unit_en,
// mode_error out. Combinational.
// Follows the paper: the equal-mode check and error, the six codes and the
// auto-mode rule (a leading 1 followed by six or more zeros, thresholds at 8,
// 16, ...). This design's reading of that rule: the 23 and 36 thresholds for
// modes 4 and 5, bits past the end counting as zeros, and the wider of the
// two operands deciding. The error for codes 110/111 is also this design's.
module mode_select
  import fpmul_pkg::*;
(
  input  logic [MODE_W-1:0]    mode_a,
  input  logic [MODE_W-1:0]    mode_b,
  input  logic [MAN_W-1:0]     man_a,
  input  logic [MAN_W-1:0]     man_b,
  output mode_e                mode,
  output logic [NUM_UNITS-1:0] unit_en,
  output logic                 mode_error
);

  localparam int unsigned ZRUN = 6;  // zeros that end the significant part

  // Mode a mantissa needs, from the auto-mode rule.
  function automatic mode_e auto_mode(logic [MAN_W-1:0] man);
    logic [MAN_W+ZRUN-1:0] ext;   // mantissa followed by ZRUN zeros
    int                    p;     // bits before the qualifying 1
    logic                  found;
    ext   = {man, ZRUN'(0)};
    p     = -1;
    found = 1'b0;
    for (int i = 0; i < MAN_W; i++) begin  // i counts from the top bit
      if (!found && ext[MAN_W+ZRUN-1-i] && ext[MAN_W+ZRUN-2-i -: ZRUN] == '0) begin
        p     = i;
        found = 1'b1;
      end
    end
    if (p < 8)       return MODE_M8;
    else if (p < 16) return MODE_M16;
    else if (p < 23) return MODE_M23;
    else if (p < 36) return MODE_M36;
    else             return MODE_M52;
  endfunction

  mode_e need_a, need_b;

  always_comb begin
    need_a     = auto_mode(man_a);
    need_b     = auto_mode(man_b);
    mode_error = (mode_a != mode_b) || (mode_a > MODE_M52);
    if (mode_a == MODE_AUTO) begin
      mode = (need_a > need_b) ? need_a : need_b;
    end else if (mode_a > MODE_M52) begin
      mode = MODE_M52;
    end else begin
      mode = mode_e'(mode_a);
    end
    unit_en = '0;
    if (!mode_error) unit_en[mode_unit(mode)] = 1'b1;
  end

endmodule
