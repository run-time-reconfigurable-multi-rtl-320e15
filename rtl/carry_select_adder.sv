// carry_select_adder -- W-bit carry select adder.
//
// The word is cut into blocks of BLK bits. The lowest block is a ripple adder
// fed by the carry in. Every higher block holds two ripple adders, one that
// assumes an incoming carry of 0 and one that assumes 1; both work at the same
// time and the real carry out of the block below only picks one of the two
// results. The carry therefore crosses one multiplexer per block instead of
// rippling through every bit.
//
// Interface: a, b (W bits) and cin in; s (W bits) and cout out. Combinational.
// The paper names carry select adders as the adders of the multiplier; the
// block size of 8 is this design's choice.
module carry_select_adder #(
  parameter int unsigned W   = 16,
  parameter int unsigned BLK = 8
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic         cin,
  output logic [W-1:0] s,
  output logic         cout
);

  localparam int unsigned NB = (W + BLK - 1) / BLK;  // number of blocks

  logic [NB:0] c;  // carry into each block

  assign c[0] = cin;

  for (genvar g = 0; g < NB; g++) begin : g_blk
    localparam int unsigned LO = g * BLK;
    localparam int unsigned BW = (W - LO < BLK) ? (W - LO) : BLK;

    logic [BW:0] sum0, sum1;  // block results for carry in 0 and 1

    always_comb begin
      sum0 = {1'b0, a[LO+:BW]} + {1'b0, b[LO+:BW]};
      sum1 = {1'b0, a[LO+:BW]} + {1'b0, b[LO+:BW]} + (BW + 1)'(1);
    end

    assign s[LO+:BW] = c[g] ? sum1[BW-1:0] : sum0[BW-1:0];
    assign c[g+1]    = c[g] ? sum1[BW]     : sum0[BW];
  end

  assign cout = c[NB];

endmodule
