// urdhva_mult -- N x N unsigned multiplier after the Urdhva-Tiryagbhyam
// ("vertically and crosswise") method.
//
// Column k of the product collects every partial product a[i]&b[j] with
// i+j == k (the crossing lines of the step diagrams). Column 0 is a single AND
// gate and gives p[0] directly. Columns 1 .. 2N-2 each have one column adder:
// it adds the column's partial products to the carry part (all bits above the
// LSB) of the previous column adder. The adder's LSB is the product bit of that
// column; the carry part of the last adder is the top product bit p[2N-1].
// The adders are chained in a ripple manner, so a 4x4 multiplier has 6 column
// adders and an 8x8 one has 14, as in the paper's 4x4 hardware diagram.
//
// Interface: a, b (N bits) in, p (2N bits) out. Purely combinational, no
// clock. N defaults to 8, the operand width at which the Karatsuba multiplier
// hands over to this one.
//
// Follows the paper: the column structure and the ripple chaining. This
// design's choice: each column adder is written as a plain multi-operand sum
// and left to synthesis, where the paper suggests carry save adders for the
// middle columns.
module urdhva_mult #(
  parameter int unsigned N = 8
) (
  input  logic [N-1:0]   a,
  input  logic [N-1:0]   b,
  output logic [2*N-1:0] p
);

  // A column adder sums at most N partial products and a carry below N + 1,
  // so 2N + 1 is a safe bound for its value.
  localparam int unsigned CW = $clog2(2 * N + 2);

  for (genvar k = 0; k < 2 * N - 1; k++) begin : g_col
    logic [CW-1:0] cin;  // carry part of the previous column adder
    logic [CW-1:0] sum;  // value of this column adder (column 0: the AND)

    if (k == 0) begin : g_first
      assign cin = '0;
    end else begin : g_next
      assign cin = g_col[k-1].sum >> 1;
    end

    always_comb begin
      sum = cin;
      for (int i = 0; i < N; i++) begin
        if (k - i >= 0 && k - i < N) begin
          sum = sum + CW'(a[i] & b[k-i]);
        end
      end
    end

    assign p[k] = sum[0];
  end

  assign p[2*N-1] = g_col[2*N-2].sum[1];

endmodule
