// prefix_sum: all partial sums s[i] = x[0] + ... + x[i] of D signed words.
//
// A parallel prefix network in the minimum-depth form of the Ladner-Fischer
// family, which has the same shape as Sklansky's adder. There are
// ceil(log2 D) levels. At level l every lane i whose bit l is set adds the
// running sum of the last lane in the lower half of its 2^(l+1)-wide block.
// After the last level every lane holds its full prefix. The critical path is
// ceil(log2 D) adders, the minimum the paper quotes. The area is
// (D/2) ceil(log2 D) adders.
//
// Interface: x is sign-extended to W_OUT bits before the first level, and
// W_OUT = W_IN + ceil(log2 D) never overflows. Purely combinational.
//
// The paper chooses Ladner-Fischer and states the ceil(log2 d) delay. The
// choice of the depth-optimal member (rather than a linear-area one) and the
// output width are this design's choices.
module prefix_sum
  import proj_pkg::*;
#(
  parameter int D     = 9,                         // number of words
  parameter int W_IN  = 9,                         // input width
  parameter int W_OUT = W_IN + int'(log2_ceil(D))  // output width
) (
  input  logic signed [W_IN-1:0]  x [D],
  output logic signed [W_OUT-1:0] s [D]
);

  localparam int L = int'(log2_ceil(D));

  logic signed [W_OUT-1:0] t [L+1][D];

  always_comb begin
    for (int i = 0; i < D; i++) t[0][i] = W_OUT'(x[i]);
    for (int l = 0; l < L; l++) begin
      for (int i = 0; i < D; i++) begin
        if (((i >> l) & 1) == 1)
          t[l+1][i] = t[l][i] + t[l][((i >> (l + 1)) << (l + 1)) + (1 << l) - 1];
        else
          t[l+1][i] = t[l][i];
      end
    end
    for (int i = 0; i < D; i++) s[i] = t[L][i];
  end

endmodule
