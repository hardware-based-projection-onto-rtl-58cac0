// max_index: keep only the highest-index set bit of a D-bit vector.
//
// onehot[i] = req[i] AND NOT req[j] for every j > i. The "no bit above i is
// set" terms form a suffix AND over the inverted request bits. They are
// computed by the same minimum-depth prefix network as prefix_sum, with AND
// in place of addition, over the reversed vector. The network has
// ceil(log2 D) AND levels. An all-zero request gives an all-zero output.
//
// In the simplex projection, req[i] is (mu_i > s_i). The output selects rho,
// the largest such index, in one-hot form. Purely combinational.
//
// The prefix-AND structure follows the paper. The all-zero behaviour is this
// design's choice; inside the projection req[0] is always set.
module max_index
  import proj_pkg::*;
#(
  parameter int D = 9  // vector length
) (
  input  logic [D-1:0] req,
  output logic [D-1:0] onehot
);

  localparam int L = int'(log2_ceil(D));

  // a[l][k]: AND of ~req[D-1-j] for j in the prefix of k handled so far.
  logic [D-1:0] a [L+1];
  logic [D-1:0] none_above;

  always_comb begin
    for (int k = 0; k < D; k++) a[0][k] = ~req[D-1-k];
    for (int l = 0; l < L; l++) begin
      for (int k = 0; k < D; k++) begin
        if (((k >> l) & 1) == 1)
          a[l+1][k] = a[l][k] & a[l][((k >> (l + 1)) << (l + 1)) + (1 << l) - 1];
        else
          a[l+1][k] = a[l][k];
      end
    end
    // none_above[i] = AND of ~req[j], j = i+1 .. D-1 = a[L][D-2-i].
    none_above[D-1] = 1'b1;
    for (int i = 0; i < D - 1; i++) none_above[i] = a[L][D-2-i];
    onehot = req & none_above;
  end

endmodule
