// argmin: minimum of N unsigned words and a one-hot flag of where it is.
//
// A recursive min-tree. A node splits its inputs into a lower half
// (floor(N/2) words) and an upper half, instantiates an argmin on each, and
// compares the two minima. The indicator vector of the half with the larger
// minimum is zeroed, and the two indicators are concatenated. The tree has
// ceil(log2 N) comparator levels and N-1 comparators. On equal minima the
// lower half wins, so ties go to the lowest index.
//
// Interface: x[0..N-1] in, min_val and onehot[N-1:0] out, with onehot[i]
// marking x[i]. Purely combinational.
//
// The recursive min-tree with zeroed and concatenated indicators follows the
// paper. The tie rule and the split of odd sizes are this design's choices.
//
// Lint note: when this module is linted on its own as the top, Verilator
// may report min_l, min_h, oh_l and oh_h as undriven. It says so of the
// generic copy of the recursive module that it keeps besides the
// elaborated instances. Linting the full design, or simulating it, shows
// them driven by the child instances. The testbench exercises every output.
module argmin #(
  parameter int N = 9,  // number of words
  parameter int W = 6   // word width (unsigned)
) (
  input  logic [W-1:0] x [N],
  output logic [W-1:0] min_val,
  output logic [N-1:0] onehot
);

  if (N == 1) begin : g_leaf
    assign min_val = x[0];
    assign onehot  = 1'b1;
  end else begin : g_node
    localparam int NL = N / 2;
    localparam int NH = N - NL;

    logic [W-1:0]  xl [NL];
    logic [W-1:0]  xh [NH];
    logic [W-1:0]  min_l, min_h;
    logic [NL-1:0] oh_l;
    logic [NH-1:0] oh_h;
    logic          take_l;

    for (genvar k = 0; k < NL; k++) begin : g_lo
      assign xl[k] = x[k];
    end
    for (genvar k = 0; k < NH; k++) begin : g_hi
      assign xh[k] = x[NL+k];
    end

    argmin #(.N(NL), .W(W)) u_lo (.x(xl), .min_val(min_l), .onehot(oh_l));
    argmin #(.N(NH), .W(W)) u_hi (.x(xh), .min_val(min_h), .onehot(oh_h));

    assign take_l  = (min_l <= min_h);
    assign min_val = take_l ? min_l : min_h;
    assign onehot  = {oh_h & {NH{~take_l}}, oh_l & {NL{take_l}}};
  end

endmodule
