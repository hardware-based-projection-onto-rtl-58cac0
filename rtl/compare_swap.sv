// compare_swap: the compare-and-swap element of the sorting network.
//
// One signed magnitude comparator drives two 2:1 multiplexers. The larger
// input leaves on `hi`, the smaller on `lo`, so a network built from these
// elements sorts in descending order, as the simplex projection needs.
// Equal inputs pass straight through. Purely combinational, no clock.
// The paper names this element but does not give its insides; the
// comparator-plus-multiplexer form is the plain choice.
module compare_swap #(
  parameter int W = 8  // word width (two's complement)
) (
  input  logic signed [W-1:0] a,   // input on the lower network index
  input  logic signed [W-1:0] b,   // input on the higher network index
  output logic signed [W-1:0] hi,  // max(a, b)
  output logic signed [W-1:0] lo   // min(a, b)
);

  logic swap;

  always_comb begin
    swap = (b > a);
    hi   = swap ? b : a;
    lo   = swap ? a : b;
  end

endmodule
