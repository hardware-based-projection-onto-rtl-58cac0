// simplex_projection: Euclidean projection of a D-vector onto the
// probability simplex {x : sum x = 1, x >= 0}.
//
// The sort-based method of Duchi et al.:
//   1. mu = v sorted in descending order            (sort_network)
//   2. c_i = mu_1 + ... + mu_i                        (prefix_sum)
//      s_i = (c_i - 1) / i, i = 1..D
//   3. rho = the largest i with mu_i > s_i            (max_index)
//   4. w_i = max(v_i - s_rho, 0)
// Step 4 uses the unsorted v, so no inverse permutation is needed. The
// division by i is a multiplication by the constant round(2^RF / i),
// followed by an arithmetic shift. s_i is therefore floored to F_IN
// fraction bits. s_rho is picked from the s_i by an AND-OR multiplexer
// driven by the one-hot rho.
//
// Number format: two's complement fixed point. The input has W_IN bits with
// F_IN fraction bits, the output W_OUT bits with F_OUT fraction bits.
// Internal words are widened by ceil(log2 D)+2 bits so nothing overflows. At
// the end the result is shifted to F_OUT fraction bits, dropping low bits,
// and saturated to W_OUT bits. Purely combinational, with no pipeline
// registers. The delay is set by the sort network. A deferred assertion
// checks that rho always exists.
//
// Steps 1-4, the networks used for them and the final truncation follow the
// paper. The paper does not give the reciprocal precision RF, the flooring
// of s_i or the saturation; these are this design's choices.
module simplex_projection
  import proj_pkg::*;
#(
  parameter int D     = 9,                              // dimension
  parameter int W_IN  = 8,                              // input width
  parameter int F_IN  = 6,                              // input fraction bits
  parameter int W_OUT = 8,                              // output width
  parameter int F_OUT = 6,                              // output fraction bits
  parameter int RF    = F_IN + int'(log2_ceil(D)) + 2   // reciprocal fraction bits
) (
  input  logic signed [W_IN-1:0]  v [D],
  output logic signed [W_OUT-1:0] w [D]
);

  localparam int LD  = int'(log2_ceil(D));
  localparam int WS  = W_IN + LD + 2;   // prefix sums and thresholds
  localparam int WR  = RF + 2;          // reciprocal constants (signed, > 0)
  localparam int WP  = WS + WR;         // threshold products
  localparam int SHL = (F_OUT > F_IN) ? F_OUT - F_IN : 0;
  localparam int SHR = (F_IN > F_OUT) ? F_IN - F_OUT : 0;
  localparam int WF  = WS + 1 + SHL;    // output before saturation

  localparam logic signed [WS-1:0] ONE    = WS'(longint'(1) << F_IN);
  localparam logic signed [WF-1:0] MAXOUT = WF'((longint'(1) << (W_OUT - 1)) - 1);

  logic signed [W_IN-1:0] mu   [D];
  logic signed [WS-1:0]   csum [D];
  logic signed [WS-1:0]   thr  [D];
  logic        [D-1:0]    cand;
  logic        [D-1:0]    rho_oh;
  logic signed [WS-1:0]   s_rho;

  sort_network #(.D(D), .W(W_IN)) u_sort (.x(v), .y(mu));

  prefix_sum #(.D(D), .W_IN(W_IN), .W_OUT(WS)) u_psum (.x(mu), .s(csum));

  for (genvar i = 0; i < D; i++) begin : g_thr
    localparam logic signed [WR-1:0] RCP = WR'(recip(i + 1, RF));
    logic signed [WS-1:0] diff;
    logic signed [WP-1:0] prod;
    assign diff    = csum[i] - ONE;
    assign prod    = WP'(diff) * WP'(RCP);
    assign thr[i]  = WS'(prod >>> RF);
    assign cand[i] = (WS'(mu[i]) > thr[i]);
  end

  max_index #(.D(D)) u_maxidx (.req(cand), .onehot(rho_oh));

  always_comb begin
    s_rho = '0;
    for (int i = 0; i < D; i++) s_rho = s_rho | (rho_oh[i] ? thr[i] : '0);
  end

  // Index 1 always qualifies (s_1 = mu_1 - 1 exactly), so rho must exist.
  always_comb begin
    assert #0 (cand[0] && (rho_oh != '0))
      else $error("simplex_projection: no index qualifies as rho");
  end

  for (genvar i = 0; i < D; i++) begin : g_out
    logic signed [WS:0]   dlt;
    logic signed [WF-1:0] clip;
    logic signed [WF-1:0] fmt;
    always_comb begin
      dlt  = (WS + 1)'(v[i]) - (WS + 1)'(s_rho);
      clip = (dlt < 0) ? '0 : WF'(dlt);
      fmt  = (clip <<< SHL) >>> SHR;
      w[i] = (fmt > MAXOUT) ? W_OUT'(MAXOUT) : W_OUT'(fmt);
    end
  end

endmodule
