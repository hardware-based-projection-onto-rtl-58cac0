// parity_polytope_projection: Euclidean projection of a D-vector onto the
// parity polytope PP_D, the convex hull of the even-weight vertices of the
// unit cube. This is the top of the design.
//
// The datapath evaluates every branch of the algorithm in parallel and
// selects at the end:
//   1. vhat = v clipped to [0,1]                  (unit-cube projection)
//   2. f_i  = (vhat_i > 1/2)                      (nearest cube vertex)
//   3. if f has even weight, flip f at the argmin of |1/2 - vhat_i|, so f
//      becomes the nearest odd-weight vertex      (argmin tree)
//   4. vt = T_f(v), where T_f replaces v_i by 1 - v_i wherever f_i = 1
//   5. if sum clip(vt) >= 1, then vhat is already in PP_D: w = vhat
//      (in_box = 1)
//   6. otherwise w = T_f(u) with u = simplex projection of vt
//      (simplex_projection)
// By the commutation of T_f and the cube clip, clip(vt) = T_f(vhat). The
// membership sum of step 5 is therefore formed from vhat and needs no
// second clip.
//
// Number format: two's complement fixed point, W bits. The input has F_IN
// fraction bits and the output F_OUT. Internally T_f(v) is carried with two
// extra bits, because 1 - v can reach 1 + 2^(W-1-F_IN). The simplex
// projection inside runs at F_IN fraction bits. The final result is shifted
// to F_OUT fraction bits, dropping low bits, and saturated to W bits.
//
// Interface: v[D] in, w[D] out. in_box reports that step 5 was taken.
// parity_flip reports that step 3 flipped an entry of f. Purely
// combinational, with no pipeline registers: one projection per evaluation.
//
// The algorithm, the argmin tree and the simplex datapath follow the paper.
// The two status outputs, the extra internal bits and the saturation are
// this design's choices.
module parity_polytope_projection
  import proj_pkg::*;
#(
  parameter int D     = 9,  // dimension
  parameter int W     = 8,  // input and output width
  parameter int F_IN  = 6,  // input fraction bits
  parameter int F_OUT = 6   // output fraction bits
) (
  input  logic signed [W-1:0] v [D],
  output logic signed [W-1:0] w [D],
  output logic                in_box,
  output logic                parity_flip
);

  localparam int LD  = int'(log2_ceil(D));
  localparam int WI  = W + 2;        // internal lane width
  localparam int WB  = WI + LD;      // membership sum width
  localparam int AW  = F_IN;         // width of |1/2 - vhat_i| (at most 1/2)
  localparam int SHL = (F_OUT > F_IN) ? F_OUT - F_IN : 0;
  localparam int SHR = (F_IN > F_OUT) ? F_IN - F_OUT : 0;
  localparam int WF  = WI + SHL;

  localparam logic signed [WI-1:0] ONE    = WI'(longint'(1) << F_IN);
  localparam logic signed [WI-1:0] HALF   = WI'(longint'(1) << (F_IN - 1));
  localparam logic signed [WF-1:0] MAXOUT = WF'((longint'(1) << (W - 1)) - 1);

  logic signed [WI-1:0] vx    [D];  // v, sign-extended
  logic signed [WI-1:0] vhat  [D];  // unit-cube projection of v
  logic        [AW-1:0] half_dist  [D];  // |1/2 - vhat_i|
  logic        [AW-1:0] half_dist_min;
  logic        [D-1:0]  f0;         // nearest cube vertex
  logic        [D-1:0]  flip_oh;    // argmin indicator
  logic        [D-1:0]  f;          // nearest odd-weight vertex
  logic signed [WI-1:0] vt    [D];  // T_f(v)
  logic signed [WI-1:0] tvhat [D];  // T_f(vhat) = clip(T_f(v))
  logic signed [WB-1:0] box_sum;
  logic signed [WI-1:0] u     [D];  // simplex projection of T_f(v)
  logic signed [WI-1:0] wi    [D];  // result at F_IN fraction bits

  // Steps 1-2: clip to the unit cube, nearest vertex, distance to 1/2.
  for (genvar i = 0; i < D; i++) begin : g_clip
    always_comb begin
      vx[i]   = WI'(v[i]);
      vhat[i] = (vx[i] < 0) ? '0 : ((vx[i] > ONE) ? ONE : vx[i]);
      f0[i]   = (vhat[i] > HALF);
      half_dist[i] = AW'(f0[i] ? (vhat[i] - HALF) : (HALF - vhat[i]));
    end
  end

  // Step 3: parity fix.
  argmin #(.N(D), .W(AW)) u_argmin (.x(half_dist), .min_val(half_dist_min), .onehot(flip_oh));

  assign parity_flip = ~^f0;
  assign f           = f0 ^ (flip_oh & {D{parity_flip}});

  // Steps 4-5: similarity transform and membership test.
  for (genvar i = 0; i < D; i++) begin : g_tf
    always_comb begin
      vt[i]    = f[i] ? (ONE - vx[i])   : vx[i];
      tvhat[i] = f[i] ? (ONE - vhat[i]) : vhat[i];
    end
  end

  always_comb begin
    box_sum = '0;
    for (int i = 0; i < D; i++) box_sum = box_sum + WB'(tvhat[i]);
  end

  assign in_box = (box_sum >= WB'(ONE));

  // Step 6: simplex projection of T_f(v), then T_f back.
  simplex_projection #(
    .D    (D),
    .W_IN (WI),
    .F_IN (F_IN),
    .W_OUT(WI),
    .F_OUT(F_IN)
  ) u_simplex (
    .v(vt),
    .w(u)
  );

  // Selection, output format and saturation.
  for (genvar i = 0; i < D; i++) begin : g_out
    logic signed [WF-1:0] fmt;
    always_comb begin
      wi[i] = in_box ? vhat[i] : (f[i] ? (ONE - u[i]) : u[i]);
      fmt   = (WF'(wi[i]) <<< SHL) >>> SHR;
      w[i]  = (fmt > MAXOUT) ? W'(MAXOUT) : W'(fmt);
    end
  end

endmodule
