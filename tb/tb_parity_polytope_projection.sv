// tb_parity_polytope_projection: end-to-end test of the parity polytope
// projection at its default size (D = 9, 8-bit words with 6 fraction bits)
// with no parameter overridden.
//
// Stimulus mixes four sources: uniform points of the unit cube, uniform
// words over the whole input range, Gaussian vectors (sigma 1 and sigma 4,
// quantized with saturation) and directed vectors. Each result is checked
// three ways:
//   * bit for bit against the integer model fx_parity, including the
//     in_box and parity_flip status outputs;
//   * against the double-precision projection, to within 3 LSB per entry;
//   * the double-precision projection itself against the definition: it
//     lies in the polytope, and (v - p).(e - p) <= 0 for all 256 even-weight
//     vertices e (checked on a subset of vectors).
// The test counts how often each mechanism occurs: the box branch and the
// simplex branch of the membership test, the even-weight parity flip and
// its absence, clipping below 0 and above 1. Any that never occurs is a
// failure.
module tb_parity_polytope_projection;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int D = 9;
  localparam int W = 8;
  localparam int F = 6;

  logic signed [W-1:0] v [D];
  logic signed [W-1:0] w [D];
  logic                in_box, parity_flip;

  parity_polytope_projection dut (.v(v), .w(w), .in_box(in_box), .parity_flip(parity_flip));

  int n_box = 0, n_simplex = 0, n_flip = 0, n_noflip = 0, n_clip_lo = 0, n_clip_hi = 0;
  int n_vi = 0;

  task automatic one(input longint vi[], input bit do_vi);
    longint we[];
    real    vr[], pr[];
    bit     eb, ef, bad_x, bad_r, lo, hi;
    real    err, tol, gap, viol;
    vr = new[D];
    lo = 1'b0; hi = 1'b0;
    for (int i = 0; i < D; i++) begin
      v[i]  = W'(vi[i]);
      vr[i] = real'(vi[i]) / real'(1 << F);
      if (vi[i] < 0) lo = 1'b1;
      if (vi[i] > (1 << F)) hi = 1'b1;
    end
    #1;
    fx_parity(vi, W, F, F, we, eb, ef);
    re_parity(vr, pr);
    bad_x = (in_box !== eb) || (parity_flip !== ef);
    bad_r = 1'b0;
    tol   = 3.0 / real'(1 << F);
    for (int i = 0; i < D; i++) begin
      if (longint'(w[i]) != we[i]) bad_x = 1'b1;
      err = real'(w[i]) / real'(1 << F) - pr[i];
      if (err > tol || -err > tol) bad_r = 1'b1;
    end
    checks += 2;
    if (bad_x) begin
      failures++;
      if (failures < 10)
        $display("FAIL exact v=%p w=%p exp=%p box=%b/%b flip=%b/%b", vi, w, we, in_box, eb, parity_flip, ef);
    end
    if (bad_r) begin
      failures++;
      if (failures < 10) $display("FAIL real v=%p w=%p ideal=%p", vi, w, pr);
    end
    if (do_vi) begin
      viol = re_pp_violation(pr);
      gap  = re_vi_gap(vr, pr);
      checks++;
      n_vi++;
      if (viol > 1.0e-9 || gap > 1.0e-9) begin
        failures++;
        if (failures < 10) $display("FAIL ideal projection v=%p p=%p viol=%g gap=%g", vr, pr, viol, gap);
      end
    end
    if (in_box) n_box++; else n_simplex++;
    if (parity_flip) n_flip++; else n_noflip++;
    if (lo) n_clip_lo++;
    if (hi) n_clip_hi++;
  endtask

  initial begin
    longint vi[];
    vi = new[D];
    // All ones: odd weight, no flip; T_f(v) = 0, so the simplex answer is
    // 1/9 everywhere and the projection is 8/9 everywhere.
    for (int i = 0; i < D; i++) vi[i] = 1 << F;
    one(vi, 1'b1);
    checks++;
    for (int i = 0; i < D; i++)
      if (w[i] != 8'(((8 << F) + 8) / 9) && w[i] != 8'((8 << F) / 9)) begin
        failures++;
        $display("FAIL all-ones w[%0d]=%0d", i, w[i]);
        break;
      end
    // Origin: already a vertex of the polytope.
    for (int i = 0; i < D; i++) vi[i] = 0;
    one(vi, 1'b1);
    checks++;
    for (int i = 0; i < D; i++) if (w[i] != 0) begin failures++; break; end
    // A single one: odd vertex, projects to the nearest point of a facet.
    vi[0] = 1 << F;
    one(vi, 1'b1);

    for (int k = 0; k < 40000; k++) begin
      for (int i = 0; i < D; i++) begin
        case (k % 4)
          0: vi[i] = longint'($urandom % ((1 << F) + 1));
          1: vi[i] = longint'(signed'(8'($urandom)));
          2: vi[i] = quant(gauss(), W, F);
          default: vi[i] = quant(4.0 * gauss(), W, F);
        endcase
      end
      one(vi, (k % 20) == 0);
    end

    $display("mechanisms: box=%0d simplex=%0d flip=%0d noflip=%0d clip_lo=%0d clip_hi=%0d vi_checked=%0d",
             n_box, n_simplex, n_flip, n_noflip, n_clip_lo, n_clip_hi, n_vi);
    checks += 6;
    if (n_box == 0) begin failures++; $display("FAIL box branch never taken"); end
    if (n_simplex == 0) begin failures++; $display("FAIL simplex branch never taken"); end
    if (n_flip == 0) begin failures++; $display("FAIL parity flip never happened"); end
    if (n_noflip == 0) begin failures++; $display("FAIL odd weight never seen"); end
    if (n_clip_lo == 0) begin failures++; $display("FAIL no clipping below 0"); end
    if (n_clip_hi == 0) begin failures++; $display("FAIL no clipping above 1"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
