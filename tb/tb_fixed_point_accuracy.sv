// tb_fixed_point_accuracy: reruns the two fixed-point accuracy experiments
// on the RTL.
//
// Unit-cube experiment (d = 3): points uniform in [0,1]^3 are quantized to
// W bits with 1 sign bit, no integer bit and W-1 fraction bits, for
// W = 2..16. They are projected by the parity polytope and the simplex
// modules, which use the same format at the output. The error measure is
// the mean over points of ||w - p||^2 / d, where p is the double-precision
// projection of the unquantized point. It is printed next to the error of
// the quantized input itself.
//
// Gaussian experiment (d = 9): entries are N(0, 16), and the input has 1 sign
// bit and I = 0..4 integer bits, with the output at 1 sign and 1 integer bit.
// Each (I, W) pair with even W from 4 to 16 and W >= I+2 is a separate
// instance of the projection.
//
// Checks: every output matches the integer model bit for bit; and the
// trends the experiments show hold:
//   * unit cube: both errors fall by more than 1000x from 8 to 16 bits;
//     above 6 bits they stay within 20x of the input quantization error;
//   * Gaussian: with 3 or 4 integer bits the error falls by more than 1000x
//     from 8 to 16 bits; with 0 or 1 integer bits it saturates (the 16-bit
//     error is above 1e-3 and within 3x of the 10-bit error); 3 integer
//     bits beat 4 at every even width from 8 to 16.
module tb_fixed_point_accuracy;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int N3 = 2000;  // unit-cube points
  localparam int N9 = 400;   // Gaussian vectors

  real x3 [N3][3];
  real x9 [N9][9];

  real e_in   [17];          // quantized input error, unit cube
  real e_pp3  [17];          // parity projection error, unit cube
  real e_sp3  [17];          // simplex projection error, unit cube
  real e_pp9  [5][17];       // parity projection error, Gaussian, [I][W]

  task automatic count(input bit bad, input string what);
    checks++;
    if (bad) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  // ---------------- unit cube, d = 3 ----------------
  for (genvar wg = 2; wg <= 16; wg++) begin : g_cube
    localparam int W = wg;
    localparam int F = W - 1;
    logic signed [W-1:0] v [3];
    logic signed [W-1:0] wpp [3];
    logic signed [W-1:0] wsp [3];
    logic                in_box, parity_flip;

    parity_polytope_projection #(.D(3), .W(W), .F_IN(F), .F_OUT(F)) u_pp (
      .v(v), .w(wpp), .in_box(in_box), .parity_flip(parity_flip));
    simplex_projection #(.D(3), .W_IN(W), .F_IN(F), .W_OUT(W), .F_OUT(F)) u_sp (
      .v(v), .w(wsp));

    task automatic run();
      longint vi[], ep[], es[];
      real    xr[], pp[], ps[];
      real    sc, ei, epp, esp, t;
      bit     b1, b2, bad;
      vi = new[3]; xr = new[3];
      sc = real'(longint'(1) << F);
      ei = 0.0; epp = 0.0; esp = 0.0; bad = 1'b0;
      for (int k = 0; k < N3; k++) begin
        for (int i = 0; i < 3; i++) begin
          xr[i] = x3[k][i];
          vi[i] = quant(xr[i], W, F);
          v[i]  = W'(vi[i]);
        end
        #1;
        fx_parity(vi, W, F, F, ep, b1, b2);
        fx_simplex(vi, F, F, W, F + 2 + 2, es);
        re_parity(xr, pp);
        re_simplex(xr, ps);
        for (int i = 0; i < 3; i++) begin
          if (longint'(wpp[i]) != ep[i] || longint'(wsp[i]) != es[i] ||
              in_box !== b1 || parity_flip !== b2) bad = 1'b1;
          t = real'(vi[i]) / sc - xr[i];     ei  += t * t / 3.0;
          t = real'(wpp[i]) / sc - pp[i];    epp += t * t / 3.0;
          t = real'(wsp[i]) / sc - ps[i];    esp += t * t / 3.0;
        end
      end
      e_in[W]  = ei / real'(N3);
      e_pp3[W] = epp / real'(N3);
      e_sp3[W] = esp / real'(N3);
      count(bad, $sformatf("unit cube W=%0d does not match the integer model", W));
    endtask
  end

  // ---------------- Gaussian, d = 9 ----------------
  for (genvar ig = 0; ig <= 4; ig++) begin : g_gi
    for (genvar wg = 4; wg <= 16; wg += 2) begin : g_gw
     if (wg >= ig + 2) begin : g_on
      localparam int W  = wg;
      localparam int FI = W - 1 - ig;
      localparam int FO = W - 2;
      logic signed [W-1:0] v [9];
      logic signed [W-1:0] w [9];
      logic                in_box, parity_flip;

      parity_polytope_projection #(.D(9), .W(W), .F_IN(FI), .F_OUT(FO)) u_pp (
        .v(v), .w(w), .in_box(in_box), .parity_flip(parity_flip));

      task automatic run();
        longint vi[], ep[];
        real    xr[], pp[];
        real    e, t;
        bit     b1, b2, bad;
        vi = new[9]; xr = new[9];
        e = 0.0; bad = 1'b0;
        for (int k = 0; k < N9; k++) begin
          for (int i = 0; i < 9; i++) begin
            xr[i] = x9[k][i];
            vi[i] = quant(xr[i], W, FI);
            v[i]  = W'(vi[i]);
          end
          #1;
          fx_parity(vi, W, FI, FO, ep, b1, b2);
          re_parity(xr, pp);
          for (int i = 0; i < 9; i++) begin
            if (longint'(w[i]) != ep[i] || in_box !== b1 || parity_flip !== b2) bad = 1'b1;
            t = real'(w[i]) / real'(longint'(1) << FO) - pp[i];
            e += t * t / 9.0;
          end
        end
        e_pp9[ig][W] = e / real'(N9);
        count(bad, $sformatf("Gaussian I=%0d W=%0d does not match the integer model", ig, W));
      endtask
     end
    end
  end

  // Calls every instance's run task (generate loops cannot be walked by a
  // procedural loop, so the calls are spelled out by a macro per width).
  `define RUN_CUBE(n) g_cube[n].run();
  `define RUN_G(i, n) g_gi[i].g_gw[n].g_on.run();

  initial begin
    for (int k = 0; k < N3; k++)
      for (int i = 0; i < 3; i++) x3[k][i] = real'($urandom % 1000000) / 1000000.0;
    for (int k = 0; k < N9; k++)
      for (int i = 0; i < 9; i++) x9[k][i] = 4.0 * gauss();

    `RUN_CUBE(2)  `RUN_CUBE(3)  `RUN_CUBE(4)  `RUN_CUBE(5)  `RUN_CUBE(6)
    `RUN_CUBE(7)  `RUN_CUBE(8)  `RUN_CUBE(9)  `RUN_CUBE(10) `RUN_CUBE(11)
    `RUN_CUBE(12) `RUN_CUBE(13) `RUN_CUBE(14) `RUN_CUBE(15) `RUN_CUBE(16)

    `RUN_G(0, 4)  `RUN_G(0, 6)  `RUN_G(0, 8)  `RUN_G(0, 10)  `RUN_G(0, 12)  `RUN_G(0, 14)  `RUN_G(0, 16)
    `RUN_G(1, 4)  `RUN_G(1, 6)  `RUN_G(1, 8)  `RUN_G(1, 10)  `RUN_G(1, 12)  `RUN_G(1, 14)  `RUN_G(1, 16)
    `RUN_G(2, 4)  `RUN_G(2, 6)  `RUN_G(2, 8)  `RUN_G(2, 10)  `RUN_G(2, 12)  `RUN_G(2, 14)  `RUN_G(2, 16)
    `RUN_G(3, 6)  `RUN_G(3, 8)  `RUN_G(3, 10)  `RUN_G(3, 12)  `RUN_G(3, 14)  `RUN_G(3, 16)
    `RUN_G(4, 6)  `RUN_G(4, 8)  `RUN_G(4, 10)  `RUN_G(4, 12)  `RUN_G(4, 14)  `RUN_G(4, 16)

    $display("unit cube d=3: width  input  parity  simplex");
    for (int w = 2; w <= 16; w++)
      $display("  %2d  %9.3e  %9.3e  %9.3e", w, e_in[w], e_pp3[w], e_sp3[w]);
    $display("Gaussian d=9: width  I=0  I=1  I=2  I=3  I=4");
    for (int w = 4; w <= 16; w += 2) begin
      string s;
      s = $sformatf("  %2d", w);
      for (int i = 0; i <= 4; i++)
        s = {s, (w >= i + 2) ? $sformatf("  %9.3e", e_pp9[i][w]) : "          -"};
      $display("%s", s);
    end

    count(!(e_pp3[16] < 1.0e-3 * e_pp3[8]), "unit cube parity error does not fall exponentially");
    count(!(e_sp3[16] < 1.0e-3 * e_sp3[8]), "unit cube simplex error does not fall exponentially");
    for (int w = 7; w <= 16; w++) begin
      count(!(e_pp3[w] < 20.0 * e_in[w]), $sformatf("unit cube parity error at W=%0d far above input error", w));
      count(!(e_sp3[w] < 20.0 * e_in[w]), $sformatf("unit cube simplex error at W=%0d far above input error", w));
    end
    count(!(e_pp9[3][16] < 1.0e-3 * e_pp9[3][8]), "Gaussian I=3 does not fall exponentially");
    count(!(e_pp9[4][16] < 1.0e-3 * e_pp9[4][8]), "Gaussian I=4 does not fall exponentially");
    for (int i = 0; i <= 1; i++) begin
      count(!(e_pp9[i][16] > 1.0e-3), $sformatf("Gaussian I=%0d does not saturate", i));
      count(!(e_pp9[i][16] > e_pp9[i][10] / 3.0), $sformatf("Gaussian I=%0d keeps falling", i));
    end
    for (int w = 8; w <= 16; w += 2)
      count(!(e_pp9[3][w] < e_pp9[4][w]), $sformatf("Gaussian I=3 not better than I=4 at W=%0d", w));

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
