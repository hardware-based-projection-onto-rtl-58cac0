// tb_simplex_projection: checks the simplex projection in two
// configurations:
//   * default D = 9, 8-bit words with 6 fraction bits, random inputs over
//     the whole input range plus directed vectors;
//   * D = 3, 8-bit words with 7 fraction bits (no integer bit), inputs from
//     the unit cube, as in the unit-cube accuracy experiment.
// Each output is compared bit for bit with the integer model fx_simplex. It
// is also compared with the double-precision projection, to within 3 LSB of
// the coarser of the input and output formats. The sum of each result must
// be within D LSB of 1 (or D LSB below it where 1.0 saturates).
module tb_simplex_projection;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int NC = 2;
  localparam int CD  [NC] = '{9, 3};
  localparam int CF  [NC] = '{6, 7};
  localparam int CW  [NC] = '{8, 8};

  for (genvar c = 0; c < NC; c++) begin : g_c
    localparam int D  = CD[c];
    localparam int W  = CW[c];
    localparam int F  = CF[c];
    localparam int RF = F + clog2i(D) + 2;
    logic signed [W-1:0] v [D];
    logic signed [W-1:0] w [D];
    if (c == 0) begin : g_def
      simplex_projection dut (.v(v), .w(w));
    end else begin : g_par
      simplex_projection #(.D(D), .W_IN(W), .F_IN(F), .W_OUT(W), .F_OUT(F)) dut (.v(v), .w(w));
    end

    task automatic one(input longint vi[]);
      longint we[];
      real    vr[], wr[];
      real    err, tol, sum;
      bit     bad_x, bad_r;
      vr = new[D];
      for (int i = 0; i < D; i++) begin
        v[i]  = W'(vi[i]);
        vr[i] = real'(vi[i]) / real'(longint'(1) << F);
      end
      #1;
      fx_simplex(vi, F, F, W, RF, we);
      re_simplex(vr, wr);
      bad_x = 1'b0; bad_r = 1'b0; sum = 0.0;
      tol   = 3.0 / real'(longint'(1) << F);
      for (int i = 0; i < D; i++) begin
        if (longint'(w[i]) != we[i]) bad_x = 1'b1;
        err = real'(w[i]) / real'(longint'(1) << F) - wr[i];
        if (err > tol || -err > tol) bad_r = 1'b1;
        sum += real'(w[i]) / real'(longint'(1) << F);
      end
      if (sum > 1.0 + real'(D) / real'(longint'(1) << F) ||
          sum < 1.0 - real'(D + 1) / real'(longint'(1) << F)) bad_r = 1'b1;
      checks += 2;
      if (bad_x) begin
        failures++;
        if (failures < 10) $display("FAIL exact D=%0d v=%p w=%p exp=%p", D, vi, w, we);
      end
      if (bad_r) begin
        failures++;
        if (failures < 10) $display("FAIL real D=%0d v=%p w=%p ideal=%p", D, vi, w, wr);
      end
    endtask

    task automatic run(input int n);
      longint vi[];
      longint lo, hi;
      vi = new[D];
      // Directed: all zero (uniform answer), one large entry, all maximal.
      for (int i = 0; i < D; i++) vi[i] = 0;
      one(vi);
      vi[0] = (longint'(1) << (W - 1)) - 1;
      one(vi);
      for (int i = 0; i < D; i++) vi[i] = (longint'(1) << (W - 1)) - 1;
      one(vi);
      for (int i = 0; i < D; i++) vi[i] = -(longint'(1) << (W - 1));
      one(vi);
      lo = (F == W - 1) ? 0 : -(longint'(1) << (W - 1));
      hi = (longint'(1) << (W - 1)) - 1;
      for (int k = 0; k < n; k++) begin
        for (int i = 0; i < D; i++) vi[i] = lo + longint'($urandom % int'(hi - lo + 1));
        one(vi);
      end
    endtask
  end

  initial begin
    g_c[0].run(20000);
    g_c[1].run(20000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
