// tb_prefix_sum: checks every output of the prefix network against a
// running sum, for the default D = 9 and for D = 1, 2, 7, 16, 33. It uses
// random signed inputs and the extreme all-minimum and all-maximum vectors,
// which exercise the widened output.
module tb_prefix_sum;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int NS = 6;
  localparam int DS [NS] = '{9, 1, 2, 7, 16, 33};

  for (genvar n = 0; n < NS; n++) begin : g_n
    localparam int D  = DS[n];
    localparam int WI = 9;
    localparam int WO = WI + tb_ref_pkg::clog2i(D);
    logic signed [WI-1:0] x [D];
    logic signed [WO-1:0] s [D];
    if (n == 0) begin : g_def
      prefix_sum dut (.x(x), .s(s));
    end else begin : g_par
      prefix_sum #(.D(D), .W_IN(WI)) dut (.x(x), .s(s));
    end

    task automatic run();
      longint acc;
      bit     bad;
      for (int k = 0; k < 4000; k++) begin
        for (int i = 0; i < D; i++) begin
          if (k == 0) x[i] = -9'sd256;
          else if (k == 1) x[i] = 9'sd255;
          else x[i] = WI'($urandom);
        end
        #1;
        acc = 0;
        bad = 1'b0;
        for (int i = 0; i < D; i++) begin
          acc += longint'(x[i]);
          if (longint'(s[i]) != acc) bad = 1'b1;
        end
        checks++;
        if (bad) begin
          failures++;
          if (failures < 10) $display("FAIL D=%0d x=%p s=%p", D, x, s);
        end
      end
    endtask
  end

  initial begin
    g_n[0].run();
    g_n[1].run();
    g_n[2].run();
    g_n[3].run();
    g_n[4].run();
    g_n[5].run();
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
