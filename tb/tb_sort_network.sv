// tb_sort_network: checks the sorting network against a bubble-sort model.
// By the 0-1 principle, a comparator network sorts every input if it sorts
// every 0/1 input. So the default D = 9 network gets all 2^9 binary inputs
// plus random words. Networks of other sizes (2, 3, 5, 8, 16, 17, 33) get
// exhaustive binary inputs up to 2^17 patterns, or random ones above that.
// The test also checks the stage count t(t+1)/2.
module tb_sort_network;
  import proj_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int NS = 8;
  localparam int DS [NS] = '{9, 2, 3, 5, 8, 16, 17, 33};

  for (genvar n = 0; n < NS; n++) begin : g_n
    localparam int D = DS[n];
    logic signed [7:0] x [D];
    logic signed [7:0] y [D];
    if (n == 0) begin : g_def
      sort_network dut (.x(x), .y(y));
    end else begin : g_par
      sort_network #(.D(D), .W(8)) dut (.x(x), .y(y));
    end

    task automatic run_one(input longint pat[]);
      longint r[];
      bit     bad;
      r = new[D];
      for (int i = 0; i < D; i++) begin
        x[i] = 8'(pat[i]);
        r[i] = pat[i];
      end
      #1;
      tb_ref_pkg::sort_desc(r);
      bad = 1'b0;
      for (int i = 0; i < D; i++) if (longint'(y[i]) != r[i]) bad = 1'b1;
      checks++;
      if (bad) begin
        failures++;
        if (failures < 10) $display("FAIL D=%0d pattern %p", D, pat);
      end
    endtask

    task automatic run();
      longint pat[];
      pat = new[D];
      if (D <= 17) begin
        for (int m = 0; m < (1 << D); m++) begin
          for (int i = 0; i < D; i++) pat[i] = (m >> i) & 1;
          run_one(pat);
        end
      end else begin
        for (int k = 0; k < 20000; k++) begin
          for (int i = 0; i < D; i++) pat[i] = $urandom & 1;
          run_one(pat);
        end
      end
      for (int k = 0; k < 3000; k++) begin
        for (int i = 0; i < D; i++) pat[i] = longint'(signed'(8'($urandom)));
        run_one(pat);
      end
    endtask
  end

  initial begin
    checks++;
    if (sort_num_stages(9) != 10 || sort_num_stages(16) != 10 || sort_num_stages(33) != 21) begin
      failures++;
      $display("FAIL stage count");
    end
    g_n[0].run();
    g_n[1].run();
    g_n[2].run();
    g_n[3].run();
    g_n[4].run();
    g_n[5].run();
    g_n[6].run();
    g_n[7].run();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
