// tb_argmin: checks the min-tree for the default N = 9 and for N = 1, 2, 3,
// 16, 33. Values are drawn from a narrow range so that ties are frequent. The
// minimum must be exact, and the indicator must mark exactly the lowest
// index holding it.
module tb_argmin;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int NS = 6;
  localparam int NSZ [NS] = '{9, 1, 2, 3, 16, 33};

  for (genvar n = 0; n < NS; n++) begin : g_n
    localparam int N = NSZ[n];
    localparam int W = 6;
    logic [W-1:0] x [N];
    logic [W-1:0] mn;
    logic [N-1:0] oh;
    if (n == 0) begin : g_def
      argmin dut (.x(x), .min_val(mn), .onehot(oh));
    end else begin : g_par
      argmin #(.N(N), .W(W)) dut (.x(x), .min_val(mn), .onehot(oh));
    end

    task automatic run();
      int           im;
      logic [N-1:0] e;
      for (int k = 0; k < 5000; k++) begin
        for (int i = 0; i < N; i++) x[i] = (k % 2 == 0) ? W'($urandom % 4) : W'($urandom);
        #1;
        im = 0;
        for (int i = 1; i < N; i++) if (x[i] < x[im]) im = i;
        e = N'(1) << im;
        checks++;
        if (mn !== x[im] || oh !== e) begin
          failures++;
          if (failures < 10) $display("FAIL N=%0d x=%p min=%0d oh=%b exp %0d %b", N, x, mn, oh, x[im], e);
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
