// tb_max_index: checks max_index on every input of the default D = 9 and of
// D = 1, 2, 5, 16, and on random inputs of D = 33. The output must be the
// highest set bit of the request alone, or zero for a zero request.
module tb_max_index;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int NS = 6;
  localparam int DS [NS] = '{9, 1, 2, 5, 16, 33};

  for (genvar n = 0; n < NS; n++) begin : g_n
    localparam int D = DS[n];
    logic [D-1:0] req, oh;
    if (n == 0) begin : g_def
      max_index dut (.req(req), .onehot(oh));
    end else begin : g_par
      max_index #(.D(D)) dut (.req(req), .onehot(oh));
    end

    task automatic one(input logic [D-1:0] r);
      logic [D-1:0] e;
      req = r; #1;
      e = '0;
      for (int i = 0; i < D; i++) if (r[i]) e = '0 | (D'(1) << i);
      checks++;
      if (oh !== e) begin
        failures++;
        if (failures < 10) $display("FAIL D=%0d req=%b oh=%b exp=%b", D, r, oh, e);
      end
    endtask

    task automatic run();
      if (D <= 16) begin
        for (int m = 0; m < (1 << D); m++) one(D'(m));
      end else begin
        for (int k = 0; k < 20000; k++) one(D'({$urandom, $urandom} >> ($urandom % 64)));
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
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
