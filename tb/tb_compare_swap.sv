// tb_compare_swap: checks the compare-and-swap element on every pair of
// 6-bit signed values and on random and extreme 8-bit pairs. hi must be the
// larger input and lo the smaller.
module tb_compare_swap;
  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic signed [5:0] a6, b6, hi6, lo6;
  logic signed [7:0] a8, b8, hi8, lo8;

  compare_swap #(.W(6)) dut6 (.a(a6), .b(b6), .hi(hi6), .lo(lo6));
  compare_swap dut8 (.a(a8), .b(b8), .hi(hi8), .lo(lo8));

  task automatic check8(input logic signed [7:0] x, input logic signed [7:0] y);
    a8 = x; b8 = y; #1;
    checks++;
    if (hi8 !== ((x > y) ? x : y) || lo8 !== ((x > y) ? y : x)) begin
      failures++;
      if (failures < 10) $display("FAIL W=8 a=%0d b=%0d hi=%0d lo=%0d", x, y, hi8, lo8);
    end
  endtask

  initial begin
    for (int i = -32; i < 32; i++)
      for (int j = -32; j < 32; j++) begin
        a6 = 6'(i); b6 = 6'(j); #1;
        checks++;
        if (int'(hi6) != ((i > j) ? i : j) || int'(lo6) != ((i > j) ? j : i)) begin
          failures++;
          if (failures < 10) $display("FAIL W=6 a=%0d b=%0d hi=%0d lo=%0d", i, j, hi6, lo6);
        end
      end
    check8(8'sd127, -8'sd128);
    check8(-8'sd128, 8'sd127);
    check8(-8'sd1, 8'sd0);
    for (int k = 0; k < 2000; k++) check8(8'($urandom), 8'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
