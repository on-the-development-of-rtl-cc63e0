// tb_pm_avg16: the output after clock n must be the sum of the 16 products
// applied in clocks n-3 and n-4 (four register stages, 16-sample window). An
// isolated impulse checks the latency and that it leaves after two clocks.
module tb_pm_avg16;
  timeunit 1ns; timeprecision 10ps;
  import pm_pkg::*;
  logic clk = 0, rst = 1;
  logic signed [PROD_W-1:0] d [8];
  logic signed [SUM_W-1:0] y;
  int checks = 0, failures = 0;
  longint hist [$];

  pm_avg16 dut (.clk(clk), .rst(rst), .d(d), .sum16(y));

  always #1 clk = ~clk;

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 8; k++) d[k] = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int i = 0; i < 8; i++) hist.push_back(0);
    // impulse
    d[3] = 28'sd1000;
    @(negedge clk);
    d[3] = '0;
    for (int t = 1; t <= 6; t++) begin
      @(negedge clk);
      checks++;
      if (y != ((t == 3 || t == 4) ? 32'sd1000 : 32'sd0)) begin
        failures++; $display("impulse t=%0d y=%0d", t, y);
      end
    end
    // random stream
    for (int n = 0; n < 1000; n++) begin
      automatic longint s = 0;
      for (int k = 0; k < 8; k++) begin
        d[k] = (n % 50 == 7) ? -28'sd134217728 : PROD_W'($urandom);
        s += longint'(d[k]);
      end
      hist.push_back(s);
      @(negedge clk);
      if (n >= 4) begin
        automatic longint e = hist[hist.size()-4] + hist[hist.size()-5];
        checks++;
        if (longint'(y) != e) begin
          failures++;
          if (failures < 10) $display("n=%0d y=%0d exp=%0d", n, y, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
