// tb_pm_cic2: random input, several decimation factors (1, 2, 5, 17, 64).
// Each output must equal the double boxcar sum_{a,b<R} x[n-a-b] computed
// directly from the stored input history, and must come every R inputs.
// A reduced rate width (8 bits) keeps the words short.
module tb_pm_cic2;
  timeunit 1ns; timeprecision 10ps;
  logic clk = 0, rst = 1;
  localparam int IN_W = 12, RATE_W = 8;
  logic signed [IN_W-1:0] x;
  logic [RATE_W:0] rate;
  logic signed [IN_W+2*RATE_W-1:0] y;
  logic vld;
  int checks = 0, failures = 0;
  longint hist [$];

  pm_cic2 #(.IN_W(IN_W), .RATE_W(RATE_W)) dut (.clk(clk), .rst(rst), .in_en(1'b1), .x(x),
      .rate(rate), .y(y), .out_valid(vld));

  always #1 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint model(int n, int r);
    longint s = 0;
    for (int a = 0; a < r; a++)
      for (int b = 0; b < r; b++)
        if (n - a - b >= 0) s += hist[n - a - b];
    return s;
  endfunction

  initial begin
    int rates [5] = '{1, 2, 5, 17, 64};
    foreach (rates[ri]) begin
      automatic int r = rates[ri];
      automatic int outs = 0;
      rst = 1; x = '0; rate = 9'(r);
      hist.delete();
      repeat (2) @(negedge clk);
      rst = 0;
      for (int n = 0; n < 20 * r + 5; n++) begin
        x = IN_W'($urandom);
        hist.push_back(longint'(x));
        @(negedge clk);
        checks++;
        if (vld != ((n + 1) % r == 0)) begin failures++; $display("R=%0d n=%0d vld=%0d", r, n, vld); end
        if (vld) begin
          automatic longint e = model(n, r);
          outs++;
          checks++;
          if (longint'(y) != e) begin
            failures++;
            if (failures < 10) $display("R=%0d n=%0d y=%0d exp=%0d", r, n, y, e);
          end
        end
      end
      checks++; if (outs != (20 * r + 5) / r) begin failures++; $display("R=%0d outs=%0d", r, outs); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
