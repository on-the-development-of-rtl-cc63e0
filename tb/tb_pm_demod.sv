// tb_pm_demod: random samples and NCO values; each I product must be x*cos
// and each Q product -x*sin, one clock after the inputs.
module tb_pm_demod;
  timeunit 1ns; timeprecision 10ps;
  import pm_pkg::*;
  logic clk = 0;
  logic signed [ADC_W-1:0] x [NSAMP];
  logic signed [LUT_AMP_W-1:0] sv [NSAMP], cv [NSAMP];
  logic signed [PROD_W-1:0] ip [NSAMP], qp [NSAMP];
  int checks = 0, failures = 0;

  pm_demod dut (.clk(clk), .x(x), .sin_i(sv), .cos_i(cv), .i_prod(ip), .q_prod(qp));

  always #1 clk = ~clk;

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint ei, eq;
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      for (int k = 0; k < NSAMP; k++) begin
        x[k]  = ADC_W'($urandom);
        sv[k] = (n == 0) ? -16'sd32767 : LUT_AMP_W'($urandom_range(0, 65534) - 32767);
        cv[k] = (n == 0) ? 16'sd32767 : LUT_AMP_W'($urandom_range(0, 65534) - 32767);
      end
      if (n == 0) for (int k = 0; k < NSAMP; k++) x[k] = -12'sd2048;
      @(posedge clk); #0.5;
      for (int k = 0; k < NSAMP; k++) begin
        ei = longint'(x[k]) * longint'(cv[k]);
        eq = -(longint'(x[k]) * longint'(sv[k]));
        checks += 2;
        if (longint'(ip[k]) != ei) failures++;
        if (longint'(qp[k]) != eq) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
