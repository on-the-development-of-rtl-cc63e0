// tb_pm_gauss_noise: with the switch open the output must be exactly zero. With
// it closed, over 20000 samples the mean must be near zero, the standard
// deviation 0.577*amp within 5 %, no sample beyond 2*amp, and the kurtosis near
// the 2.7 of a sum of four uniforms (a single uniform would give 1.8). Doubling
// the amplitude must double the deviation. The noise must be white: the
// correlation between successive samples must stay below 0.05 in magnitude.
module tb_pm_gauss_noise;
  timeunit 1ns; timeprecision 10ps;
  import pm_pkg::*;
  logic clk = 0, rst = 1, en = 0;
  logic [15:0] amp;
  logic signed [PIR_W-1:0] noise;
  int checks = 0, failures = 0;

  pm_gauss_noise dut (.clk(clk), .rst(rst), .en(en), .amp(amp), .noise(noise));

  always #1 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic measure(input int a, output real sd);
    real s1, s2, s4, m, v, k, c1, prev, r1;
    int  nmax;
    s1 = 0; s2 = 0; s4 = 0; nmax = 0;
    amp = 16'(a); en = 1;
    repeat (4) @(negedge clk);
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      s1 += real'(noise);
      s2 += real'(noise) * real'(noise);
      if (noise > 2 * a || noise < -2 * a) nmax++;
    end
    m = s1 / 20000.0;
    v = s2 / 20000.0 - m * m;
    sd = $sqrt(v);
    // second pass for kurtosis
    s4 = 0; s2 = 0; c1 = 0; prev = 0;
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      s2 += (real'(noise) - m) ** 2;
      s4 += (real'(noise) - m) ** 4;
      if (n > 0) c1 += (real'(noise) - m) * prev;
      prev = real'(noise) - m;
    end
    k = (s4 / 20000.0) / ((s2 / 20000.0) ** 2);
    r1 = c1 / s2;
    $display("amp=%0d lag-1 correlation %f", a, r1);
    checks++;
    if (r1 > 0.05 || r1 < -0.05) failures++;
    $display("amp=%0d mean=%f sd=%f (exp %f) kurt=%f", a, m, sd, 0.57735 * a, k);
    checks += 4;
    if (m > 0.03 * a || m < -0.03 * a) failures++;
    if (sd < 0.95 * 0.57735 * a || sd > 1.05 * 0.57735 * a) failures++;
    if (nmax != 0) failures++;
    if (k < 2.5 || k > 2.9) failures++;
  endtask

  initial begin
    real sd1, sd2;
    amp = 16'd1000;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int n = 0; n < 100; n++) begin
      @(negedge clk); checks++; if (noise != 0) failures++;
    end
    measure(1000, sd1);
    measure(2000, sd2);
    checks++;
    if (sd2 / sd1 < 1.9 || sd2 / sd1 > 2.1) failures++;
    en = 0;
    repeat (3) @(negedge clk);
    checks++; if (noise != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
