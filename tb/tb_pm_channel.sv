// tb_pm_channel: one channel fed with a main tone (1 GHz, 1500 LSB) plus a
// pilot tone (100 MHz, 500 LSB). ADPLL 0 starts 1 MHz off the main tone and
// ADPLL 1 0.5 MHz off the pilot; each must lock to its own tone (PIR means
// 16000 and 1600 within 0.5) with a small mean phase error, showing that the
// two loops of a channel share the samples but run independently. Each loop's
// decimated I must match its own tone's amplitude (8 * A * 32767 within 3 %),
// its mean Q must stay below 0.05 rad, and each must give 4 readout and 4 Q^2
// strobes in the window. Finally the noise switch of the pilot loop alone is
// closed: only its two monitor words may differ, the main loop's must not.
module tb_pm_channel;
  timeunit 1ns; timeprecision 10ps;
  import pm_pkg::*;
  logic clk = 0, rst = 1;
  logic signed [ADC_W-1:0] x [NSAMP];
  adpll_cfg_t cfg [2];
  adpll_rd_t  rd  [2];
  adpll_mon_t mon [2];
  int checks = 0, failures = 0;

  localparam real PI2 = 6.283185307179586;
  localparam real FS  = 4.096e9;
  localparam real F1 = 1.0e9, A1 = 1500.0, F2 = 0.1e9, A2 = 500.0;
  longint m = 0;

  pm_channel dut (.clk(clk), .rst(rst), .x(x), .cfg(cfg), .rd(rd), .mon(mon));

  always #1 clk = ~clk;

  always @(posedge clk) begin
    for (int k = 0; k < NSAMP; k++) begin
      real p1, p2;
      p1 = F1 / FS * real'(m + k); p1 = p1 - $floor(p1);
      p2 = F2 / FS * real'(m + k); p2 = p2 - $floor(p2);
      x[k] <= ADC_W'($rtoi($floor(A1 * $cos(PI2 * p1) + A2 * $cos(PI2 * p2 + 1.0) + 0.5)));
    end
    m <= m + NSAMP;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real r0, r1, i0, i1, q0, q1;
    int n0, n1, s0, s1, d0, d1;
    for (int p = 0; p < 2; p++) cfg[p] = '0;
    cfg[0].f0 = 32'($rtoi((F1 + 1.0e6) / FS * 4294967296.0));
    cfg[0].kp = 18'sd90;  cfg[0].ki = 18'sd21; cfg[0].si = 6;
    cfg[1].f0 = 32'($rtoi((F2 + 0.5e6) / FS * 4294967296.0));
    cfg[1].kp = 18'sd270; cfg[1].ki = 18'sd63; cfg[1].si = 6;
    for (int p = 0; p < 2; p++) begin
      cfg[p].servo_en = 1; cfg[p].cic_rate = 1024; cfg[p].q2_rate = 64;
    end
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (4000) @(negedge clk);
    // the decimated PIR readouts of both loops
    r0 = 0; r1 = 0; n0 = 0; n1 = 0; i0 = 0; i1 = 0; q0 = 0; q1 = 0; s0 = 0; s1 = 0;
    for (int i = 0; i < 4 * 1024 + 2; i++) begin
      @(negedge clk);
      if (rd[0].valid) begin
        r0 += real'(rd[0].pir) / (1024.0 * 1024.0);
        i0 += real'(rd[0].i) / (1024.0 * 1024.0);
        q0 += real'(rd[0].q) / (1024.0 * 1024.0);
        n0++;
      end
      if (rd[1].valid) begin
        r1 += real'(rd[1].pir) / (1024.0 * 1024.0);
        i1 += real'(rd[1].i) / (1024.0 * 1024.0);
        q1 += real'(rd[1].q) / (1024.0 * 1024.0);
        n1++;
      end
      if (rd[0].q2_valid) s0++;
      if (rd[1].q2_valid) s1++;
    end
    r0 /= n0; r1 /= n1; i0 /= n0; i1 /= n1; q0 /= n0; q1 /= n1;
    // Q in radians: K_d = 16 * A Q LSB per rad
    q0 /= 16.0 * A1; q1 /= 16.0 * A2;
    $display("main I %e (%e), pilot I %e (%e), phase errors %f %f rad, q2 strobes %0d %0d",
             i0, 8.0 * A1 * 32767.0, i1, 8.0 * A2 * 32767.0, q0, q1, s0, s1);
    checks += 6;
    if (i0 < 0.97 * 8.0 * A1 * 32767.0 || i0 > 1.03 * 8.0 * A1 * 32767.0) failures++;
    if (i1 < 0.97 * 8.0 * A2 * 32767.0 || i1 > 1.03 * 8.0 * A2 * 32767.0) failures++;
    if (q0 > 0.05 || q0 < -0.05) failures++;
    if (q1 > 0.05 || q1 < -0.05) failures++;
    if (s0 != 4) failures++;
    if (s1 != 4) failures++;
    $display("main pir %f (16000), pilot pir %f (1600), %0d/%0d readouts", r0, r1, n0, n1);
    checks += 4;
    if (n0 != 4) failures++;
    if (n1 != 4) failures++;
    if (r0 - 16000.0 > 0.5 || 16000.0 - r0 > 0.5) failures++;
    if (r1 - 1600.0 > 0.5 || 1600.0 - r1 > 0.5) failures++;
    // noise on the pilot loop only
    cfg[1].noise_amp = 16'd20000; cfg[1].noise_en = 1;
    repeat (10) @(negedge clk);
    d0 = 0; d1 = 0;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      if (mon[0].after_noise != mon[0].before_noise) d0++;
      if (mon[1].after_noise != mon[1].before_noise) d1++;
    end
    $display("clocks with noise: main %0d, pilot %0d of 1000", d0, d1);
    checks += 2;
    if (d0 != 0) failures++;
    if (d1 < 990) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
