// tb_pm_dual_bw: one signal tracked by the two ADPLLs of a channel at two
// loop bandwidths.
//
// A 1 GHz, 1500 LSB tone carries 0.3 rad of phase modulation at 250 kHz, a
// stand-in for the phase noise of a laser beat. Loop 0 runs with kp = 90
// (unity gain near 2 MHz), loop 1 with kp = 72 >> 4 = 4.5 and ki = 1 >> 10
// (near 100 kHz). Both start on the tone and must stay locked (the mean of
// the decimated PIR equal to the tone within 0.05 LSB, with no cycle slip).
// The residual phase error read from each loop's Q^2 must agree with the
// loop model, 0.3 * |1/(1 + G)| / sqrt(2), within 10 %; the low-bandwidth
// loop leaves about 11 times more. Because I follows cos of the residual
// error, the low-bandwidth loop reads a smaller amplitude. The ratio
// I1 / I0 must match J0(e1) / J0(e0) within 0.3 %, where e is the peak
// residual error.
module tb_pm_dual_bw;
  timeunit 1ns; timeprecision 10ps;
  import pm_pkg::*;
  logic clk = 0, rst = 1;
  logic signed [ADC_W-1:0] x [NSAMP];
  adpll_cfg_t cfg [2];
  adpll_rd_t  rd  [2];
  adpll_mon_t mon [2];
  int checks = 0, failures = 0;

  localparam real PI2  = 6.283185307179586;
  localparam real FS   = 4.096e9;
  localparam real A    = 1500.0;
  localparam real FM   = 250.0e3;
  localparam real BETA = 0.3;
  localparam real KD   = A * 32767.0 * 8.0 / 16384.0;
  localparam int  R    = 2048;                 // one modulation period
  localparam int  R2   = 128;                  // 128 * 16 = 2048 clocks
  longint m = 0;

  pm_channel dut (.clk(clk), .rst(rst), .x(x), .cfg(cfg), .rd(rd), .mon(mon));

  always #1 clk = ~clk;

  always @(posedge clk) begin
    for (int k = 0; k < NSAMP; k++) begin
      real ph, pm;
      ph = 1.0e9 / FS * real'(m + k); ph = ph - $floor(ph);
      pm = FM / FS * real'(m + k); pm = pm - $floor(pm);
      x[k] <= ADC_W'($rtoi($floor(A * $cos(PI2 * ph + BETA * $sin(PI2 * pm)) + 0.5)));
    end
    m <= m + NSAMP;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void cmul(input real ar, ai, br, bi, output real cr, ci);
    cr = ar * br - ai * bi; ci = ar * bi + ai * br;
  endfunction

  // |1/(1 + G)| of the loop model (see tb_pm_olg) at w rad/clock
  function automatic real err_mag(input real w, input real kp, input real ki_eff);
    real c, zr, zi, tr, ti, ur, ui, den_r, den_i, d2;
    c  = KD * PI2 * 8.0 / 4294967296.0;
    zr = $cos(w); zi = -$sin(w);
    den_r = 1.0 - zr; den_i = -zi; d2 = den_r * den_r + den_i * den_i;
    ur = den_r / d2; ui = -den_i / d2;
    cmul(zr, zi, ur, ui, tr, ti);
    tr = kp + ki_eff * tr; ti = ki_eff * ti;
    cmul(tr, ti, (1.0 + zr) / 2.0, zi / 2.0, tr, ti);
    cmul(tr, ti, ur, ui, tr, ti);
    cmul(tr, ti, $cos(12.0 * w), -$sin(12.0 * w), tr, ti);
    tr = 1.0 + c * tr; ti = c * ti;
    return 1.0 / $sqrt(tr * tr + ti * ti);
  endfunction

  // Bessel J0 by its power series
  function automatic real j0(input real z);
    real t, s;
    t = 1.0; s = 1.0;
    for (int k = 1; k < 12; k++) begin
      t = -t * (z / 2.0) * (z / 2.0) / real'(k * k);
      s += t;
    end
    return s;
  endfunction

  initial begin
    real pir_m [2], i_m [2], q2_m [2], e_pk [2], expect_rms [2], rms [2];
    int  n_rd [2], n_q2 [2];
    real w;
    for (int p = 0; p < 2; p++) begin
      cfg[p] = '0;
      cfg[p].f0 = 32'($rtoi(1.0e9 / FS * 4294967296.0));
      cfg[p].servo_en = 1; cfg[p].cic_rate = R; cfg[p].q2_rate = R2;
    end
    cfg[0].kp = 18'sd90; cfg[0].ki = 18'sd21; cfg[0].si = 6;
    cfg[1].kp = 18'sd72; cfg[1].sp = 4; cfg[1].ki = 18'sd1; cfg[1].si = 10;
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (40000) @(negedge clk);
    for (int p = 0; p < 2; p++) begin
      pir_m[p] = 0; i_m[p] = 0; q2_m[p] = 0; n_rd[p] = 0; n_q2[p] = 0;
    end
    for (int i = 0; i < 16 * R; i++) begin
      @(negedge clk);
      for (int p = 0; p < 2; p++) begin
        if (rd[p].valid) begin
          pir_m[p] += real'(rd[p].pir) / (real'(R) * real'(R));
          i_m[p]   += real'(rd[p].i) / (real'(R) * real'(R));
          n_rd[p]++;
        end
        if (rd[p].q2_valid) begin
          q2_m[p] += real'(rd[p].q2) / real'(R2) / (KD * KD);
          n_q2[p]++;
        end
      end
    end
    w = PI2 * FM / 512.0e6;
    e_pk[0] = BETA * err_mag(w, 90.0, 21.0 / 64.0);
    e_pk[1] = BETA * err_mag(w, 4.5, 1.0 / 1024.0);
    for (int p = 0; p < 2; p++) begin
      pir_m[p] /= n_rd[p]; i_m[p] /= n_rd[p]; q2_m[p] /= n_q2[p];
      rms[p] = $sqrt(q2_m[p]);
      expect_rms[p] = e_pk[p] / $sqrt(2.0);
      $display("loop %0d: pir %f (16000), residual %f rad rms (model %f), I %e",
               p, pir_m[p], rms[p], expect_rms[p], i_m[p]);
      checks += 3;
      if (n_rd[p] < 15) failures++;
      if (pir_m[p] - 16000.0 > 0.05 || 16000.0 - pir_m[p] > 0.05) failures++;
      if (rms[p] < 0.9 * expect_rms[p] || rms[p] > 1.1 * expect_rms[p]) failures++;
    end
    $display("I1/I0 = %f, J0 model %f", i_m[1] / i_m[0], j0(e_pk[1]) / j0(e_pk[0]));
    checks += 2;
    if (rms[1] < 4.0 * rms[0]) failures++;
    if (i_m[1] / i_m[0] - j0(e_pk[1]) / j0(e_pk[0]) > 0.003 ||
        j0(e_pk[1]) / j0(e_pk[0]) - i_m[1] / i_m[0] > 0.003) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
