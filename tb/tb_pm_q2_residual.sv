// tb_pm_q2_residual: the Q^2 readout as a residual phase error meter, at
// several loop bandwidths.
//
// A 1 GHz, 1500 LSB tone carries a 1 MHz sinusoidal phase modulation of
// 0.2 rad. The loop follows it only partly: the part it misses, the residual
// phase error, is the modulation times the error function S = 1/(1 + G(f))
// of the loop. The Q^2 readout, divided by the readout length and by K_d^2
// (K_d = 16 * A Q LSB per rad), gives the mean square residual phase error.
// For four proportional gains kp = 30, 60, 90, 120 (ki scaled with kp,
// unity-gain frequencies about 0.7 to 2.7 MHz) the rms from the readout,
// after subtracting the floor measured without modulation, must agree with
//   0.2 * |S(1 MHz)| * |(1 + z^-1)/2| * |16-clock box| / sqrt(2)
// within 10 %, and it must fall as the gain rises. The loop model is the one
// of tb_pm_olg. The readout length is R = 256 blocks of 16 clocks, 8 periods
// of the modulation.
module tb_pm_q2_residual;
  timeunit 1ns; timeprecision 10ps;
  import pm_pkg::*;
  logic clk = 0, rst = 1;
  logic signed [ADC_W-1:0] x [NSAMP];
  adpll_cfg_t cfg;
  adpll_rd_t  rd;
  adpll_mon_t mon;
  logic signed [Q_W-1:0]   q_fast;
  logic signed [SUM_W-1:0] i_fast;
  logic [PHASE_W-1:0]      pir;
  int checks = 0, failures = 0;

  localparam real PI2  = 6.283185307179586;
  localparam real FS   = 4.096e9;
  localparam real A    = 1500.0;
  localparam real FM   = 1.0e6;
  localparam real KD   = A * 32767.0 * 8.0 / 16384.0;
  localparam int  R2   = 256;
  real beta = 0.0;
  longint m = 0;

  pm_adpll dut (.clk(clk), .rst(rst), .x(x), .cfg(cfg), .rd(rd), .mon(mon),
                .q_fast(q_fast), .i_fast(i_fast), .pir(pir));

  always #1 clk = ~clk;

  always @(posedge clk) begin
    for (int k = 0; k < NSAMP; k++) begin
      real ph, pm;
      ph = 1.0e9 / FS * real'(m + k); ph = ph - $floor(ph);
      pm = FM / FS * real'(m + k); pm = pm - $floor(pm);
      x[k] <= ADC_W'($rtoi($floor(A * $cos(PI2 * ph + beta * $sin(PI2 * pm)) + 0.5)));
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

  // |1/(1 + G)| of the loop model at w rad/clock
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

  // mean of the next n Q^2 readouts, in rad^2
  task automatic read_q2(input int n, output real ms);
    ms = 0;
    repeat (2) @(posedge rd.q2_valid);          // skip a partial block
    for (int i = 0; i < n; i++) begin
      @(posedge clk iff rd.q2_valid);
      ms += real'(rd.q2) / real'(R2) / (KD * KD);
    end
    ms /= n;
  endtask

  initial begin
    int  kps [4] = '{30, 60, 90, 120};
    int  kis [4] = '{7, 14, 21, 28};
    real floor_ms, ms, rms, w, expect_rms, prev;
    cfg = '0;
    cfg.f0 = 32'($rtoi(1.0e9 / FS * 4294967296.0));
    cfg.kp = 18'sd90; cfg.ki = 18'sd21; cfg.si = 6; cfg.servo_en = 1;
    cfg.cic_rate = 4096; cfg.q2_rate = R2;
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (4000) @(negedge clk);
    read_q2(4, floor_ms);
    $display("floor without modulation: %e rad rms", $sqrt(floor_ms));
    beta = 0.2;
    w = PI2 * FM / 512.0e6;
    prev = 1.0;
    for (int g = 0; g < 4; g++) begin
      real avg_mag, box_mag;
      cfg.kp = 18'(kps[g]); cfg.ki = 18'(kis[g]);
      repeat (8000) @(negedge clk);
      read_q2(4, ms);
      rms = $sqrt(ms - floor_ms);
      avg_mag = $cos(w / 2.0);                       // |(1 + z^-1)/2|
      box_mag = $sin(8.0 * w) / (16.0 * $sin(w / 2.0)); // 16-clock box
      expect_rms = 0.2 * err_mag(w, real'(kps[g]), real'(kis[g]) / 64.0)
                   * avg_mag * box_mag / $sqrt(2.0);
      $display("kp %0d: residual %f rad rms, model %f", kps[g], rms, expect_rms);
      checks += 2;
      if (rms < 0.9 * expect_rms || rms > 1.1 * expect_rms) failures++;
      if (rms >= prev) failures++;
      prev = rms;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
