// tb_pm_olg: measures the open-loop gain of a locked ADPLL the way the
// instrument does it, from the two monitor words around the noise adder.
//
// The loop locks to a 1 GHz, 1500 LSB tone with kp = 90, ki = 21 >> 6, and
// the noise switch is closed at full amplitude. With n = after - before the
// injected noise, the estimate is G(f) = -S_{before,n}(f) / S_{after,n}(f),
// averaged over 2048 segments of 1024 clocks (fbin at 0.5, 2 and 8 MHz).
// The result is compared with the loop model
//   G(z) = Kd * 2*pi*8/2^32 * (1 + z^-1)/2 * (kp + ki 2^-si z^-1/(1 - z^-1))
//          * z^-12 / (1 - z^-1),      Kd = 1500 * 32767 * 8 / 2^14
// (phase detector, 16-sample average, PI servo, 12-clock loop delay, phase
// accumulator), within 25 % in magnitude and 15 degrees in phase. The
// unity-gain frequency must lie between 1.5 and 3 MHz.
module tb_pm_olg;
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

  localparam real PI2 = 6.283185307179586;
  localparam real FS  = 4.096e9;
  localparam real A   = 1500.0;
  localparam int  L   = 1024;
  localparam int  NSEG = 2048;
  localparam int  NB  = 3;
  int fbin [NB] = '{1, 4, 16};           // 0.5, 2, 8 MHz
  longint m = 0;

  pm_adpll dut (.clk(clk), .rst(rst), .x(x), .cfg(cfg), .rd(rd), .mon(mon),
                .q_fast(q_fast), .i_fast(i_fast), .pir(pir));

  always #1 clk = ~clk;

  always @(posedge clk) begin
    for (int k = 0; k < NSAMP; k++) begin
      real ph;
      ph = 1.0e9 / FS * real'(m + k); ph = ph - $floor(ph);
      x[k] <= ADC_W'($rtoi($floor(A * $cos(PI2 * ph) + 0.5)));
    end
    m <= m + NSAMP;
  end

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // complex helpers
  function automatic void cmul(input real ar, ai, br, bi, output real cr, ci);
    cr = ar * br - ai * bi; ci = ar * bi + ai * br;
  endfunction

  // loop model at normalized angular frequency w (rad/clock)
  function automatic void model(input real w, output real gr, output real gi);
    real c, zr, zi, tr, ti, ur, ui, den_r, den_i, d2, kd, ki_eff;
    kd = A * 32767.0 * 8.0 / 16384.0;
    c  = kd * PI2 * 8.0 / 4294967296.0;
    ki_eff = 21.0 / 64.0;
    zr = $cos(w); zi = -$sin(w);                  // z^-1
    // 1/(1 - z^-1)
    den_r = 1.0 - zr; den_i = -zi; d2 = den_r * den_r + den_i * den_i;
    ur = den_r / d2; ui = -den_i / d2;
    // servo = kp + ki * z^-1 /(1 - z^-1)
    cmul(zr, zi, ur, ui, tr, ti);
    tr = 90.0 + ki_eff * tr; ti = ki_eff * ti;
    // times (1 + z^-1)/2
    cmul(tr, ti, (1.0 + zr) / 2.0, zi / 2.0, tr, ti);
    // times 1/(1 - z^-1)
    cmul(tr, ti, ur, ui, tr, ti);
    // times z^-12
    cmul(tr, ti, $cos(12.0 * w), -$sin(12.0 * w), tr, ti);
    gr = c * tr; gi = c * ti;
  endfunction

  initial begin
    real sbn_r [NB], sbn_i [NB], san_r [NB], san_i [NB];
    real xb_r [NB], xb_i [NB], xa_r [NB], xa_i [NB], xn_r [NB], xn_i [NB];
    real mag_prev;
    for (int b = 0; b < NB; b++) begin sbn_r[b] = 0; sbn_i[b] = 0; san_r[b] = 0; san_i[b] = 0; end
    cfg = '0;
    cfg.f0 = 32'($rtoi((1.0e9 + 0.5e6) / FS * 4294967296.0));
    cfg.kp = 18'sd90; cfg.ki = 18'sd21; cfg.si = 6; cfg.servo_en = 1;
    cfg.cic_rate = 1024; cfg.q2_rate = 64;
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (3000) @(negedge clk);
    cfg.noise_amp = 16'hFFFF; cfg.noise_en = 1;
    repeat (200) @(negedge clk);
    for (int s = 0; s < NSEG; s++) begin
      for (int b = 0; b < NB; b++) begin
        xb_r[b] = 0; xb_i[b] = 0; xa_r[b] = 0; xa_i[b] = 0; xn_r[b] = 0; xn_i[b] = 0;
      end
      for (int n = 0; n < L; n++) begin
        real bv, av, nv;
        @(negedge clk);
        bv = real'($signed(mon.before_noise - cfg.f0));
        av = real'($signed(mon.after_noise - cfg.f0));
        nv = av - bv;
        for (int b = 0; b < NB; b++) begin
          real w, cr, ci;
          w = PI2 * real'(fbin[b]) * real'(n) / real'(L);
          cr = $cos(w); ci = -$sin(w);
          xb_r[b] += bv * cr; xb_i[b] += bv * ci;
          xa_r[b] += av * cr; xa_i[b] += av * ci;
          xn_r[b] += nv * cr; xn_i[b] += nv * ci;
        end
      end
      for (int b = 0; b < NB; b++) begin
        // X * conj(N)
        sbn_r[b] += xb_r[b] * xn_r[b] + xb_i[b] * xn_i[b];
        sbn_i[b] += xb_i[b] * xn_r[b] - xb_r[b] * xn_i[b];
        san_r[b] += xa_r[b] * xn_r[b] + xa_i[b] * xn_i[b];
        san_i[b] += xa_i[b] * xn_r[b] - xa_r[b] * xn_i[b];
      end
    end
    mag_prev = 0;
    for (int b = 0; b < NB; b++) begin
      real d2, gr, gi, mr, mi, mag, mmag, ph, mph, dph;
      d2 = san_r[b] ** 2 + san_i[b] ** 2;
      // G = -Sbn / San
      gr = -(sbn_r[b] * san_r[b] + sbn_i[b] * san_i[b]) / d2;
      gi = -(sbn_i[b] * san_r[b] - sbn_r[b] * san_i[b]) / d2;
      model(PI2 * real'(fbin[b]) / real'(L), mr, mi);
      mag = $sqrt(gr * gr + gi * gi); mmag = $sqrt(mr * mr + mi * mi);
      ph = $atan2(gi, gr) * 360.0 / PI2; mph = $atan2(mi, mr) * 360.0 / PI2;
      dph = ph - mph;
      if (dph > 180.0) dph -= 360.0;
      if (dph < -180.0) dph += 360.0;
      $display("f = %0.1f MHz: |G| measured %f model %f, phase measured %f model %f deg",
               512.0 * real'(fbin[b]) / real'(L), mag, mmag, ph, mph);
      checks += 2;
      if (mag < 0.75 * mmag || mag > 1.25 * mmag) failures++;
      if (dph > 15.0 || dph < -15.0) failures++;
      // unity gain between the 0.5..2 MHz fbin or 2..8 MHz fbin: 2 MHz magnitude near 1
      if (fbin[b] == 4) begin
        checks++;
        if (mag < 0.5 || mag > 1.5) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
