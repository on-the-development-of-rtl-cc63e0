// tb_pm_zero_meas: phase read out from the decimated PIR, and the
// zero-measurement of two loops fed with the same signal.
//
// Two ADPLLs with different dither seeds track the same 24.8 MHz, 1500 LSB
// tone. The phase of each is rebuilt from its PIR readout alone. With the
// second-order CIC at rate R the readouts y_k overlap so that sum_k y_k / R is
// the sum of the full-rate PIR, and the phase in cycles is
// 8 * sum(PIR) / 2^16. Halfway through, the tone steps by +200 kHz.
// Checks:
//  * the phase advance over 64 readouts after the step equals the input's,
//    2*pi * 24.998 MHz * 64 * R / 512 MHz, within 5 mrad, for both loops;
//  * the difference of the two rebuilt phases (after removing its start
//    value) stays within 5 mrad over the whole run, step included, and its
//    rms is below 2 mrad. This is the zero-measurement: what one loop reads
//    the other must read too.
module tb_pm_zero_meas;
  timeunit 1ns; timeprecision 10ps;
  import pm_pkg::*;
  logic clk = 0, rst = 1;
  logic signed [ADC_W-1:0] x [NSAMP];
  adpll_cfg_t cfg;
  adpll_rd_t  rd  [2];
  adpll_mon_t mon [2];
  logic signed [Q_W-1:0]   q_fast [2];
  logic signed [SUM_W-1:0] i_fast [2];
  logic [PHASE_W-1:0]      pir    [2];
  int checks = 0, failures = 0;

  localparam real PI2 = 6.283185307179586;
  localparam real FS  = 4.096e9;
  localparam real A   = 1500.0;
  localparam real F1  = 24.8e6;
  localparam real DF  = 200.0e3;
  localparam int  R   = 512;
  real f_in = F1;
  real ph_in = 0.0;                  // input phase in cycles, wrapped

  for (genvar p = 0; p < 2; p++) begin : g_pll
    pm_adpll #(.SEED(32'h1357_9BDF + 32'(p) * 32'h2468_ACE1)) u_pll (
      .clk(clk), .rst(rst), .x(x), .cfg(cfg), .rd(rd[p]), .mon(mon[p]),
      .q_fast(q_fast[p]), .i_fast(i_fast[p]), .pir(pir[p]));
  end

  always #1 clk = ~clk;

  always @(posedge clk) begin
    for (int k = 0; k < NSAMP; k++) begin
      real ph;
      ph = ph_in + f_in / FS * real'(k);
      x[k] <= ADC_W'($rtoi($floor(A * $cos(PI2 * ph) + 0.5)));
    end
    ph_in = ph_in + f_in / FS * real'(NSAMP);
    ph_in = ph_in - $floor(ph_in);
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real phi [2];                    // rebuilt phase in rad
    real d0, d, dmax, dsum2, adv [2], adv_in;
    int  nd;
    cfg = '0;
    cfg.f0 = 32'($rtoi((F1 + 0.3e6) / FS * 4294967296.0));
    cfg.kp = 18'sd90; cfg.ki = 18'sd21; cfg.si = 6; cfg.servo_en = 1;
    cfg.cic_rate = R; cfg.q2_rate = 64;
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (8000) @(negedge clk);
    phi[0] = 0; phi[1] = 0; dmax = 0; dsum2 = 0; nd = 0; d0 = 0;
    for (int k = 0; k < 320; k++) begin
      @(posedge clk iff rd[0].valid);
      // both loops share the readout schedule
      for (int p = 0; p < 2; p++)
        phi[p] += PI2 * 8.0 * real'(rd[p].pir) / real'(R) / 65536.0;
      if (k == 0) d0 = phi[0] - phi[1];
      d = phi[0] - phi[1] - d0;
      if (d < 0) d = -d;
      if (d > dmax) dmax = d;
      dsum2 += d * d; nd++;
      if (k == 100) f_in = F1 + DF;          // frequency step
      if (k == 200) begin adv[0] = phi[0]; adv[1] = phi[1]; end
      if (k == 264) begin adv[0] = phi[0] - adv[0]; adv[1] = phi[1] - adv[1]; end
    end
    adv_in = PI2 * (F1 + DF) * 64.0 * real'(R) / 512.0e6;
    $display("advance over 64 readouts: %f %f rad, input %f rad", adv[0], adv[1], adv_in);
    $display("zero measurement: max %e rad, rms %e rad", dmax, $sqrt(dsum2 / nd));
    checks += 4;
    if (adv[0] - adv_in > 5.0e-3 || adv_in - adv[0] > 5.0e-3) failures++;
    if (adv[1] - adv_in > 5.0e-3 || adv_in - adv[1] > 5.0e-3) failures++;
    if (dmax > 5.0e-3) failures++;
    if ($sqrt(dsum2 / nd) > 2.0e-3) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
