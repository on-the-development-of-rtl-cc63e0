// pm_adpll: one all-digital phase-locked loop of the phasemeter with its readout.
//
// The loop (Fig. 1 and Fig. 2 of the paper):
//   PIR (16 bit) -> 8 phase accumulators -> 8 sine/cosine LUTs  (the NCO)
//   8 ADC samples x NCO -> 8 I and 8 Q products                  (demodulators)
//   rolling sum of 16 products for I and for Q                   (low-pass filter)
//   dithered truncation of Q, then 2^-C                          (Q, F_G)
//   PI servo -> + f0 (+ Gaussian noise) -> dithered truncation   (PIR)
// When locked the PIR is the input frequency in units of 4.096 GHz / 2^16, Q is
// the phase error (times the phase detector gain) and I scales with the input
// amplitude. PIR, Q and I are decimated by second-order CICs; Q is also
// prefiltered, squared and averaged by a first-order CIC for the residual
// phase error. The words before and after the noise adder leave as monitor
// taps for an external logic analyser.
//
// Loop delay, from a PIR change to the servo output that reacts to it: phase
// accumulator 1, LUT 1, mixer 1, low-pass 4, Q truncation 1, servo 2 and PIR 2
// clocks, 12 clocks at 512 MHz in total (the D of Fig. 2). The paper does not
// give its register count; this split is this design's.
//
// The dither for both truncations comes from one LFSR per ADPLL (32 steps per
// clock, so each clock brings fresh bits), seeded by
// SEED; SEED also seeds the noise generator.
module pm_adpll
  import pm_pkg::*;
#(
  parameter logic [31:0] SEED = 32'h0000_0001
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic signed [ADC_W-1:0] x [NSAMP],
  input  adpll_cfg_t              cfg,
  output adpll_rd_t               rd,
  output adpll_mon_t              mon,
  output logic signed [Q_W-1:0]   q_fast,   // full-rate truncated Q
  output logic signed [SUM_W-1:0] i_fast,   // full-rate I sum
  output logic [PHASE_W-1:0]      pir       // full-rate truncated PIR
);
  // ---------------- NCO ----------------
  logic [PHASE_W-1:0]          phase [NSAMP];
  logic signed [LUT_AMP_W-1:0] sin_v [NSAMP];
  logic signed [LUT_AMP_W-1:0] cos_v [NSAMP];

  pm_phase_acc u_pa (.clk(clk), .rst(rst), .pir(pir), .phase(phase));

  for (genvar k = 0; k < NSAMP; k++) begin : g_lut
    pm_sincos_lut u_lut (.clk(clk), .phase(phase[k]), .sin_o(sin_v[k]), .cos_o(cos_v[k]));
  end

  // ---------------- demodulation and low-pass ----------------
  logic signed [PROD_W-1:0] i_prod [NSAMP];
  logic signed [PROD_W-1:0] q_prod [NSAMP];
  logic signed [SUM_W-1:0]  q_sum;

  pm_demod u_demod (.clk(clk), .x(x), .sin_i(sin_v), .cos_i(cos_v),
                    .i_prod(i_prod), .q_prod(q_prod));

  pm_avg16 u_avg_i (.clk(clk), .rst(rst), .d(i_prod), .sum16(i_fast));
  pm_avg16 u_avg_q (.clk(clk), .rst(rst), .d(q_prod), .sum16(q_sum));

  // ---------------- Q truncation, gain, servo ----------------
  logic [31:0]               dith;
  logic signed [Q_W-1:0]     q_gain;
  logic signed [PIR_W-1:0]   servo_u;
  logic signed [PIR_W-1:0]   noise;

  pm_lfsr #(.SEED(SEED), .STEPS(32)) u_dither (.clk(clk), .rst(rst), .state(dith));

  pm_q_trunc u_qt (.clk(clk), .rst(rst), .sum_i(q_sum), .dither(dith[Q_DROP-1:0]),
                   .shift_c(cfg.q_shift), .q_o(q_fast), .q_gain_o(q_gain));

  pm_pi_servo u_servo (.clk(clk), .rst(rst), .en(cfg.servo_en), .e(q_gain),
                       .kp(cfg.kp), .ki(cfg.ki), .sp(cfg.sp), .si(cfg.si), .u(servo_u));

  // ---------------- noise injection and PIR ----------------
  pm_gauss_noise #(.SEED(~SEED)) u_noise (.clk(clk), .rst(rst), .en(cfg.noise_en),
                                          .amp(cfg.noise_amp), .noise(noise));

  pm_pir u_pir (.clk(clk), .rst(rst), .f0(cfg.f0), .servo_u(servo_u), .noise(noise),
                .dither(dith[31 -: PIR_W-PHASE_W]),
                .before_noise(mon.before_noise), .after_noise(mon.after_noise), .pir(pir));

  // ---------------- readout ----------------
  logic cic_v_pir, cic_v_q, cic_v_i;

  pm_cic2 #(.IN_W(PHASE_W + 1)) u_cic_pir (.clk(clk), .rst(rst), .in_en(1'b1),
      .x($signed({1'b0, pir})), .rate(cfg.cic_rate), .y(rd.pir), .out_valid(cic_v_pir));
  pm_cic2 #(.IN_W(Q_W)) u_cic_q (.clk(clk), .rst(rst), .in_en(1'b1),
      .x(q_fast), .rate(cfg.cic_rate), .y(rd.q), .out_valid(cic_v_q));
  pm_cic2 #(.IN_W(SUM_W)) u_cic_i (.clk(clk), .rst(rst), .in_en(1'b1),
      .x(i_fast), .rate(cfg.cic_rate), .y(rd.i), .out_valid(cic_v_i));

  // The three CICs share reset and rate, so their strobes coincide.
  assign rd.valid = cic_v_pir;

  pm_q2_meter u_q2 (.clk(clk), .rst(rst), .q(q_fast), .rate(cfg.q2_rate),
                    .y(rd.q2), .out_valid(rd.q2_valid));

  always_ff @(posedge clk) begin
    if (!rst) assert (cic_v_pir == cic_v_q && cic_v_q == cic_v_i)
      else $error("pm_adpll: CIC readout strobes out of step");
  end
endmodule
