// tb_pm_adpll: closed-loop test of one ADPLL on a synthetic 4.096 GSPS tone.
//
// The testbench computes eight samples per clock of A*cos(2*pi*f*m + phi) with
// f = 1 GHz (PIR 16000 when locked) and A = 1500 LSB, rounded to 12 bits.
//  1. Loop open (servo_en = 0): the PIR mean must equal f0 / 2^16.
//  2. Loop closed, f0 offset by +1 MHz and by -2 MHz: after settling, the PIR
//     mean must be 16000 +- 0.5, the mean phase error |Q|/Kd below 0.05 rad and
//     I near A*32767*8. The decimated PIR, Q, I readouts (R = 256) must appear
//     every 256 clocks and agree with the full-rate means; the Q^2 readout must
//     appear every 16*16 clocks and be small.
//  3. Noise injection on: after - before must have the deviation of the noise
//     generator, and the loop must stay locked.
module tb_pm_adpll;
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
  localparam real FIN  = 1.0e9;
  localparam real AMPL = 1500.0;
  localparam real KD   = AMPL * 16.0;       // Q per radian: A/2 * 32767 * 16 / 2^14
  longint m = 0;                            // sample index

  pm_adpll dut (.clk(clk), .rst(rst), .x(x), .cfg(cfg), .rd(rd), .mon(mon),
                .q_fast(q_fast), .i_fast(i_fast), .pir(pir));

  always #1 clk = ~clk;

  // signal source: new samples after every rising edge
  always @(posedge clk) begin
    for (int k = 0; k < NSAMP; k++) begin
      real ph;
      ph = FIN / FS * real'(m + k);
      ph = ph - $floor(ph);
      x[k] <= ADC_W'($rtoi($floor(AMPL * $cos(PI2 * ph + 0.3) + 0.5)));
    end
    m <= m + NSAMP;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // readout monitors
  int n_rd = 0, n_q2 = 0, last_rd_cycle = 0, cyc = 0, rd_gap_err = 0;
  real rd_pir_last, rd_q_last, rd_i_last, q2_last;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rd.valid && !rst) begin
      if (n_rd > 0 && cyc - last_rd_cycle != int'(cfg.cic_rate)) begin rd_gap_err++; $display("gap %0d at %0d", cyc - last_rd_cycle, cyc); end
      last_rd_cycle <= cyc;
      n_rd <= n_rd + 1;
      rd_pir_last = real'(rd.pir) / (real'(cfg.cic_rate) ** 2);
      rd_q_last   = real'(rd.q)   / (real'(cfg.cic_rate) ** 2);
      rd_i_last   = real'(rd.i)   / (real'(cfg.cic_rate) ** 2);
    end
    if (rd.q2_valid && !rst) begin
      n_q2 <= n_q2 + 1;
      q2_last = real'(rd.q2) / real'(cfg.q2_rate);
    end
  end

  task automatic measure(input int n, output real pm, output real qm, output real im, output real dsd);
    real sp, sq, si, s1, s2;
    sp = 0; sq = 0; si = 0; s1 = 0; s2 = 0;
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      sp += real'(pir); sq += real'(q_fast); si += real'(i_fast);
      s1 += real'($signed(mon.after_noise - mon.before_noise));
      s2 += real'($signed(mon.after_noise - mon.before_noise)) ** 2;
    end
    pm = sp / n; qm = sq / n; im = si / n;
    dsd = $sqrt(s2 / n - (s1 / n) ** 2);
  endtask

  task automatic lock_test(input real offset_hz, input bit noise);
    real pm, qm, im, dsd;
    int rd0, q20;
    cfg.f0 = 32'($rtoi((FIN + offset_hz) / FS * 4294967296.0));
    cfg.servo_en = 0;
    cfg.noise_en = noise;
    repeat (300) @(negedge clk);
    measure(256, pm, qm, im, dsd);
    $display("open loop: pir mean %f expected %f", pm, real'(cfg.f0) / 65536.0);
    checks++;
    if (pm - real'(cfg.f0) / 65536.0 > 0.5 || real'(cfg.f0) / 65536.0 - pm > 0.5) failures++;
    cfg.servo_en = 1;
    repeat (4000) @(negedge clk);
    rd0 = n_rd; q20 = n_q2;
    measure(2048, pm, qm, im, dsd);
    $display("offset %0.0f Hz noise %0d: pir %f  phase err %f rad  I %e (exp %e)  dnoise sd %f",
             offset_hz, noise, pm, qm / KD, im, AMPL * 32767.0 * 8.0, dsd);
    checks += 4;
    if (pm - 16000.0 > 0.5 || 16000.0 - pm > 0.5) failures++;
    if (qm / KD > 0.05 || qm / KD < -0.05) failures++;
    if (im < 0.97 * AMPL * 32767.0 * 8.0 || im > 1.03 * AMPL * 32767.0 * 8.0) failures++;
    if (noise) begin
      if (dsd < 0.9 * 0.577 * real'(cfg.noise_amp) || dsd > 1.1 * 0.577 * real'(cfg.noise_amp)) failures++;
    end else begin
      if (dsd != 0.0) failures++;
    end
    // readouts
    $display("readout: %0d strobes, pir %f q %f i %e, q2 %0d strobes %f", n_rd - rd0, rd_pir_last,
             rd_q_last, rd_i_last, n_q2 - q20, q2_last);
    checks += 6;
    if (n_rd - rd0 != 8) failures++;
    if (n_q2 - q20 != 8) failures++;
    if (rd_pir_last - 16000.0 > 0.5 || 16000.0 - rd_pir_last > 0.5) failures++;
    if (rd_q_last / KD > 0.05 || rd_q_last / KD < -0.05) failures++;
    if (rd_i_last < 0.97 * AMPL * 32767.0 * 8.0 || rd_i_last > 1.03 * AMPL * 32767.0 * 8.0) failures++;
    if (q2_last > (0.05 * KD) ** 2) failures++;
  endtask

  initial begin
    cfg = '0;
    cfg.kp = 18'sd90; cfg.sp = 0;
    cfg.ki = 18'sd21; cfg.si = 6;
    cfg.q_shift = 0;
    cfg.cic_rate = 256;
    cfg.q2_rate  = 16;
    cfg.noise_amp = 16'd30000;
    repeat (3) @(negedge clk);
    rst = 0;
    lock_test(1.0e6, 0);
    lock_test(-2.0e6, 0);
    lock_test(0.5e6, 1);
    checks++;
    if (rd_gap_err != 0) begin failures++; $display("readout spacing errors: %0d", rd_gap_err); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
