// tb_pm_workloads: the tracking scenarios used to characterise the phasemeter,
// run on one ADPLL with the loop gains of a ~2 MHz unity-gain frequency
// (kp = 90, ki = 21 >> 6 for a 1500 LSB input).
//  1. Frequency modulation: a 1 GHz carrier modulated at 30 kHz with 4 MHz
//     peak-to-peak deviation (peak rate 377 GHz/s, above the 240 GHz/s of the
//     paper's test). Over 1.2 modulation periods the phase error must stay
//     below 0.3 rad (no cycle slip) and the 64-clock PIR mean must follow the
//     instantaneous frequency within 100 kHz.
//  2. Acquisition: the loop starts with f0 4.1 MHz away from a 2 GHz tone and
//     must lock (PIR mean 32000 within 0.5).
//  3. A 24.8 MHz tone (the low-frequency zero-measurement tone) must lock to
//     PIR 396.8.
module tb_pm_workloads;
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
  localparam real KD  = A * 16.0;

  real fc = 1.0e9, fm = 30.0e3, dev = 0.0;   // carrier, modulation rate, peak deviation
  longint m = 0;

  pm_adpll dut (.clk(clk), .rst(rst), .x(x), .cfg(cfg), .rd(rd), .mon(mon),
                .q_fast(q_fast), .i_fast(i_fast), .pir(pir));

  always #1 clk = ~clk;

  function automatic real inst_freq(longint s);
    return fc + dev * $sin(PI2 * fm * real'(s) / FS);
  endfunction

  always @(posedge clk) begin
    for (int k = 0; k < NSAMP; k++) begin
      real t, ph;
      t  = real'(m + k) / FS;
      ph = fc * t; ph = ph - $floor(ph);
      // FM term: integral of dev*sin(2 pi fm t) = -(dev/fm)/(2 pi) cos(...)
      x[k] <= ADC_W'($rtoi($floor(A * $cos(PI2 * ph - dev / fm * $cos(PI2 * fm * t)) + 0.5)));
    end
    m <= m + NSAMP;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic restart(input real f_tone, input real f_start);
    rst = 1; fc = f_tone;
    cfg.f0 = 32'($rtoi(f_start / FS * 4294967296.0));
    repeat (3) @(negedge clk);
    rst = 0;
  endtask

  task automatic mean_pir(input int n, output real pm);
    pm = 0;
    for (int i = 0; i < n; i++) begin @(negedge clk); pm += real'(pir); end
    pm /= n;
  endtask

  initial begin
    real pm, qmax, ferr_max;
    int slips;
    cfg = '0;
    cfg.kp = 18'sd90; cfg.ki = 18'sd21; cfg.si = 6; cfg.servo_en = 1;
    cfg.cic_rate = 1024; cfg.q2_rate = 64;

    // 1. FM tracking
    dev = 2.0e6;                  // modulation on from the start: no phase step
    restart(1.0e9, 1.0e9);
    repeat (3000) @(negedge clk);
    qmax = 0; ferr_max = 0;
    for (int blk = 0; blk < 320; blk++) begin   // 320 * 64 clocks = 1.2 modulation periods
      real sp, fi;
      sp = 0;
      fi = inst_freq(m + 32 * NSAMP);
      for (int i = 0; i < 64; i++) begin
        @(negedge clk);
        sp += real'(pir);
        if (real'(q_fast) / KD > qmax) qmax = real'(q_fast) / KD;
        if (-real'(q_fast) / KD > qmax) qmax = -real'(q_fast) / KD;
      end
      sp = sp / 64.0 * 62500.0;
      if (sp - fi > ferr_max) ferr_max = sp - fi;
      if (fi - sp > ferr_max) ferr_max = fi - sp;
    end
    $display("FM 30 kHz, 4 MHz p-p: max |phase error| %f rad, max frequency error %f kHz",
             qmax, ferr_max / 1e3);
    checks += 2;
    if (qmax > 0.3) failures++;
    if (ferr_max > 100.0e3) failures++;
    dev = 0.0;

    // 2. acquisition from 4.1 MHz away
    restart(2.0e9, 2.0e9 + 4.1e6);
    repeat (6000) @(negedge clk);
    mean_pir(2048, pm);
    $display("acquisition from +4.1 MHz: pir %f (32000)", pm);
    checks++;
    if (pm - 32000.0 > 0.5 || 32000.0 - pm > 0.5) failures++;
    restart(2.0e9, 2.0e9 - 4.1e6);
    repeat (6000) @(negedge clk);
    mean_pir(2048, pm);
    $display("acquisition from -4.1 MHz: pir %f (32000)", pm);
    checks++;
    if (pm - 32000.0 > 0.5 || 32000.0 - pm > 0.5) failures++;

    // 3. LISA-band tone
    restart(24.8e6, 25.3e6);
    repeat (6000) @(negedge clk);
    mean_pir(8192, pm);
    $display("24.8 MHz tone: pir %f (396.8)", pm);
    checks++;
    if (pm - 396.8 > 0.5 || 396.8 - pm > 0.5) failures++;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
