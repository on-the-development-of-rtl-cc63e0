// tb_ghz_phasemeter: end-to-end test of the full eight-channel, sixteen-ADPLL
// core at its default size.
//
// Channel c receives a main tone at PIR 4000 + 3800*c (250 MHz .. 1.91 GHz,
// 1500 LSB) plus a pilot tone at PIR 1600 + 200*c (100 .. 187.5 MHz, 500 LSB),
// computed as 4.096 GSPS samples, eight per clock. Everything is set through
// the register bus, as the processing system would:
//  1. all 16 loops configured with the servo off (open loop); the registers
//     are read back, and the decimated PIR of every loop must equal f0;
//  2. servo switched on: every loop must pull in from its offset start
//     frequency and its decimated PIR must settle on its own tone;
//  3. the noise switch of loop 2 is closed: its monitor words must differ by
//     noise of the programmed amplitude while it stays locked;
//  4. the readout rate of loop 0 is changed at run time and the new strobe
//     spacing checked.
// Each mechanism is counted and a failure is counted for one that never
// happened. Readout rates are set low (R = 512, Q^2 R = 32) by register to keep
// the run short; no parameter of the design is changed.
module tb_ghz_phasemeter;
  timeunit 1ns; timeprecision 10ps;
  import pm_pkg::*;
  localparam int NCH = 8, NP = 16;
  localparam real PI2 = 6.283185307179586;

  logic clk = 0, rst = 1;
  logic signed [ADC_W-1:0] adc [NCH][NSAMP];
  logic        we = 0;
  logic [6:0]  wa = '0, ra = '0;
  logic [31:0] wd = '0, rdat;
  adpll_rd_t   rd  [NP];
  adpll_mon_t  mon [NP];
  int checks = 0, failures = 0;

  ghz_phasemeter dut (.clk(clk), .rst(rst), .adc(adc), .reg_wr_en(we), .reg_wr_addr(wa),
      .reg_wr_data(wd), .reg_rd_addr(ra), .reg_rd_data(rdat), .rd(rd), .mon(mon));

  always #1 clk = ~clk;

  function automatic real tone_pir(int p);
    return (p % 2 == 0) ? real'(4000 + 3800 * (p / 2)) : real'(1600 + 200 * (p / 2));
  endfunction

  // sample source
  longint m = 0;
  always @(posedge clk) begin
    for (int c = 0; c < NCH; c++)
      for (int k = 0; k < NSAMP; k++) begin
        real p1, p2;
        p1 = tone_pir(2 * c) / 65536.0 * real'(m + k);     p1 = p1 - $floor(p1);
        p2 = tone_pir(2 * c + 1) / 65536.0 * real'(m + k); p2 = p2 - $floor(p2);
        adc[c][k] <= ADC_W'($rtoi($floor(1500.0 * $cos(PI2 * p1 + 0.1 * c)
                                         + 500.0 * $cos(PI2 * p2 + 2.0) + 0.5)));
      end
    m <= m + NSAMP;
  end

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // readout capture
  real last_pir [NP];
  real rate_now [NP];
  int  n_strobe [NP];
  int  n_q2 = 0, cyc = 0, last_cyc0 = 0, gap0 = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (!rst) begin
      for (int p = 0; p < NP; p++)
        if (rd[p].valid) begin
          last_pir[p] = real'(rd[p].pir) / (rate_now[p] * rate_now[p]);
          n_strobe[p]++;
          if (p == 0) begin gap0 = cyc - last_cyc0; last_cyc0 = cyc; end
        end
      for (int p = 0; p < NP; p++) if (rd[p].q2_valid) n_q2++;
    end
  end

  task automatic wr(input int p, input int r, input logic [31:0] v);
    @(negedge clk); wa = 7'(8 * p + r); wd = v; we = 1;
    @(negedge clk); we = 0;
  endtask

  logic [31:0] f0 [NP];
  int n_open = 0, n_lock = 0, n_noise = 0, n_rate = 0, n_regs = 0;

  initial begin
    real s1, s2, sd;
    for (int p = 0; p < NP; p++) begin n_strobe[p] = 0; rate_now[p] = 512.0; last_pir[p] = 0; end
    repeat (3) @(negedge clk);
    rst = 0;
    // 1. configure, servo off
    for (int p = 0; p < NP; p++) begin
      automatic real off = (p % 2 == 0) ? 1.0e6 : -0.5e6;
      f0[p] = 32'($rtoi((tone_pir(p) * 62500.0 + off) / 4.096e9 * 4294967296.0));
      wr(p, 0, f0[p]);
      wr(p, 1, (p % 2 == 0) ? 32'd90 : 32'd270);
      wr(p, 2, (p % 2 == 0) ? 32'd21 : 32'd63);
      wr(p, 3, 32'h0000_0600);          // sp 0, si 6, C 0, servo off
      wr(p, 4, 32'd30000);              // noise amplitude, switch open
      wr(p, 5, 32'd512);
      wr(p, 6, 32'd32);
    end
    for (int p = 0; p < NP; p++) begin
      ra = 7'(8 * p); #0.1;
      checks++; if (rdat != f0[p]) failures++; else n_regs++;
      ra = 7'(8 * p + 5); #0.1;
      checks++; if (rdat != 512) failures++; else n_regs++;
    end
    repeat (2200) @(negedge clk);   // > 2R + R: the CIC window lies entirely after the writes
    for (int p = 0; p < NP; p++) begin
      automatic real e = real'(f0[p]) / 65536.0;
      checks++;
      if (last_pir[p] - e > 0.5 || e - last_pir[p] > 0.5) begin
        failures++; $display("open loop %0d: %f exp %f", p, last_pir[p], e);
      end else n_open++;
    end
    // 2. close all loops
    for (int p = 0; p < NP; p++) wr(p, 3, 32'h0100_0600);
    repeat (5000) @(negedge clk);
    for (int p = 0; p < NP; p++) begin
      checks++;
      if (last_pir[p] - tone_pir(p) > 0.5 || tone_pir(p) - last_pir[p] > 0.5) begin
        failures++; $display("lock %0d: %f exp %f", p, last_pir[p], tone_pir(p));
      end else n_lock++;
    end
    // 3. noise injection on loop 2
    wr(2, 4, 32'h8000_0000 | 32'd30000);
    repeat (10) @(negedge clk);
    s1 = 0; s2 = 0;
    for (int i = 0; i < 2000; i++) begin
      real d;
      @(negedge clk);
      d = real'($signed(mon[2].after_noise - mon[2].before_noise));
      if (d != 0.0) n_noise++;
      s1 += d; s2 += d * d;
      checks++;
      if (mon[3].after_noise != mon[3].before_noise) failures++;   // neighbour untouched
    end
    sd = $sqrt(s2 / 2000.0 - (s1 / 2000.0) ** 2);
    $display("loop 2 injected noise sd %f (expected %f)", sd, 0.577 * 30000.0);
    checks += 2;
    if (sd < 0.9 * 0.577 * 30000.0 || sd > 1.1 * 0.577 * 30000.0) failures++;
    if (last_pir[2] - tone_pir(2) > 1.0 || tone_pir(2) - last_pir[2] > 1.0) failures++;
    // 4. readout rate switch on loop 0
    wr(0, 5, 32'd1024);
    rate_now[0] = 1024.0;
    repeat (2 * 1024 + 600) @(negedge clk);
    checks++;
    if (gap0 != 1024) begin failures++; $display("gap0 %0d", gap0); end else n_rate++;
    checks++;
    if (last_pir[0] - tone_pir(0) > 0.5 || tone_pir(0) - last_pir[0] > 0.5) failures++;

    $display("mechanisms: regs %0d open-loop %0d locked %0d noise-cycles %0d rate-switch %0d readouts %0d q2 %0d",
             n_regs, n_open, n_lock, n_noise, n_rate, n_strobe[0] + n_strobe[15], n_q2);
    checks += 7;
    if (n_regs == 0) failures++;
    if (n_open == 0) failures++;
    if (n_lock == 0) failures++;
    if (n_noise == 0) failures++;
    if (n_rate == 0) failures++;
    if (n_strobe[15] == 0) failures++;
    if (n_q2 == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
