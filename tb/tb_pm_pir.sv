// tb_pm_pir: random f0, servo, noise and dither. The monitor words must be
// f0+u and f0+u+noise one clock later, the PIR the top 16 bits of
// (f0+u+noise of the previous clock + dither of this clock). A constant word with LFSR-like random
// dither must give a PIR whose mean equals the word / 2^16 (dithered
// truncation is unbiased).
module tb_pm_pir;
  timeunit 1ns; timeprecision 10ps;
  import pm_pkg::*;
  logic clk = 0, rst = 1;
  logic [PIR_W-1:0] f0, before_n, after_n;
  logic signed [PIR_W-1:0] u, nz;
  logic [15:0] dither;
  logic [PHASE_W-1:0] pir;
  int checks = 0, failures = 0;

  pm_pir dut (.clk(clk), .rst(rst), .f0(f0), .servo_u(u), .noise(nz), .dither(dither),
              .before_noise(before_n), .after_noise(after_n), .pir(pir));

  always #1 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [PIR_W-1:0] prev_after;
    logic [15:0] prev_dither;
    real acc;
    f0 = '0; u = '0; nz = '0; dither = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    prev_after = '0; prev_dither = '0;
    for (int n = 0; n < 2000; n++) begin
      f0 = $urandom; u = $urandom; nz = (n % 2) ? PIR_W'($urandom) : '0;
      dither = 16'($urandom);
      @(posedge clk); #0.5;
      checks += 3;
      if (before_n != f0 + u) failures++;
      if (after_n != f0 + u + nz) failures++;
      if (n > 0 && pir != 16'((prev_after + 32'(dither)) >> 16)) failures++;
      prev_after = after_n; prev_dither = dither;
      @(negedge clk);
    end
    // unbiased dithered truncation
    f0 = 32'h1234_4000; u = 32'sd12345; nz = '0;   // fractional part 0x7039 / 65536 = 0.4384
    acc = 0;
    repeat (4) @(negedge clk);
    for (int n = 0; n < 20000; n++) begin
      dither = 16'($urandom);
      @(negedge clk);
      acc += real'(pir);
    end
    acc = acc / 20000.0;
    $display("mean pir %f expected %f", acc, real'(32'h1234_4000 + 12345) / 65536.0);
    checks++;
    if (acc - real'(32'h1234_4000 + 12345) / 65536.0 > 0.02 ||
        real'(32'h1234_4000 + 12345) / 65536.0 - acc > 0.02) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
