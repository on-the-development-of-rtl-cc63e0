// tb_pm_pi_servo: drives random errors and gains and compares the output with
// a reference computed with 64-bit integers: u(n) = sat32((kp*e(n-2) >>> sp) +
// (I(n-1) >>> si)) with I(n) = sat40(I(n-1) + ki*e(n-2)). Checks the two-clock
// proportional latency with a step, the integrator ramp, integrator saturation
// and that servo_en = 0 clears everything.
module tb_pm_pi_servo;
  timeunit 1ns; timeprecision 10ps;
  import pm_pkg::*;
  logic clk = 0, rst = 1, en = 0;
  logic signed [Q_W-1:0] e;
  logic signed [GAIN_W-1:0] kp, ki;
  logic [SHIFT_W-1:0] sp, si;
  logic signed [PIR_W-1:0] u;
  localparam int IW = 40;  // short integrator so that saturation is reached quickly
  int checks = 0, failures = 0;

  pm_pi_servo #(.I_W(IW)) dut (.clk(clk), .rst(rst), .en(en), .e(e), .kp(kp), .ki(ki), .sp(sp), .si(si), .u(u));

  always #1 clk = ~clk;

  initial begin
    #40000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint sat(longint v, int bits);
    longint mx = (longint'(1) <<< (bits - 1)) - 1;
    longint mn = -(longint'(1) <<< (bits - 1));
    return (v > mx) ? mx : (v < mn) ? mn : v;
  endfunction

  longint pp, ip, integ, uexp;
  bit sat_seen = 0;

  task automatic step_model();
    // registers update in the order of the RTL (all from previous values)
    longint integ_n, u_n;
    integ_n = sat(integ + ip, IW);
    if (integ_n != integ + ip) sat_seen = 1;
    u_n     = sat((pp >>> sp) + (integ >>> si), PIR_W);
    pp = longint'(e) * longint'(kp);
    ip = longint'(e) * longint'(ki);
    integ = integ_n;
    uexp  = u_n;
  endtask

  initial begin
    e = '0; kp = '0; ki = '0; sp = '0; si = '0;
    pp = 0; ip = 0; integ = 0; uexp = 0;
    repeat (3) @(negedge clk);
    rst = 0;
    // proportional step: latency two clocks
    en = 1; kp = 18'sd100; ki = '0; e = 18'sd7;
    @(negedge clk); checks++; if (u != 0) failures++;
    @(negedge clk); checks++; if (u != 700) begin failures++; $display("step u=%0d", u); end
    // reset model to the DUT state: clear with en=0
    en = 0; @(negedge clk); @(negedge clk);
    checks++; if (u != 0) failures++;
    en = 1;
    // random stream
    for (int n = 0; n < 4000; n++) begin
      if (n % 500 == 0) begin
        kp = GAIN_W'($urandom); ki = GAIN_W'($urandom_range(0, 2000) - 1000);
        sp = SHIFT_W'($urandom_range(0, 12)); si = SHIFT_W'($urandom_range(0, 20));
        if (n == 2000) begin ki = 18'sd131071; si = 6'd20; end  // drive into saturation
      end
      e = (n >= 2000 && n < 3000) ? 18'sd131071 : Q_W'($urandom);
      @(posedge clk);
      step_model();
      #0.5;
      checks++;
      if (longint'(u) != uexp) begin
        failures++;
        if (failures < 10) $display("n=%0d u=%0d exp=%0d", n, u, uexp);
      end
      @(negedge clk);
    end
    checks++; if (!sat_seen) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
