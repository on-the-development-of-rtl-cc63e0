// tb_pm_sincos_lut: compares the table outputs with sin and cos of the
// truncated phase computed in floating point (tolerance 1 LSB), for every
// table address and for random phases, and checks the one-clock read latency.
module tb_pm_sincos_lut;
  timeunit 1ns; timeprecision 10ps;
  import pm_pkg::*;
  logic clk = 0;
  logic [PHASE_W-1:0] phase;
  logic signed [LUT_AMP_W-1:0] s, c;
  int checks = 0, failures = 0;
  localparam real PI2 = 6.283185307179586;
  localparam real AMP = 32767.0;

  pm_sincos_lut dut (.clk(clk), .phase(phase), .sin_o(s), .cos_o(c));

  always #1 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_phase(input logic [PHASE_W-1:0] ph);
    real ang, es, ec;
    phase = ph;
    @(posedge clk); #0.5;
    ang = PI2 * real'(ph[PHASE_W-1 -: LUT_ADDR_W]) / 1024.0;
    es = AMP * $sin(ang);
    ec = AMP * $cos(ang);
    checks += 2;
    if ((real'(s) - es) > 1.0 || (es - real'(s)) > 1.0) begin
      failures++; $display("sin ph=%h got %0d exp %f", ph, s, es);
    end
    if ((real'(c) - ec) > 1.0 || (ec - real'(c)) > 1.0) begin
      failures++; $display("cos ph=%h got %0d exp %f", ph, c, ec);
    end
  endtask

  initial begin
    phase = '0;
    @(negedge clk);
    for (int a = 0; a < 1024; a++) begin
      @(negedge clk);
      check_phase(PHASE_W'(a << (PHASE_W - LUT_ADDR_W)));
    end
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      check_phase(PHASE_W'($urandom));
    end
    // latency: output must not change before the clock edge
    @(negedge clk); phase = 16'h4000;  // sin = +max
    @(posedge clk); #0.5;
    @(negedge clk); phase = 16'hC000;  // sin = -max
    #0.2; checks++; if (s != 32767) failures++;
    @(posedge clk); #0.5; checks++; if (s != -32767) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
