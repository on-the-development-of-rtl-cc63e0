// tb_pm_phase_acc: checks the multi-phase accumulator against a reference
// phase ramp: phase k of clock n must equal phase 8 of clock n-1 plus k*pir,
// consecutive outputs must differ by exactly pir, and phase 8 must advance by
// 8*pir per clock. Random PIR values, including full-scale ones, are used.
module tb_pm_phase_acc;
  timeunit 1ns; timeprecision 10ps;
  import pm_pkg::*;
  logic clk = 0, rst = 1;
  logic [PHASE_W-1:0] pir;
  logic [PHASE_W-1:0] phase [NSAMP];
  int checks = 0, failures = 0;

  pm_phase_acc dut (.clk(clk), .rst(rst), .pir(pir), .phase(phase));

  always #1 clk = ~clk;

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [PHASE_W-1:0] last;
    pir = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int k = 0; k < NSAMP; k++) begin
      checks++;
      if (phase[k] != 0) failures++;
    end
    last = '0;
    for (int n = 0; n < 2000; n++) begin
      pir = (n % 97 == 0) ? '1 : PHASE_W'($urandom);
      @(negedge clk);
      for (int k = 0; k < NSAMP; k++) begin
        logic [PHASE_W-1:0] exp_ph;
        exp_ph = last + PHASE_W'((k + 1) * int'(pir));
        checks++;
        if (phase[k] != exp_ph) begin
          failures++;
          if (failures < 10) $display("n=%0d k=%0d phase=%h exp=%h", n, k, phase[k], exp_ph);
        end
      end
      last = last + PHASE_W'(8 * int'(pir));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
