// tb_pm_q_trunc: random sums, dither words and gain shifts. The Q output must
// be floor((sum + dither) / 2^14) saturated to 18 bits, and the servo input
// that value shifted right by C, one clock later. Large sums exercise the
// saturation in both directions.
module tb_pm_q_trunc;
  timeunit 1ns; timeprecision 10ps;
  import pm_pkg::*;
  logic clk = 0, rst = 1;
  logic signed [SUM_W-1:0] sum_i;
  logic [Q_DROP-1:0] dither;
  logic [4:0] c;
  logic signed [Q_W-1:0] q, qg;
  int checks = 0, failures = 0, sat_hits = 0;

  pm_q_trunc dut (.clk(clk), .rst(rst), .sum_i(sum_i), .dither(dither), .shift_c(c),
                  .q_o(q), .q_gain_o(qg));

  always #1 clk = ~clk;

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e, eg;
    sum_i = '0; dither = '0; c = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int n = 0; n < 3000; n++) begin
      case (n % 4)
        0: sum_i = SUM_W'($urandom);                               // often saturates
        default: sum_i = SUM_W'($urandom_range(0, 1 << 30) - (1 << 29));  // in range
      endcase
      dither = Q_DROP'($urandom);
      c      = 5'($urandom_range(0, 17));
      if (n % 100 == 3) begin sum_i = 32'sh7FFF_FFF0; dither = '1; end  // overflows into saturation
      @(posedge clk); #0.5;
      e = (longint'(sum_i) + longint'(dither)) >>> 14;
      if (e > 131071)  begin e = 131071;  sat_hits++; end
      if (e < -131072) begin e = -131072; sat_hits++; end
      eg = e >>> c;
      checks += 2;
      if (longint'(q) != e)   begin failures++; if (failures < 10) $display("q %0d exp %0d", q, e); end
      if (longint'(qg) != eg) begin failures++; if (failures < 10) $display("qg %0d exp %0d", qg, eg); end
      @(negedge clk);
    end
    checks++;
    if (sat_hits == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
