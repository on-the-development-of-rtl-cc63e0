// tb_pm_q2_meter: random Q values; the reference averages each block of 16
// (floor of sum/16), squares it and sums rate such squares. Checks every
// output value, that one output comes per 16*rate inputs, and a constant Q
// whose result is rate * Q^2 exactly.
module tb_pm_q2_meter;
  timeunit 1ns; timeprecision 10ps;
  import pm_pkg::*;
  logic clk = 0, rst = 1;
  logic signed [Q_W-1:0] q;
  logic [Q2_RATE_W:0] rate;
  logic [2*Q_W+Q2_RATE_W-1:0] y;
  logic vld;
  int checks = 0, failures = 0;

  pm_q2_meter dut (.clk(clk), .rst(rst), .q(q), .rate(rate), .y(y), .out_valid(vld));

  always #1 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint exp_q [$];

  // reference: collects inputs, emits expected outputs into exp_q
  task automatic run(input int r, input int nblocks, input bit constant);
    longint blk_sum, sq_acc;
    int outs, nsq, cycles;
    rst = 1; rate = (Q2_RATE_W+1)'(r); q = '0;
    exp_q.delete();
    repeat (2) @(negedge clk);
    rst = 0;
    blk_sum = 0; sq_acc = 0; outs = 0; nsq = 0; cycles = 0;
    fork
      begin
        for (int n = 0; n < 16 * r * nblocks; n++) begin
          q = constant ? 18'sd1000 : Q_W'($urandom);
          blk_sum += longint'(q);
          if (n % 16 == 15) begin
            automatic longint a = blk_sum >>> 4;
            sq_acc += a * a;
            blk_sum = 0;
            nsq++;
            if (nsq == r) begin exp_q.push_back(sq_acc); sq_acc = 0; nsq = 0; end
          end
          @(negedge clk);
        end
        q = '0;
        repeat (8) @(negedge clk);
      end
      begin
        forever begin
          @(posedge clk); #0.5;
          if (vld) begin
            checks++;
            if (exp_q.size() == 0) failures++;
            else begin
              automatic longint e = exp_q.pop_front();
              if (longint'(y) != e) begin
                failures++;
                if (failures < 10) $display("y=%0d exp=%0d", y, e);
              end
              if (constant) begin checks++; if (longint'(y) != longint'(r) * 1000 * 1000) failures++; end
            end
            outs++;
          end
        end
      end
    join_any
    disable fork;
    checks++;
    if (outs != nblocks) begin failures++; $display("outs=%0d exp %0d", outs, nblocks); end
  endtask

  initial begin
    run(1, 30, 0);
    run(3, 20, 0);
    run(10, 10, 1);
    run(50, 6, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
