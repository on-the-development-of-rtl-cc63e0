// tb_pm_regs: checks the reset values, writes random values to every register
// of every ADPLL and checks both the decoded configuration fields and the
// read-back word, that a write touches only its own ADPLL, that a zero rate is
// stored as 1.
module tb_pm_regs;
  timeunit 1ns; timeprecision 10ps;
  import pm_pkg::*;
  localparam int NP = 16;
  logic clk = 0, rst = 1, we = 0;
  logic [6:0] wa, ra;
  logic [31:0] wd, rdat;
  adpll_cfg_t cfg [NP];
  int checks = 0, failures = 0;

  pm_regs #(.NUM_PLL(NP)) dut (.clk(clk), .rst(rst), .wr_en(we), .wr_addr(wa), .wr_data(wd),
                               .rd_addr(ra), .rd_data(rdat), .cfg(cfg));

  always #1 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int p, input int r, input logic [31:0] v);
    wa = 7'(p * 8 + r); wd = v; we = 1;
    @(negedge clk); we = 0;
  endtask

  function automatic logic [31:0] mask(int r);
    case (r)
      0: return 32'hFFFF_FFFF;
      1, 2: return 32'h0003_FFFF;
      3: return 32'h011F_3F3F;
      4: return 32'h8000_FFFF;
      5: return 32'h01FF_FFFF;
      6: return 32'h001F_FFFF;
      default: return 32'h0;
    endcase
  endfunction

  initial begin
    logic [31:0] v [NP][7];
    ra = '0; wa = '0; wd = '0;
    repeat (3) @(negedge clk);
    rst = 0;
    for (int p = 0; p < NP; p++) begin
      checks += 4;
      if (cfg[p].servo_en !== 1'b0) failures++;
      if (cfg[p].cic_rate != 51200) failures++;
      if (cfg[p].q2_rate != 3200) failures++;
      if (cfg[p].f0 != 0) failures++;
    end
    for (int p = 0; p < NP; p++)
      for (int r = 0; r < 7; r++) begin
        v[p][r] = $urandom | 32'h1;
        wr(p, r, v[p][r]);
      end
    for (int p = 0; p < NP; p++) begin
      for (int r = 0; r < 8; r++) begin
        ra = 7'(p * 8 + r); #0.1;
        checks++;
        if (rdat != ((r < 7) ? (v[p][r] & mask(r)) : 32'h0)) begin
          failures++; $display("p=%0d r=%0d rd=%h exp=%h", p, r, rdat, v[p][r] & mask(r));
        end
      end
      checks += 10;
      if (cfg[p].f0 != v[p][0]) failures++;
      if (cfg[p].kp != 18'(v[p][1])) failures++;
      if (cfg[p].ki != 18'(v[p][2])) failures++;
      if (cfg[p].sp != v[p][3][5:0]) failures++;
      if (cfg[p].si != v[p][3][13:8]) failures++;
      if (cfg[p].q_shift != v[p][3][20:16]) failures++;
      if (cfg[p].servo_en != v[p][3][24]) failures++;
      if (cfg[p].noise_amp != v[p][4][15:0] || cfg[p].noise_en != v[p][4][31]) failures++;
      if (cfg[p].cic_rate != v[p][5][24:0]) failures++;
      if (cfg[p].q2_rate != v[p][6][20:0]) failures++;
    end
    wr(5, 5, 32'h0);
    checks += 2;
    if (cfg[5].cic_rate != 1) failures++;
    if (cfg[4].cic_rate != v[4][5][24:0]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
