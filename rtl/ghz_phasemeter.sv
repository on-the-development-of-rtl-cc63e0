// ghz_phasemeter: eight-channel, sixteen-ADPLL phasemeter core at 512 MHz.
//
// Each of the NUM_CH ADC channels delivers eight 12-bit samples per 512 MHz
// clock (4.096 GSPS). A channel feeds two ADPLLs (main tone and pilot tone),
// each an independent phase-locked loop with its own registers and readout.
// The RF data converters, the processor that writes the registers and reads
// the data, and the logic analyser are outside this core: the samples enter
// as `adc`, the registers are reached through a simple write/read bus, and the
// decimated readout and the two full-rate monitor words of every ADPLL are
// output ports. ADPLL index 2*c is the main loop of channel c, 2*c+1 its pilot
// loop. Eight channels and two loops per channel follow the paper.
module ghz_phasemeter
  import pm_pkg::*;
#(
  parameter int unsigned NUM_CH = 8
) (
  input  logic                    clk,          // 512 MHz processing clock
  input  logic                    rst,          // synchronous, active high
  input  logic signed [ADC_W-1:0] adc [NUM_CH][NSAMP],
  input  logic                    reg_wr_en,
  input  logic [6:0]              reg_wr_addr,
  input  logic [31:0]             reg_wr_data,
  input  logic [6:0]              reg_rd_addr,
  output logic [31:0]             reg_rd_data,
  output adpll_rd_t               rd  [2*NUM_CH],
  output adpll_mon_t              mon [2*NUM_CH]
);
  adpll_cfg_t cfg [2*NUM_CH];

  pm_regs #(.NUM_PLL(2 * NUM_CH)) u_regs (
    .clk(clk), .rst(rst), .wr_en(reg_wr_en), .wr_addr(reg_wr_addr), .wr_data(reg_wr_data),
    .rd_addr(reg_rd_addr), .rd_data(reg_rd_data), .cfg(cfg));

  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    pm_channel #(.SEED(32'hACE1_0001 + 32'(c) * 32'h0011_2233)) u_ch (
      .clk(clk), .rst(rst), .x(adc[c]),
      .cfg(cfg[2*c +: 2]), .rd(rd[2*c +: 2]), .mon(mon[2*c +: 2]));
  end
endmodule
