// pm_channel: one ADC channel with its two ADPLLs.
//
// Both loops see the same eight samples per clock. In the paper one tracks the
// main tone and the other a pilot tone whose phase is used afterwards to remove
// ADC timing jitter; the two can equally track one signal with different servo
// gains. Which tone each follows is set only by its f0 and gains.
//
// Interface: the decimated readouts and the two monitor words per loop. The
// ADPLL's full-rate Q, I and PIR outputs are left open here; they serve
// testbenches that instantiate the ADPLL alone. Latency: that of pm_adpll.
module pm_channel
  import pm_pkg::*;
#(
  parameter logic [31:0] SEED = 32'h0000_0001
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic signed [ADC_W-1:0] x   [NSAMP],
  input  adpll_cfg_t              cfg [2],
  output adpll_rd_t               rd  [2],
  output adpll_mon_t              mon [2]
);
  for (genvar p = 0; p < 2; p++) begin : g_pll
    pm_adpll #(.SEED(SEED + 32'(p) * 32'h0101_0101)) u_pll (
      .clk(clk), .rst(rst), .x(x), .cfg(cfg[p]), .rd(rd[p]), .mon(mon[p]),
      .q_fast(), .i_fast(), .pir());
  end
endmodule
