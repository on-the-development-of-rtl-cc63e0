// pm_regs: control registers of all ADPLLs, written by the processing system.
//
// The paper controls each ADPLL individually by registers that the on-chip
// processor sets; it does not give the bus or the map. Here a simple
// synchronous bus is used: on a clock with wr_en, wr_data is stored in register
// wr_addr; rd_data shows register rd_addr combinationally. Address bits [6:3]
// select the ADPLL (0..NUM_PLL-1, ADPLL 2c is the main-tone loop and 2c+1 the
// pilot-tone loop of channel c), bits [2:0] the register:
//   0  f0        [31:0]  starting frequency, f/4.096 GHz * 2^32
//   1  kp        [17:0]  signed proportional gain
//   2  ki        [17:0]  signed integral gain
//   3  shifts    [5:0] sp, [13:8] si, [20:16] C (Q gain 2^-C), [24] servo_en
//   4  noise     [15:0] amplitude, [31] noise switch
//   5  cic_rate  [24:0]  PIR/Q/I readout decimation (51200 = 10 kHz .. 2^24 = 30.5 Hz)
//   6  q2_rate   [20:0]  Q^2 readout decimation at 32 MHz (3200 = 10 kHz .. 2^20)
//   7  (reads 0)
// Reset sets every loop open (servo_en = 0), f0 and gains to 0, and both
// readouts to 10 kHz. A rate of 0 written by software is stored as 1.
module pm_regs
  import pm_pkg::*;
#(
  parameter int unsigned NUM_PLL = 2 * 8
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        wr_en,
  input  logic [6:0]  wr_addr,
  input  logic [31:0] wr_data,
  input  logic [6:0]  rd_addr,
  output logic [31:0] rd_data,
  output adpll_cfg_t  cfg [NUM_PLL]
);
  localparam logic [CIC_RATE_W:0] CIC_RATE_RST = (CIC_RATE_W+1)'(51200);
  localparam logic [Q2_RATE_W:0]  Q2_RATE_RST  = (Q2_RATE_W+1)'(3200);

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int p = 0; p < NUM_PLL; p++) begin
        cfg[p]          <= '0;
        cfg[p].cic_rate <= CIC_RATE_RST;
        cfg[p].q2_rate  <= Q2_RATE_RST;
      end
    end else if (wr_en && 32'(wr_addr[6:3]) < NUM_PLL) begin
      case (wr_addr[2:0])
        3'd0: cfg[wr_addr[6:3]].f0 <= wr_data;
        3'd1: cfg[wr_addr[6:3]].kp <= wr_data[GAIN_W-1:0];
        3'd2: cfg[wr_addr[6:3]].ki <= wr_data[GAIN_W-1:0];
        3'd3: begin
          cfg[wr_addr[6:3]].sp       <= wr_data[5:0];
          cfg[wr_addr[6:3]].si       <= wr_data[13:8];
          cfg[wr_addr[6:3]].q_shift  <= wr_data[20:16];
          cfg[wr_addr[6:3]].servo_en <= wr_data[24];
        end
        3'd4: begin
          cfg[wr_addr[6:3]].noise_amp <= wr_data[15:0];
          cfg[wr_addr[6:3]].noise_en  <= wr_data[31];
        end
        3'd5: cfg[wr_addr[6:3]].cic_rate <= (wr_data[CIC_RATE_W:0] == '0) ? (CIC_RATE_W+1)'(1)
                                                                      : wr_data[CIC_RATE_W:0];
        3'd6: cfg[wr_addr[6:3]].q2_rate  <= (wr_data[Q2_RATE_W:0] == '0) ? (Q2_RATE_W+1)'(1)
                                                                      : wr_data[Q2_RATE_W:0];
        default: ;
      endcase
    end
  end

  always_comb begin
    rd_data = '0;
    if (32'(rd_addr[6:3]) < NUM_PLL) begin
      case (rd_addr[2:0])
        3'd0: rd_data = cfg[rd_addr[6:3]].f0;
        3'd1: rd_data = {14'd0, cfg[rd_addr[6:3]].kp};
        3'd2: rd_data = {14'd0, cfg[rd_addr[6:3]].ki};
        3'd3: rd_data = {7'd0, cfg[rd_addr[6:3]].servo_en, 3'd0, cfg[rd_addr[6:3]].q_shift,
                         2'd0, cfg[rd_addr[6:3]].si, 2'd0, cfg[rd_addr[6:3]].sp};
        3'd4: rd_data = {cfg[rd_addr[6:3]].noise_en, 15'd0, cfg[rd_addr[6:3]].noise_amp};
        3'd5: rd_data = 32'(cfg[rd_addr[6:3]].cic_rate);
        3'd6: rd_data = 32'(cfg[rd_addr[6:3]].q2_rate);
        default: rd_data = '0;
      endcase
    end
  end
endmodule
