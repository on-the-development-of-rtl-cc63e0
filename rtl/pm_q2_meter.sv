// pm_q2_meter: real-time estimate of the residual phase error from Q^2.
//
// The full-rate Q values are first averaged in blocks of Q2_PRE = 16 (a
// boxcar with decimation, 512 MHz -> 32 MHz) to suppress the second harmonic
// and other tones. Each 32 MHz value is squared, and the squares are summed
// over `rate` values by a first-order CIC (integrate and dump), which emits a
// result with a one-clock `out_valid`. Scaled by the phase detector gain, the
// result is the mean square phase error of the loop. The paper gives the
// 32 MHz prefilter rate, the squaring and the first-order CIC; the boxcar
// prefilter, the division by 16 as a right shift and the widths are this
// design's choices.
//
// Timing: out_valid one clock after the last Q of a readout block is squared;
// the squaring adds one clock after each 16-value prefilter block.
module pm_q2_meter
  import pm_pkg::*;
#(
  parameter int unsigned IN_W   = Q_W,
  parameter int unsigned PRE    = Q2_PRE,
  parameter int unsigned RATE_W = Q2_RATE_W
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic signed [IN_W-1:0]       q,
  input  logic [RATE_W:0]              rate,
  output logic [2*IN_W+RATE_W-1:0]     y,
  output logic                         out_valid
);
  localparam int unsigned PB = $clog2(PRE);
  localparam int unsigned OW = 2 * IN_W + RATE_W;

  logic signed [IN_W+PB-1:0] pre_acc;
  logic [PB-1:0]             pre_cnt;
  logic signed [IN_W-1:0]    pre_out;
  logic                      pre_valid;
  logic [2*IN_W-1:0]         sq;
  logic                      sq_valid;
  logic [OW-1:0]             acc;
  logic [RATE_W:0]           cnt;
  logic signed [IN_W+PB-1:0] pre_sum;

  assign pre_sum = pre_acc + (IN_W+PB)'(q);

  logic signed [2*IN_W-1:0] pre_ext;
  logic [2*IN_W-1:0]        pre_sq;
  assign pre_ext = (2*IN_W)'(pre_out);
  assign pre_sq  = pre_ext * pre_ext;

  always_ff @(posedge clk) begin
    if (rst) begin
      pre_acc <= '0; pre_cnt <= '0; pre_out <= '0; pre_valid <= 1'b0;
      sq <= '0; sq_valid <= 1'b0; acc <= '0; cnt <= '0; y <= '0; out_valid <= 1'b0;
    end else begin
      // 16:1 boxcar prefilter
      pre_valid <= 1'b0;
      if (pre_cnt == PB'(PRE - 1)) begin
        pre_acc   <= '0;
        pre_out   <= IN_W'(pre_sum >>> PB);
        pre_valid <= 1'b1;
      end else begin
        pre_acc <= pre_sum;
      end
      pre_cnt <= pre_cnt + 1'b1;

      // square
      sq_valid <= pre_valid;
      if (pre_valid) sq <= pre_sq;

      // first-order CIC: integrate and dump
      out_valid <= 1'b0;
      if (sq_valid) begin
        if (cnt + 1'b1 >= rate) begin
          y         <= acc + OW'(sq);
          acc       <= '0;
          cnt       <= '0;
          out_valid <= 1'b1;
        end else begin
          acc <= acc + OW'(sq);
          cnt <= cnt + 1'b1;
        end
      end
    end
  end
endmodule
