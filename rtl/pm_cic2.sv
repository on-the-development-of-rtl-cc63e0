// pm_cic2: second-order CIC decimator for the ADPLL readout.
//
// Two integrators run at the input rate (every clock with `in_en`); every R-th
// input the second integrator is passed through two comb stages and a result is
// emitted with a one-clock `out_valid` strobe. With x[n] the input and n the
// index of the last input of a block, the output is the double boxcar
//     y = sum_{a=0}^{R-1} sum_{b=0}^{R-1} x[n-a-b]
// i.e. the gain is R^2 and no bits are dropped (output width IN_W + 2*RATE_W);
// scaling is left to the reader. The paper gives the filter order (second
// order for PIR, Q and I) and the readout range 10 kHz to 30.5 Hz, which at
// 512 MHz is R = 51200 up to 2^24. R is a run-time input; values 1..2^RATE_W
// are valid. The integrators use wrapping arithmetic, which is exact as long as
// the output fits its width. The second integrator adds the current input so
// that the block boundary coincides with the strobe.
//
// Timing: out_valid is asserted in the clock after the last input of a block.
module pm_cic2
  import pm_pkg::*;
#(
  parameter int unsigned IN_W   = Q_W,
  parameter int unsigned RATE_W = CIC_RATE_W
) (
  input  logic                            clk,
  input  logic                            rst,
  input  logic                            in_en,
  input  logic signed [IN_W-1:0]          x,
  input  logic [RATE_W:0]                 rate,
  output logic signed [IN_W+2*RATE_W-1:0] y,
  output logic                            out_valid
);
  localparam int unsigned W = IN_W + 2 * RATE_W;

  logic signed [W-1:0] i1, i2, i1_n, i2_n, c1_n, i2_last, c1_last;
  logic [RATE_W:0]     cnt;
  logic                last;

  always_comb begin
    i1_n = i1 + W'(x);
    i2_n = i2 + i1_n;
    c1_n = i2_n - i2_last;
    last = (cnt + 1'b1 >= rate);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      i1 <= '0; i2 <= '0; i2_last <= '0; c1_last <= '0;
      cnt <= '0; y <= '0; out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      if (in_en) begin
        i1 <= i1_n;
        i2 <= i2_n;
        if (last) begin
          cnt       <= '0;
          i2_last   <= i2_n;
          c1_last   <= c1_n;
          y         <= c1_n - c1_last;
          out_valid <= 1'b1;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end
endmodule
