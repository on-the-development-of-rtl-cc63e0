// pm_gauss_noise: approximately Gaussian noise of adjustable amplitude.
//
// For the direct measurement of the open-loop gain the paper adds Gaussian
// noise, with an externally set amplitude and a switch, to the servo output.
// Here four independent 32-bit LFSRs each supply a uniform signed 16-bit word
// (each advances 16 steps per clock, so successive words share no bits and
// the noise is white);
// their sum (central limit theorem, kurtosis 2.7 instead of 3) is multiplied by
// `amp` and shifted right by 16. The standard deviation of the output is
// amp * sqrt(4/12) ~= 0.577 * amp and its magnitude never exceeds 2 * amp.
// With `en` low the output is exactly zero. How the noise is generated is not
// in the paper; this construction is this design's choice.
//
// Timing: two register stages from the LFSR states to `noise`.
module pm_gauss_noise
  import pm_pkg::*;
#(
  parameter int unsigned OUT_W = PIR_W,
  parameter logic [31:0] SEED  = 32'h1234_5678
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    en,
  input  logic [15:0]             amp,
  output logic signed [OUT_W-1:0] noise
);
  logic [31:0] lfsr [4];

  for (genvar g = 0; g < 4; g++) begin : g_lfsr
    pm_lfsr #(.SEED(SEED ^ (32'h9E37_79B9 * (g + 1))), .STEPS(16)) u_lfsr (
      .clk(clk), .rst(rst), .state(lfsr[g]));
  end

  logic signed [17:0] sum4;
  logic signed [34:0] scaled;

  always_ff @(posedge clk) begin
    if (rst || !en) begin
      sum4  <= '0;
      noise <= '0;
    end else begin
      sum4  <= 18'($signed(lfsr[0][31:16])) + 18'($signed(lfsr[1][31:16]))
             + 18'($signed(lfsr[2][31:16])) + 18'($signed(lfsr[3][31:16]));
      noise <= OUT_W'(scaled >>> 16);
    end
  end

  assign scaled = sum4 * $signed({1'b0, amp});
endmodule
