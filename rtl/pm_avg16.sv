// pm_avg16: the loop low-pass filter, a rolling sum of the last 16 products.
//
// Each clock brings eight new mixer products. They are summed by a registered
// adder tree (8 -> 4 -> 2 -> 1), and the result is added to the sum of the
// previous clock, so the output is the sum of the 16 most recent samples and
// is updated every clock. The division by 16 of a true average is left to the
// later gain stage (the output keeps all bits). Following the paper, the
// averaging is split into consecutive additions to meet timing at 512 MHz;
// the exact split into four register stages is this design's choice.
//
// Timing: four clocks from the products to the matching sum.
module pm_avg16
  import pm_pkg::*;
#(
  parameter int unsigned IN_W = PROD_W
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic signed [IN_W-1:0] d [8],
  output logic signed [IN_W+3:0] sum16
);
  logic signed [IN_W:0]   s4 [4];
  logic signed [IN_W+1:0] s2 [2];
  logic signed [IN_W+2:0] s1, s1_prev;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < 4; k++) s4[k] <= '0;
      for (int k = 0; k < 2; k++) s2[k] <= '0;
      s1      <= '0;
      s1_prev <= '0;
      sum16   <= '0;
    end else begin
      for (int k = 0; k < 4; k++) s4[k] <= (IN_W+1)'(d[2*k]) + (IN_W+1)'(d[2*k+1]);
      for (int k = 0; k < 2; k++) s2[k] <= (IN_W+2)'(s4[2*k]) + (IN_W+2)'(s4[2*k+1]);
      s1      <= (IN_W+3)'(s2[0]) + (IN_W+3)'(s2[1]);
      s1_prev <= s1;
      sum16   <= (IN_W+4)'(s1) + (IN_W+4)'(s1_prev);
    end
  end
endmodule
