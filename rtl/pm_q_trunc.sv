// pm_q_trunc: dithered truncation of Q followed by the 2^-C loop gain stage.
//
// The 32-bit rolling sum from the low-pass filter is reduced to Q_W bits: a
// uniform dither word (DROP bits, from an LFSR outside) is added, the DROP
// least significant bits are removed and the result is saturated. This is the
// truncation the paper introduces to limit bit width, with dither so that the
// truncation error is white (the 3^(1/2) penalty of the paper's noise model).
// The truncated value is the Q readout. In parallel the same value is shifted
// right by C bits (the F_G = 2^-C block of Fig. 2) to give the servo input.
// DROP = 14 and the saturation are this design's choices; the paper only says
// that enough bits are kept for the truncation noise to stay below ADC noise.
//
// Timing: both outputs are registered, one clock after sum_i.
module pm_q_trunc
  import pm_pkg::*;
#(
  parameter int unsigned IN_W = SUM_W,
  parameter int unsigned DROP = Q_DROP
) (
  input  logic                        clk,
  input  logic                        rst,
  input  logic signed [IN_W-1:0]      sum_i,
  input  logic [DROP-1:0]             dither,
  input  logic [4:0]                  shift_c,
  output logic signed [IN_W-DROP-1:0] q_o,       // truncated Q (readout)
  output logic signed [IN_W-DROP-1:0] q_gain_o   // Q * 2^-C (servo input)
);
  localparam int unsigned OW = IN_W - DROP;
  localparam logic signed [OW-1:0] QMAX = {1'b0, {(OW-1){1'b1}}};
  localparam logic signed [OW-1:0] QMIN = {1'b1, {(OW-1){1'b0}}};

  logic signed [IN_W:0]      dithered;
  logic signed [IN_W-DROP:0] shifted;
  logic signed [OW-1:0]      q_sat;

  always_comb begin
    dithered = (IN_W+1)'(sum_i) + (IN_W+1)'($signed({1'b0, dither}));
    shifted  = dithered[IN_W:DROP];
    if (shifted > (IN_W-DROP+1)'(QMAX))      q_sat = QMAX;
    else if (shifted < (IN_W-DROP+1)'(QMIN)) q_sat = QMIN;
    else                                     q_sat = OW'(shifted);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      q_o      <= '0;
      q_gain_o <= '0;
    end else begin
      q_o      <= q_sat;
      q_gain_o <= q_sat >>> shift_c;
    end
  end
endmodule
