// pm_demod: IQ demodulation of the eight parallel ADC samples.
//
// Every clock, sample k is multiplied by the cosine and by the negated sine of
// NCO phase k:  i_prod[k] = x[k]*cos(phi_k),  q_prod[k] = -x[k]*sin(phi_k).
// For an input A*cos(phi_in) the low-pass part of q_prod is (A/2)*sin(phi_in -
// phi_nco), so Q is positive when the input phase leads the NCO; I is
// (A/2)*cos(phi_in - phi_nco) and scales with the amplitude. The eight mixer
// pairs follow Fig. 1; the sign convention is this design's choice.
//
// Timing: products are registered, one clock after the inputs.
module pm_demod
  import pm_pkg::*;
#(
  parameter int unsigned N     = NSAMP,
  parameter int unsigned XW    = ADC_W,
  parameter int unsigned AMP_W = LUT_AMP_W
) (
  input  logic                       clk,
  input  logic signed [XW-1:0]       x      [N],
  input  logic signed [AMP_W-1:0]    sin_i  [N],
  input  logic signed [AMP_W-1:0]    cos_i  [N],
  output logic signed [XW+AMP_W-1:0] i_prod [N],
  output logic signed [XW+AMP_W-1:0] q_prod [N]
);
  always_ff @(posedge clk) begin
    for (int k = 0; k < N; k++) begin
      i_prod[k] <= x[k] * cos_i[k];
      q_prod[k] <= -(x[k] * sin_i[k]);
    end
  end
endmodule
