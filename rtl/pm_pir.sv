// pm_pir: phase increment register of the NCO.
//
// Adds the starting frequency f0 to the servo output (the actuation that
// corrects f0) and, when the noise switch is closed, the injected noise. The
// two sums before and after the noise are registered side by side so that a
// logic analyser can record both at the full rate; their ratio gives the
// open-loop gain. The full-precision word is then reduced to PHASE_W = 16 bits
// by dithered truncation (uniform dither of the removed bits, then the LSBs are
// dropped), which is the PIR value that drives the phase accumulators and is
// read out. The order f0, noise, truncation, PIR tap follows Fig. 2 of the
// paper, the 16-bit width follows its text; the 32-bit precision of f0 and the
// modular (wrapping) arithmetic are this design's choices.
//
// Timing: before/after are registered one clock after the inputs, pir one
// clock later.
module pm_pir
  import pm_pkg::*;
#(
  parameter int unsigned W  = PIR_W,
  parameter int unsigned TW = PHASE_W
) (
  input  logic                clk,
  input  logic                rst,
  input  logic [W-1:0]        f0,
  input  logic signed [W-1:0] servo_u,
  input  logic signed [W-1:0] noise,
  input  logic [W-TW-1:0]     dither,
  output logic [W-1:0]        before_noise,
  output logic [W-1:0]        after_noise,
  output logic [TW-1:0]       pir
);
  logic [W-1:0] dithered;
  assign dithered = after_noise + W'(dither);

  always_ff @(posedge clk) begin
    if (rst) begin
      before_noise <= '0;
      after_noise  <= '0;
      pir          <= '0;
    end else begin
      before_noise <= f0 + W'(servo_u);
      after_noise  <= f0 + W'(servo_u) + W'(noise);
      pir          <= dithered[W-1 -: TW];
    end
  end
endmodule
