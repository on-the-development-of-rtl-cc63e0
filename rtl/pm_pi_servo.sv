// pm_pi_servo: proportional-integral controller of the ADPLL.
//
// Implements F_PI(z) = P + I z^-1/(1 - z^-1) of Fig. 2 in fixed point:
//   p_term = (kp * e) >>> sp
//   integ  = integ + ki * e            (INTEG_W bits, saturating)
//   u      = sat_OUT_W(p_term + (integ >>> si))
// The gains are programmable, as the paper tunes the loop bandwidth by the
// servo gains; expressing each gain as a signed multiplier and a right shift,
// the widths and the saturation are this design's choices. With servo_en low
// the integrator is cleared and u is zero, which opens the loop so that the
// NCO runs at f0.
//
// Timing: e enters the proportional path two clocks before u, the integral
// path three clocks (the extra z^-1 of the integrator).
module pm_pi_servo
  import pm_pkg::*;
#(
  parameter int unsigned E_W   = Q_W,
  parameter int unsigned G_W   = GAIN_W,
  parameter int unsigned S_W   = SHIFT_W,
  parameter int unsigned I_W   = INTEG_W,
  parameter int unsigned OUT_W = PIR_W
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    en,
  input  logic signed [E_W-1:0]   e,
  input  logic signed [G_W-1:0]   kp,
  input  logic signed [G_W-1:0]   ki,
  input  logic [S_W-1:0]          sp,
  input  logic [S_W-1:0]          si,
  output logic signed [OUT_W-1:0] u
);
  localparam int unsigned PW = E_W + G_W;
  localparam logic signed [I_W-1:0] IMAX = {1'b0, {(I_W-1){1'b1}}};
  localparam logic signed [I_W-1:0] IMIN = {1'b1, {(I_W-1){1'b0}}};
  localparam logic signed [OUT_W-1:0] UMAX = {1'b0, {(OUT_W-1){1'b1}}};
  localparam logic signed [OUT_W-1:0] UMIN = {1'b1, {(OUT_W-1){1'b0}}};

  logic signed [PW-1:0]  p_prod, i_prod;
  logic signed [I_W-1:0] integ;
  logic signed [I_W:0]   integ_next;
  logic signed [I_W+1:0] total;

  always_comb begin
    integ_next = (I_W+1)'(integ) + (I_W+1)'(i_prod);
    total      = (I_W+2)'(p_prod >>> sp) + (I_W+2)'(integ >>> si);
  end

  always_ff @(posedge clk) begin
    if (rst || !en) begin
      p_prod <= '0;
      i_prod <= '0;
      integ  <= '0;
      u      <= '0;
    end else begin
      p_prod <= e * kp;
      i_prod <= e * ki;
      if (integ_next > (I_W+1)'(IMAX))      integ <= IMAX;
      else if (integ_next < (I_W+1)'(IMIN)) integ <= IMIN;
      else                                  integ <= I_W'(integ_next);
      if (total > (I_W+2)'(UMAX))      u <= UMAX;
      else if (total < (I_W+2)'(UMIN)) u <= UMIN;
      else                             u <= OUT_W'(total);
    end
  end
endmodule
