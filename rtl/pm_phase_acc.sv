// pm_phase_acc: multi-phase accumulator of the NCO.
//
// Each 512 MHz clock carries eight ADC samples, so the NCO must produce eight
// consecutive phases per clock. Phase accumulator k (k = 1..8) adds k times the
// phase increment to the phase that accumulator 8 held in the previous clock:
//     phase[k-1](n) = phase[7](n-1) + k * pir(n)
// so phase[7] advances by 8*pir per clock and the eight outputs form one
// continuous phase ramp at the 4.096 GSPS sample rate. The structure (eight
// accumulators, a multiply by 1..8, an adder fed back from the last one)
// follows Fig. 1 of the paper. Phases wrap modulo 2^PHASE_W (one cycle).
//
// Timing: registered outputs, one clock from pir to phase. Reset clears all
// phases to zero.
module pm_phase_acc
  import pm_pkg::*;
#(
  parameter int unsigned N = NSAMP,
  parameter int unsigned W = PHASE_W
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [W-1:0] pir,
  output logic [W-1:0] phase [N]
);
  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < N; k++) phase[k] <= '0;
    end else begin
      for (int k = 0; k < N; k++) phase[k] <= phase[N-1] + W'((k + 1) * pir);
    end
  end
endmodule
