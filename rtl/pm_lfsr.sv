// pm_lfsr: 32-bit Galois LFSR, STEPS steps per clock.
//
// Used as the source of the uniform dither ahead of the Q and PIR truncations
// and of the uniform numbers summed by the Gaussian noise generator. The paper
// states that dither is added before the truncations but not how it is made;
// a maximal-length LFSR (taps 32, 22, 2, 1) is this design's choice. The state
// is reset to SEED (non-zero) and `state` is the registered current value.
//
// With one step per clock the state only shifts by one bit between clocks, so
// a field taken from it is strongly correlated with its own previous value
// (the top 16 bits read as a signed number have a lag-1 correlation of about
// -0.25). Advancing the register by as many steps as bits are used per clock
// makes successive fields independent: the noise generator uses 16 steps, the
// dither source 32. The unrolled steps are a small XOR network.
module pm_lfsr #(
  parameter logic [31:0] SEED  = 32'h1,
  parameter int unsigned STEPS = 1
) (
  input  logic        clk,
  input  logic        rst,
  output logic [31:0] state
);
  localparam logic [31:0] TAPS = 32'h8020_0003;

  logic [31:0] next;

  always_comb begin
    next = state;
    for (int s = 0; s < STEPS; s++)
      next = next[0] ? ((next >> 1) ^ TAPS) : (next >> 1);
  end

  always_ff @(posedge clk) begin
    if (rst) state <= SEED;
    else     state <= next;
  end
endmodule
