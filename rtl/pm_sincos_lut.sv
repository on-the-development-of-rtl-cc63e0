// pm_sincos_lut: sine and cosine of one NCO phase by table look-up.
//
// The upper LUT_ADDR_W bits of the phase address a full-wave table of
// 2^LUT_ADDR_W signed samples of round((2^(AMP_W-1)-1) * sin(2*pi*i/2^ADDR_W)).
// The cosine is read from the same table a quarter turn later. The paper has
// one such LUT per parallel sample (eight per ADPLL) but gives neither depth
// nor amplitude width; 1024 x 16 bit and plain phase truncation (no dither, no
// interpolation) are this design's choices. The table is filled when the
// simulation or the FPGA image starts, from the formula above.
//
// Timing: one clock from phase to sin/cos (registered ROM read).
module pm_sincos_lut
  import pm_pkg::*;
#(
  parameter int unsigned PW     = PHASE_W,
  parameter int unsigned ADDR_W = LUT_ADDR_W,
  parameter int unsigned AMP_W  = LUT_AMP_W
) (
  input  logic                    clk,
  input  logic [PW-1:0]           phase,
  output logic signed [AMP_W-1:0] sin_o,
  output logic signed [AMP_W-1:0] cos_o
);
  localparam int unsigned DEPTH = 2 ** ADDR_W;
  localparam real         AMP   = real'(2 ** (AMP_W - 1) - 1);
  localparam real         TWO_PI = 6.283185307179586;

  logic signed [AMP_W-1:0] rom [DEPTH];

  initial begin
    for (int i = 0; i < DEPTH; i++)
      rom[i] = AMP_W'($rtoi($floor(AMP * $sin(TWO_PI * real'(i) / real'(DEPTH)) + 0.5)));
  end

  logic [ADDR_W-1:0] a_sin, a_cos;
  assign a_sin = phase[PW-1 -: ADDR_W];
  assign a_cos = a_sin + ADDR_W'(DEPTH / 4);

  always_ff @(posedge clk) begin
    sin_o <= rom[a_sin];
    cos_o <= rom[a_cos];
  end
endmodule
