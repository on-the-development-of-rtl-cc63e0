// pm_pkg: widths, configuration and readout types shared by the phasemeter.
//
// The sample format (12-bit ADC words, eight per 512 MHz clock), the 16-bit
// truncated phase increment, the CIC readout orders and rate limits follow the
// paper. The other widths (LUT depth and amplitude, Q width, PIR precision,
// gain fields) are choices of this implementation; each is named here so the
// modules agree on one value.
package pm_pkg;

  // Data converter side: 4.096 GSPS delivered as 8 samples per 512 MHz clock.
  localparam int unsigned NSAMP     = 8;
  localparam int unsigned ADC_W     = 12;

  // Numerically controlled oscillator.
  localparam int unsigned PIR_W     = 32;  // full-precision frequency word (f0 + servo)
  localparam int unsigned PHASE_W   = 16;  // PIR after dithered truncation, phase accumulator width
  localparam int unsigned LUT_ADDR_W = 10; // sine table depth 2^10
  localparam int unsigned LUT_AMP_W  = 16; // signed sine amplitude

  // Demodulation and averaging.
  localparam int unsigned PROD_W    = ADC_W + LUT_AMP_W;   // 28-bit mixer product
  localparam int unsigned SUM_W     = PROD_W + 4;          // sum of 16 products
  localparam int unsigned Q_DROP    = 14;                  // LSBs removed by the dithered Q truncation
  localparam int unsigned Q_W       = SUM_W - Q_DROP;      // 18-bit Q fed to the servo

  // Servo.
  localparam int unsigned GAIN_W    = 18;  // signed P and I gains
  localparam int unsigned SHIFT_W   = 6;   // right shifts after the gain products
  localparam int unsigned INTEG_W   = 48;  // integrator register

  // Readout decimation. 512 MHz / 2^24 = 30.5 Hz is the slowest readout rate.
  localparam int unsigned CIC_RATE_W = 24;
  localparam int unsigned Q2_PRE     = 16;  // Q prefilter: 512 MHz -> 32 MHz
  localparam int unsigned Q2_RATE_W  = 20;  // 32 MHz / 2^20 = 30.5 Hz

  localparam int unsigned PIR_RD_W  = PHASE_W + 1 + 2*CIC_RATE_W;  // CIC of the (unsigned) PIR
  localparam int unsigned Q_RD_W    = Q_W + 2*CIC_RATE_W;
  localparam int unsigned I_RD_W    = SUM_W + 2*CIC_RATE_W;
  localparam int unsigned Q2_RD_W   = 2*Q_W + Q2_RATE_W;

  // Per-ADPLL settings written by the processing system.
  typedef struct packed {
    logic [PIR_W-1:0]            f0;          // starting frequency, fraction of 4.096 GHz * 2^32
    logic signed [GAIN_W-1:0]    kp;          // proportional gain
    logic signed [GAIN_W-1:0]    ki;          // integral gain
    logic [SHIFT_W-1:0]          sp;          // right shift of kp*Q
    logic [SHIFT_W-1:0]          si;          // right shift of the integrator
    logic [4:0]                  q_shift;     // C of the 2^-C gain stage
    logic                        servo_en;    // 0: servo output and integrator held at zero
    logic                        noise_en;    // switch of the Gaussian noise injection
    logic [15:0]                 noise_amp;   // noise amplitude
    logic [CIC_RATE_W:0]         cic_rate;    // decimation factor of the PIR/Q/I CICs
    logic [Q2_RATE_W:0]          q2_rate;     // decimation factor of the Q^2 CIC (at 32 MHz)
  } adpll_cfg_t;

  // Decimated readout of one ADPLL.
  typedef struct packed {
    logic                        valid;       // one-cycle strobe for pir/q/i
    logic signed [PIR_RD_W-1:0]  pir;
    logic signed [Q_RD_W-1:0]    q;
    logic signed [I_RD_W-1:0]    i;
    logic                        q2_valid;    // one-cycle strobe for q2
    logic [Q2_RD_W-1:0]          q2;
  } adpll_rd_t;

  // Full-rate monitor taps of one ADPLL (the signals around the noise adder).
  typedef struct packed {
    logic [PIR_W-1:0]            before_noise; // f0 + servo output
    logic [PIR_W-1:0]            after_noise;  // f0 + servo output + noise
  } adpll_mon_t;

endpackage
