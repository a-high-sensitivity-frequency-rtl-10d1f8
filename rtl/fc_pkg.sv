// fc_pkg: widths and number formats shared by the FID frequency counter.
//
// The counter measures the frequency of a pulsed, exponentially decaying
// oscillation (a free-induction-decay signal). Each pulse is digitised by an
// 18-bit ADC, stored, turned into an analytic signal with a truncated Hilbert
// transform, converted to phase and amplitude, unwrapped, and fitted with an
// amplitude-weighted straight line; the slope is the frequency.
//
// Number formats used across the blocks:
//   sample  : signed ADC code, SAMPLE_W bits (18, as the ADC in the paper).
//   hilbert : signed, same scale as the sample, HILB_W bits (the truncated
//             transform of a full-scale input can reach about 2.7x full scale).
//   phase   : one full turn = 2**PHASE_W, two's complement, so -1/2 .. +1/2 turn.
//   phi     : unwrapped (cumulative) phase, same LSB as phase, PHI_W bits.
//   weight  : unsigned amplitude weight, WEIGHT_W bits.
//   ratio   : signed frequency / sampling rate, RATIO_FRAC fraction bits.
//   freq    : signed frequency in Hz with FREQ_FRAC fraction bits.
// The 18-bit sample width is from the paper; every other width here is a
// choice of this design, sized so that no stage overflows at full scale.
package fc_pkg;

  localparam int SAMPLE_W   = 18;
  localparam int HILB_W     = 20;
  localparam int PHASE_W    = 24;
  localparam int PHI_W      = 40;
  localparam int MAG_W      = 22;
  localparam int WEIGHT_W   = 16;
  localparam int RATIO_FRAC = 40;
  localparam int RATIO_W    = 48;
  localparam int FREQ_FRAC  = 16;
  localparam int FREQ_W     = 40;

  typedef logic signed [SAMPLE_W-1:0] sample_t;
  typedef logic signed [HILB_W-1:0]   hilb_t;
  typedef logic signed [PHASE_W-1:0]  phase_t;
  typedef logic signed [PHI_W-1:0]    phi_t;
  typedef logic        [WEIGHT_W-1:0] weight_t;
  typedef logic signed [RATIO_W-1:0]  ratio_t;
  typedef logic signed [FREQ_W-1:0]   freq_t;

  // One frequency result, as handed from the engine to the register port.
  typedef struct packed {
    logic                  err;    // segment too short or fit degenerate
    ratio_t                ratio;  // f / fs, RATIO_FRAC fraction bits
    freq_t                 freq;   // f in Hz, FREQ_FRAC fraction bits
    logic [31:0]           cnt;    // samples in the segment (data_cnt)
    logic [31:0]           cycles; // clock cycles the engine spent on it
  } result_t;

endpackage
