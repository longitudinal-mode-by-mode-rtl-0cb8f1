// mmfb_pkg: widths, fixed-point conventions, types and helper functions shared by
// the longitudinal mode-by-mode feedback processor.
//
// Number formats used throughout:
//   * phase words are unsigned fractions of one turn, PHASE_W = 34 bits (the width
//     of the phase accumulators in the DDS);
//   * frequency words are 32-bit tuning words, f = word * F_CLK / 2^34, F_CLK = 144 MHz;
//   * sine/cosine values are signed TRIG_W = 16 bit, full scale 2^15 - 1 = 1.0;
//   * baseband and sideband I/Q samples are signed IQ_W = 18 bit;
//   * gains are signed GAIN_W = 18 bit with GAIN_FRAC = 12 fraction bits (1.0 = 4096);
//   * phase offsets in the LUTs are unsigned 16-bit fractions of a turn;
//   * amplitude gains in the gain LUT and gain pattern are unsigned 16 bit, 1.0 = 2^14.
// The 34-bit phase, 32-bit pattern words, 16-bit ADC and DAC and 6 harmonic blocks
// follow the paper; every other width here is a choice of this implementation.
package mmfb_pkg;

  localparam int unsigned ADC_W     = 16;   // ADC sample width
  localparam int unsigned DAC_W     = 16;   // DAC word width
  localparam int unsigned PHASE_W   = 34;   // DDS phase accumulator width
  localparam int unsigned FREQ_W    = 32;   // frequency pattern word width
  localparam int unsigned TRIG_W    = 16;   // CORDIC sin/cos output width
  localparam int unsigned IQ_W      = 18;   // I/Q sample width
  localparam int unsigned GAIN_W    = 18;   // PI gain width
  localparam int unsigned GAIN_FRAC = 12;   // PI gain fraction bits
  localparam int unsigned POFS_W    = 16;   // phase offset word width
  localparam int unsigned AMP_W     = 16;   // gain LUT / gain pattern width
  localparam int unsigned AMP_FRAC  = 14;   // gain LUT / gain pattern fraction bits
  localparam int unsigned LUT_AW    = 8;    // LUT address width
  localparam int unsigned HNUM_W    = 5;    // harmonic number width (h up to 31)
  localparam int unsigned MNUM_W    = 2;    // synchrotron motion type m width (m = 1..3)
  localparam int unsigned N_HARM    = 6;    // harmonic feedback blocks

  typedef logic signed [IQ_W-1:0]   iq_t;
  typedef logic signed [TRIG_W-1:0] trig_t;
  typedef logic [PHASE_W-1:0]       phase_t;
  typedef logic [FREQ_W-1:0]        freq_t;

  typedef struct packed {
    iq_t i;
    iq_t q;
  } iq_pair_t;

  // Words read from the pattern memory at every pattern clock (5 kHz).
  typedef struct packed {
    logic  rev_is_header;   // rev_word is the initial revolution frequency
    freq_t rev_word;        // header: initial f_rev; otherwise signed offset per control clock
    freq_t fs_word;         // synchrotron frequency
    freq_t fmod_word;       // modulation frequency
  } freq_pattern_t;

  // Per-harmonic words read from the pattern memory at every pattern clock.
  typedef struct packed {
    iq_t               ref_i;   // I reference
    iq_t               ref_q;   // Q reference
    logic [AMP_W-1:0]  gain;    // DUC gain pattern, 1.0 = 2^14
  } harm_pattern_t;

  // Static settings of one harmonic block (written by the control system).
  typedef struct packed {
    logic [HNUM_W-1:0]        h;           // harmonic number
    logic [MNUM_W-1:0]        m;           // synchrotron motion type (1 dipole, 2 quadrupole)
    logic                     usb_on;      // SSBF: pass the upper sideband
    logic                     lsb_on;      // SSBF: pass the lower sideband
    logic                     mod_on;      // reference modulation on
    logic                     usb_mod_on;  // modulation excites the USB
    logic                     lsb_mod_on;  // modulation excites the LSB
    logic signed [GAIN_W-1:0] kp;          // proportional gain
    logic signed [GAIN_W-1:0] ki;          // integral gain
  } harm_cfg_t;

  // LUT selector for the shared LUT write port.
  typedef enum logic [1:0] {
    LUT_DDC_PHASE = 2'd0,
    LUT_USB_PHASE = 2'd1,
    LUT_LSB_PHASE = 2'd2,
    LUT_DUC_GAIN  = 2'd3
  } lut_sel_e;

  // Saturate a wide signed value to w bits (w <= 64).
  function automatic logic signed [63:0] sat(input logic signed [63:0] v, input int unsigned w);
    logic signed [63:0] hi, lo;
    hi = (64'sd1 <<< (w - 1)) - 64'sd1;
    lo = -(64'sd1 <<< (w - 1));
    if (v > hi)      return hi;
    else if (v < lo) return lo;
    else             return v;
  endfunction

endpackage
