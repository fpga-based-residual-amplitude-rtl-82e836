// ram_pkg: shared widths, types and configuration record of the laser-lock /
// RAM-suppression fabric.
//
// Widths that follow the paper: 32-bit DDS phase, 16-bit sine table, 14-bit RF-ADC
// samples, 16-bit RF-DAC codes, 24-bit demodulated (low-pass filtered) signals and
// 16-bit precision-DAC codes. Coefficient width (18 bits, one DSP multiplier
// operand) and the gain/servo word formats are this design's own choices.
package ram_pkg;

  localparam int unsigned PHASE_W = 32;  // DDS phase accumulator
  localparam int unsigned AMP_W   = 16;  // DDS amplitude / sine table word
  localparam int unsigned ADC_W   = 14;  // RF-ADC sample
  localparam int unsigned DAC_W   = 16;  // RF-DAC and precision-DAC code
  localparam int unsigned LPF_W   = 24;  // demodulated signal width
  localparam int unsigned COEF_W  = 18;  // FIR coefficient, Q1.17
  localparam int unsigned COEF_FRAC = COEF_W - 1;
  localparam int unsigned TAP_AW  = 6;   // coefficient address width (up to 64 taps)
  localparam int unsigned K_W     = 16;  // servo and gain words

  typedef logic        [PHASE_W-1:0] phase_t;
  typedef logic signed [AMP_W-1:0]   amp_t;
  typedef logic signed [ADC_W-1:0]   adc_t;
  typedef logic signed [DAC_W-1:0]   dac_t;
  typedef logic signed [LPF_W-1:0]   lpf_t;
  typedef logic signed [COEF_W-1:0]  coef_t;

  // Filters whose coefficients can be rewritten at run time.
  typedef enum logic [2:0] {
    FILT_TL_LPF  = 3'd1,   // transition lock: error-signal low-pass
    FILT_RS_BPF  = 3'd3,   // RAM path: low-pass half of the band-pass
    FILT_RS_LPFI = 3'd4,   // RAM path: in-phase low-pass
    FILT_RS_LPFQ = 3'd5    // RAM path: quadrature low-pass
  } filt_id_e;

  // One coefficient write.
  typedef struct packed {
    logic              we;
    filt_id_e          sel;
    logic [TAP_AW-1:0] addr;
    coef_t             data;
  } coef_wr_t;

  // PI servo settings.
  typedef struct packed {
    logic                  enable;
    logic signed [K_W-1:0] kp;
    logic signed [K_W-1:0] ki;
    dac_t                  offset;
  } pi_cfg_t;

  // Adjustable gain: mantissa * 2^exponent.
  typedef struct packed {
    logic signed [K_W-1:0] mant;
    logic        [3:0]     exp;
  } gain_t;

  // Run-time configuration written by the processor.
  typedef struct packed {
    phase_t  ftw;          // modulation frequency tuning word
    phase_t  ps_demod;     // phase of the transition-lock demodulation DDS
    phase_t  ps_ram_det;   // phase of the RAM detection (lock-in) DDS
    phase_t  ps_ram_am;    // phase of the RAM cancellation DDS
    pi_cfg_t pi_fast;      // first servo
    pi_cfg_t pi_slow;      // second, cascaded servo
    gain_t   gain_i;       // in-phase cancellation gain
    gain_t   gain_q;       // quadrature cancellation gain
    logic    adc_derand;   // undo the ADC output randomizer
  } fabric_cfg_t;

  // Saturate a wide signed value to W bits (W <= 64).
  function automatic logic signed [63:0] sat_s(input logic signed [63:0] v, input int unsigned w);
    logic signed [63:0] hi, lo;
    hi = (64'sd1 <<< (w - 1)) - 64'sd1;
    lo = -(64'sd1 <<< (w - 1));
    if (v > hi)      return hi;
    else if (v < lo) return lo;
    else             return v;
  endfunction

endpackage
