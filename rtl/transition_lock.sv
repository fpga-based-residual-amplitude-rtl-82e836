// transition_lock: error-signal generation and servo of the clock-transition lock.
//
// The PMT fluorescence sample is high-passed (fir_hpf) to strip DC and flicker,
// mixed with the phase-shifted sine of the demodulation DDS, and low-passed to a
// 24-bit error signal (fir_lpf; loading a minimum-phase coefficient set keeps
// the loop delay small). Two PI servos are cascaded: the first acts on the error
// signal and drives the fast precision DAC, the second integrates the first
// one's output and drives the slow one, so the slow DAC takes over the long-term
// drift. This chain is the paper's; widths beyond the 24-bit error signal, the
// filter lengths and the servo formats are this design's. The high-pass window
// (2^11 samples, 8.2 us) puts its first null at 122 kHz, so DC and flicker are
// removed while a 200 kHz carrier passes.
// Coefficients of the low-pass are written through coef_wr (FILT_TL_LPF).
// Timing: ADC sample to err_valid 7 clocks (3 HPF, 1 mixer, 3 LPF), plus the
// high-pass group delay of 2^10 samples on the signal itself; the fast
// servo output follows 1 clock later and the slow servo output 1 clock after that.
module transition_lock
  import ram_pkg::*;
#(
  parameter int unsigned HPF_LOG2N = 11,
  parameter int unsigned LPF_TAPS  = 32
) (
  input  logic     clk,
  input  logic     rst,
  input  logic     adc_valid,
  input  adc_t     adc_data,
  input  amp_t     ref_sin,
  input  coef_wr_t coef_wr,
  input  pi_cfg_t  pi_fast,
  input  pi_cfg_t  pi_slow,
  output logic     err_valid,
  output lpf_t     err_data,
  output logic     fast_valid,
  output dac_t     dac_fast,
  output logic     slow_valid,
  output dac_t     dac_slow
);
  localparam int unsigned LAW = (LPF_TAPS > 1) ? $clog2(LPF_TAPS) : 1;

  logic hp_valid, mx_valid;
  amp_t hp_data;
  lpf_t mx_data;

  fir_hpf #(.IN_W(ADC_W), .EXT(AMP_W - ADC_W), .LOG2N(HPF_LOG2N)) u_hpf (
    .clk, .rst,
    .in_valid(adc_valid), .in_data(adc_data),
    .out_valid(hp_valid), .out_data(hp_data)
  );

  mixer #(.A_W(AMP_W), .B_W(AMP_W), .OUT_W(LPF_W), .SHIFT(2 * AMP_W - 1 - (LPF_W - 1))) u_mix (
    .clk, .rst, .in_valid(hp_valid), .a(hp_data), .b(ref_sin),
    .out_valid(mx_valid), .out_data(mx_data)
  );

  fir_lpf #(.IN_W(LPF_W), .OUT_W(LPF_W), .COEF_W(COEF_W), .TAPS(LPF_TAPS),
            .OUT_SHIFT(COEF_FRAC)) u_lpf (
    .clk, .rst,
    .coef_we(coef_wr.we && coef_wr.sel == FILT_TL_LPF),
    .coef_addr(LAW'(coef_wr.addr)), .coef_data(coef_wr.data),
    .in_valid(mx_valid), .in_data(mx_data),
    .out_valid(err_valid), .out_data(err_data)
  );

  pi_servo #(.IN_W(LPF_W), .OUT_W(DAC_W), .K_W(K_W)) u_pi_fast (
    .clk, .rst, .enable(pi_fast.enable), .in_valid(err_valid), .err(err_data),
    .kp(pi_fast.kp), .ki(pi_fast.ki), .offset(pi_fast.offset),
    .out_valid(fast_valid), .out_data(dac_fast)
  );

  pi_servo #(.IN_W(DAC_W), .OUT_W(DAC_W), .K_W(K_W)) u_pi_slow (
    .clk, .rst, .enable(pi_slow.enable), .in_valid(fast_valid), .err(dac_fast),
    .kp(pi_slow.kp), .ki(pi_slow.ki), .offset(pi_slow.offset),
    .out_valid(slow_valid), .out_data(dac_slow)
  );
endmodule
