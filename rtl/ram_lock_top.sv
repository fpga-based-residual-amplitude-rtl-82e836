// ram_lock_top: FPGA fabric for phase-modulation laser locking with active
// residual-amplitude-modulation (RAM) suppression.
//
// One phase accumulator drives four synchronous DDS lookups:
//   DDS1  modulation sine -> RF-DAC channel 0 -> electro-optic phase modulator
//   DDS2  + ps_demod      -> demodulation reference of the transition lock
//   DDS3  + ps_ram_det    -> sine/cosine of the RAM lock-in
//   DDS4  + ps_ram_am     -> sine/cosine carriers of the RAM cancellation
// The transition lock turns the PMT fluorescence (RF-ADC 0) into an error signal
// and two cascaded PI outputs for the two precision DACs on the laser piezo. The
// RAM suppression measures the RAM on the in-loop photodetector (RF-ADC 1) and
// writes the cancellation wave to RF-DAC channel 1, which drives the
// electro-optic amplitude modulator. Because all four DDS share one accumulator,
// the phase relations set by the phase shifters never drift.
// Interface: the two ADCs arrive as 7-lane DDR buses; both RF-DAC codes leave on
// one registered 32-bit bus {channel 1, channel 0}, two's complement; the
// precision-DAC codes, the I/Q monitor values and the error signal are plain
// outputs (their converters and the processor link are outside this design), and
// the run-time settings enter as one configuration record plus a coefficient
// write port. The block structure follows the paper's fabric diagram; parameter
// values not given by the paper are marked in the sub-modules.
// Timing: everything runs on the 250 MHz converter clock.
module ram_lock_top
  import ram_pkg::*;
#(
  parameter int unsigned DEC          = 8,
  parameter int unsigned TL_HPF_LOG2N = 11,
  parameter int unsigned RS_HPF_LOG2N = 8,
  parameter int unsigned LPF_TAPS     = 32
) (
  input  logic                 clk,
  input  logic                 rst,
  input  fabric_cfg_t          cfg,
  input  coef_wr_t             coef_wr,
  input  logic [ADC_W/2-1:0]   adc_pmt_ddr,
  input  logic [ADC_W/2-1:0]   adc_ram_ddr,
  output logic [2*DAC_W-1:0]   rf_dac_bus,
  output logic                 err_valid,
  output lpf_t                 err_data,
  output logic                 slow_dac_valid,
  output dac_t                 slow_dac_fast,
  output dac_t                 slow_dac_slow,
  output logic                 mon_valid,
  output lpf_t                 mon_i,
  output lpf_t                 mon_q
);
  // ---- converters ----
  logic pmt_valid, ram_valid;
  adc_t pmt_data, ram_data;

  adc_ddr_if #(.ADC_W(ADC_W)) u_adc_pmt (
    .clk, .rst, .derand(cfg.adc_derand), .ddr_data(adc_pmt_ddr),
    .valid(pmt_valid), .sample(pmt_data)
  );
  adc_ddr_if #(.ADC_W(ADC_W)) u_adc_ram (
    .clk, .rst, .derand(cfg.adc_derand), .ddr_data(adc_ram_ddr),
    .valid(ram_valid), .sample(ram_data)
  );

  // ---- synchronous DDS bank ----
  phase_t phase, ph_demod, ph_det, ph_am;
  amp_t   mod_sin, demod_sin, det_sin, det_cos, am_sin, am_cos;

  phase_acc #(.PHASE_W(PHASE_W)) u_acc (.clk, .rst, .ftw(cfg.ftw), .phase);

  phase_shifter #(.PHASE_W(PHASE_W)) u_ps_demod (
    .clk, .rst, .phase_in(phase), .offset(cfg.ps_demod), .phase_out(ph_demod));
  phase_shifter #(.PHASE_W(PHASE_W)) u_ps_det (
    .clk, .rst, .phase_in(phase), .offset(cfg.ps_ram_det), .phase_out(ph_det));
  phase_shifter #(.PHASE_W(PHASE_W)) u_ps_am (
    .clk, .rst, .phase_in(phase), .offset(cfg.ps_ram_am), .phase_out(ph_am));

  dds_sincos #(.PHASE_W(PHASE_W), .AMP_W(AMP_W)) u_dds_mod (
    .clk, .phase(phase), .sin_o(mod_sin), .cos_o());
  dds_sincos #(.PHASE_W(PHASE_W), .AMP_W(AMP_W)) u_dds_demod (
    .clk, .phase(ph_demod), .sin_o(demod_sin), .cos_o());
  dds_sincos #(.PHASE_W(PHASE_W), .AMP_W(AMP_W)) u_dds_det (
    .clk, .phase(ph_det), .sin_o(det_sin), .cos_o(det_cos));
  dds_sincos #(.PHASE_W(PHASE_W), .AMP_W(AMP_W)) u_dds_am (
    .clk, .phase(ph_am), .sin_o(am_sin), .cos_o(am_cos));

  // ---- transition lock ----
  logic fast_valid, slow_valid;

  transition_lock #(.HPF_LOG2N(TL_HPF_LOG2N), .LPF_TAPS(LPF_TAPS)) u_tl (
    .clk, .rst, .adc_valid(pmt_valid), .adc_data(pmt_data), .ref_sin(demod_sin),
    .coef_wr, .pi_fast(cfg.pi_fast), .pi_slow(cfg.pi_slow),
    .err_valid, .err_data,
    .fast_valid, .dac_fast(slow_dac_fast),
    .slow_valid, .dac_slow(slow_dac_slow)
  );
  assign slow_dac_valid = slow_valid;

  // ---- RAM suppression ----
  dac_t eoam;

  ram_suppression #(.DEC(DEC), .HPF_LOG2N(RS_HPF_LOG2N), .BPF_TAPS(LPF_TAPS), .LPF_TAPS(LPF_TAPS)) u_rs (
    .clk, .rst, .adc_valid(ram_valid), .adc_data(ram_data),
    .det_sin, .det_cos, .am_sin, .am_cos,
    .coef_wr, .gain_i(cfg.gain_i), .gain_q(cfg.gain_q),
    .mon_valid, .mon_i, .mon_q, .eoam
  );

  // ---- RF-DAC bus ----
  always_ff @(posedge clk) begin
    if (rst) rf_dac_bus <= '0;
    else     rf_dac_bus <= {eoam, mod_sin};
  end
endmodule
