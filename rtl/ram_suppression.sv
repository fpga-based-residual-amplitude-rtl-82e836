// ram_suppression: lock-in detection of the residual amplitude modulation (RAM)
// and its cancellation by complex amplitude modulation.
//
// Detection: the RAM photodetector sample is down-sampled (decimator, gaining
// resolution), band-pass filtered around the modulation carrier (fir_hpf then
// fir_lpf), and mixed with the sine and cosine of the phase-adjusted detection
// DDS. Each product is low-passed to 24 bits (fir_lpf), giving the in-phase (I,
// sine) and quadrature (Q, cosine) RAM amplitudes, which are also brought out
// for monitoring. The detection-side sine/cosine are taken at the decimated
// sample instants, so the mixers run at the decimated rate.
// Cancellation: I and Q, held between updates, amplitude-modulate the sine and
// cosine of a second phase-adjusted DDS at the full clock rate; each wave passes
// an adjustable-gain amplifier and the two are summed into the RF-DAC code of
// the electro-optic amplitude modulator. Through the optics this closes a loop
// that drives the detected RAM toward zero; the gain sets how far.
// Signal flow is the paper's; the decimation factor, filter lengths and widths
// are this design's. The high-pass window (2^8 decimated samples, 8.2 us) puts
// its first null at 122 kHz; removing DC here matters beyond noise: a DC level
// would be turned into an f ripple on I/Q and back into DC at the modulator.
// Coefficients: FILT_RS_BPF, FILT_RS_LPFI, FILT_RS_LPFQ.
// Timing: an ADC sample reaches mon_valid after the decimation block is
// complete plus 3 + 3 + 1 + 3 + 1 = 11 clocks (plus the 128-sample high-pass
// group delay on the signal itself); the EOAM code follows a
// change of I/Q (or of the DDS) by 3 clocks (AM mixer, gain, sum).
module ram_suppression
  import ram_pkg::*;
#(
  parameter int unsigned DEC       = 8,
  parameter int unsigned HPF_LOG2N = 8,
  parameter int unsigned BPF_TAPS  = 32,
  parameter int unsigned LPF_TAPS  = 32
) (
  input  logic     clk,
  input  logic     rst,
  input  logic     adc_valid,
  input  adc_t     adc_data,
  input  amp_t     det_sin,
  input  amp_t     det_cos,
  input  amp_t     am_sin,
  input  amp_t     am_cos,
  input  coef_wr_t coef_wr,
  input  gain_t    gain_i,
  input  gain_t    gain_q,
  output logic     mon_valid,
  output lpf_t     mon_i,
  output lpf_t     mon_q,
  output dac_t     eoam
);
  localparam int unsigned DW  = ADC_W + $clog2(DEC);   // decimated width
  localparam int unsigned BW  = DW + 1;                // band-passed width
  localparam int unsigned BAW = (BPF_TAPS > 1) ? $clog2(BPF_TAPS) : 1;
  localparam int unsigned LAW = (LPF_TAPS > 1) ? $clog2(LPF_TAPS) : 1;

  // ---- detection ----
  logic                 dec_valid, hp_valid, bp_valid, mi_valid, mq_valid, li_valid, lq_valid;
  logic signed [DW-1:0] dec_data;
  logic signed [BW-1:0] hp_data, bp_data;
  lpf_t                 mi_data, mq_data, li_data, lq_data;

  decimator #(.IN_W(ADC_W), .R(DEC)) u_dec (
    .clk, .rst, .in_valid(adc_valid), .in_data(adc_data),
    .out_valid(dec_valid), .out_data(dec_data)
  );

  fir_hpf #(.IN_W(DW), .EXT(1), .LOG2N(HPF_LOG2N)) u_hpf (
    .clk, .rst,
    .in_valid(dec_valid), .in_data(dec_data),
    .out_valid(hp_valid), .out_data(hp_data)
  );

  fir_lpf #(.IN_W(BW), .OUT_W(BW), .COEF_W(COEF_W), .TAPS(BPF_TAPS),
            .OUT_SHIFT(COEF_FRAC)) u_bpf (
    .clk, .rst,
    .coef_we(coef_wr.we && coef_wr.sel == FILT_RS_BPF),
    .coef_addr(BAW'(coef_wr.addr)), .coef_data(coef_wr.data),
    .in_valid(hp_valid), .in_data(hp_data),
    .out_valid(bp_valid), .out_data(bp_data)
  );

  localparam int unsigned MSH = BW + AMP_W - 1 - (LPF_W - 1);

  mixer #(.A_W(BW), .B_W(AMP_W), .OUT_W(LPF_W), .SHIFT(MSH)) u_mix_i (
    .clk, .rst, .in_valid(bp_valid), .a(bp_data), .b(det_sin),
    .out_valid(mi_valid), .out_data(mi_data)
  );
  mixer #(.A_W(BW), .B_W(AMP_W), .OUT_W(LPF_W), .SHIFT(MSH)) u_mix_q (
    .clk, .rst, .in_valid(bp_valid), .a(bp_data), .b(det_cos),
    .out_valid(mq_valid), .out_data(mq_data)
  );

  fir_lpf #(.IN_W(LPF_W), .OUT_W(LPF_W), .COEF_W(COEF_W), .TAPS(LPF_TAPS),
            .OUT_SHIFT(COEF_FRAC)) u_lpf_i (
    .clk, .rst,
    .coef_we(coef_wr.we && coef_wr.sel == FILT_RS_LPFI),
    .coef_addr(LAW'(coef_wr.addr)), .coef_data(coef_wr.data),
    .in_valid(mi_valid), .in_data(mi_data),
    .out_valid(li_valid), .out_data(li_data)
  );
  fir_lpf #(.IN_W(LPF_W), .OUT_W(LPF_W), .COEF_W(COEF_W), .TAPS(LPF_TAPS),
            .OUT_SHIFT(COEF_FRAC)) u_lpf_q (
    .clk, .rst,
    .coef_we(coef_wr.we && coef_wr.sel == FILT_RS_LPFQ),
    .coef_addr(LAW'(coef_wr.addr)), .coef_data(coef_wr.data),
    .in_valid(mq_valid), .in_data(mq_data),
    .out_valid(lq_valid), .out_data(lq_data)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      mon_valid <= 1'b0;
      mon_i     <= '0;
      mon_q     <= '0;
    end else begin
      mon_valid <= li_valid;
      if (li_valid) mon_i <= li_data;
      if (lq_valid) mon_q <= lq_data;
    end
  end

  // ---- cancellation ----
  logic am_vi, am_vq, g_vi, g_vq;
  lpf_t am_i, am_q;
  dac_t g_i, g_q;

  mixer #(.A_W(LPF_W), .B_W(AMP_W), .OUT_W(LPF_W), .SHIFT(AMP_W - 1)) u_am_i (
    .clk, .rst, .in_valid(1'b1), .a(mon_i), .b(am_sin),
    .out_valid(am_vi), .out_data(am_i)
  );
  mixer #(.A_W(LPF_W), .B_W(AMP_W), .OUT_W(LPF_W), .SHIFT(AMP_W - 1)) u_am_q (
    .clk, .rst, .in_valid(1'b1), .a(mon_q), .b(am_cos),
    .out_valid(am_vq), .out_data(am_q)
  );

  gain_amp #(.IN_W(LPF_W), .G_W(K_W), .E_W(4), .OUT_W(DAC_W)) u_gain_i (
    .clk, .rst, .in_valid(am_vi), .in_data(am_i), .mant(gain_i.mant), .exp_i(gain_i.exp),
    .out_valid(g_vi), .out_data(g_i)
  );
  gain_amp #(.IN_W(LPF_W), .G_W(K_W), .E_W(4), .OUT_W(DAC_W)) u_gain_q (
    .clk, .rst, .in_valid(am_vq), .in_data(am_q), .mant(gain_q.mant), .exp_i(gain_q.exp),
    .out_valid(g_vq), .out_data(g_q)
  );

  sat_sum #(.W(DAC_W)) u_sum (.clk, .rst, .a(g_i), .b(g_q), .y(eoam));
endmodule
