// tb_workload_200khz: the fabric at its default size running the paper's own
// operating point, 200 kHz phase modulation at 250 MSps.
//
// Same clock-physics model as tb_ram_lock_top (laser detuning, PMT signal with
// RAM leakage, in-loop RAM detector, 10- and 30-clock optical delays). At
// 200 kHz both moving-average high-passes (2048 samples at 250 MSps, 256 at
// 31.25 MSps) span 1.64 carrier periods; their averages are in phase opposition
// to the centre tap, so they pass the carrier with a gain of 1.18 instead of 1.
// The default 32-tap low-passes leave most of the 400 kHz 2f product on the error signal and on
// I/Q, so all measurements are averaged over one carrier period (1250 clocks).
// Checks:
//  1. servos off: a 32-step sweep of the demodulation phase finds an error
//     signal of about 1.18*256*d0 (phase calibration, as in the paper);
//  2. gains 0: the averaged |I+jQ| equals about 1.18*0.93*256*A (0.93 = gain
//     of the reset 32-tap boxcar at 200 kHz and 31.25 MSps);
//  3. lock: the averaged detuning settles at the RAM-induced offset and the
//     slow servo takes over;
//  4. RAM suppression (phase found by a 16-step sweep; set loop gain 0.5, about
//     0.55 after the 1.18*0.93 chain gain at 200 kHz) lowers the averaged RAM
//     residual below 0.75 and the lock offset below 0.7 of its value without
//     suppression.
module tb_workload_200khz;
  import ram_pkg::*;
  localparam real PI = 3.14159265358979;
  localparam real KAPPA = 0.25, BETA = 0.5, A_RAM = 2000.0;
  localparam int  HIST = 64;

  logic clk = 1'b0, rst = 1'b1;
  fabric_cfg_t cfg;
  coef_wr_t coef_wr;
  logic [6:0] adc_pmt_ddr, adc_ram_ddr;
  logic [31:0] rf_dac_bus;
  logic err_valid, slow_dac_valid, mon_valid;
  lpf_t err_data, mon_i, mon_q;
  dac_t slow_dac_fast, slow_dac_slow;

  logic [13:0] pmt_sample, ram_sample;
  real d0, d, a_ram;
  real eopm_h [HIST];
  real eoam_h [HIST];
  int checks = 0, failures = 0;
  // mechanism counters
  int n_mon = 0, n_derand = 0, n_lock = 0, n_takeover = 0,
      n_cancel = 0, n_ps_sweep = 0, n_release = 0, n_offset_cut = 0;

  always #2 clk = ~clk;

  ram_lock_top dut (
    .clk, .rst, .cfg, .coef_wr, .adc_pmt_ddr, .adc_ram_ddr, .rf_dac_bus,
    .err_valid, .err_data, .slow_dac_valid, .slow_dac_fast, .slow_dac_slow,
    .mon_valid, .mon_i, .mon_q);

  adc_ddr_model u_adc_pmt (.clk, .randomize(cfg.adc_derand), .sample(pmt_sample), .lanes(adc_pmt_ddr));
  adc_ddr_model u_adc_ram (.clk, .randomize(cfg.adc_derand), .sample(ram_sample), .lanes(adc_ram_ddr));

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [13:0] q14(input real v);
    if (v > 8191.0) v = 8191.0;
    if (v < -8192.0) v = -8192.0;
    return 14'($rtoi(v));
  endfunction

  // physics model, evaluated mid-cycle ahead of the ADC models' falling edge
  always @(posedge clk) begin
    real m, p;
    #1.5;
    for (int k = HIST - 1; k > 0; k--) begin
      eopm_h[k] = eopm_h[k-1];
      eoam_h[k] = eoam_h[k-1];
    end
    eopm_h[0] = real'(signed'(rf_dac_bus[15:0]));
    eoam_h[0] = real'(signed'(rf_dac_bus[31:16]));
    m = eopm_h[10] / 32767.0;
    p = a_ram * eopm_h[30] / 32767.0 + KAPPA * eoam_h[10];
    d = d0 - real'(slow_dac_fast) / 8.0 - real'(slow_dac_slow) / 2.0;
    pmt_sample = q14(1000.0 + d * m + BETA * p);
    ram_sample = q14(300.0 + p);
  end

  always @(posedge clk) if (!rst && mon_valid) n_mon++;
  always @(posedge clk) if (!rst && cfg.adc_derand) n_derand++;

  // averages over one carrier period (1250 clocks = two 2f periods)
  task automatic avg(output real e, output real dd, output real mg);
    real si, sq;
    e = 0.0; dd = 0.0; si = 0.0; sq = 0.0;
    for (int k = 0; k < 1250; k++) begin
      @(posedge clk);
      e  += real'(err_data);
      dd += d;
      si += real'(mon_i);
      sq += real'(mon_q);
    end
    e /= 1250.0; dd /= 1250.0; si /= 1250.0; sq /= 1250.0;
    mg = $sqrt(si * si + sq * sq);
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic real abs_r(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  real e, dd, mg, best, mag0, res, dlock0, dlock1;
  phase_t best_ps;

  initial begin
    for (int k = 0; k < HIST; k++) begin eopm_h[k] = 0.0; eoam_h[k] = 0.0; end
    coef_wr = '0;
    cfg = '0;
    cfg.ftw        = 32'd3436135;            // 200 kHz at 250 MHz
    cfg.adc_derand = 1'b1;
    cfg.pi_fast    = '{enable: 1'b0, kp: 16'sd0, ki: 16'sd250,  offset: 16'sd0};
    cfg.pi_slow    = '{enable: 1'b0, kp: 16'sd0, ki: 16'sd64,   offset: 16'sd0};
    cfg.gain_i     = '{mant: 16'sd0, exp: 4'd0};
    cfg.gain_q     = cfg.gain_i;
    d0 = 2000.0; a_ram = 0.0;
    repeat (4) @(posedge clk);
    rst <= 1'b0;

    // 1. demodulation phase calibration and error-signal slope
    repeat (3000) @(posedge clk);
    best = -1.0e30; best_ps = '0;
    for (int s = 0; s < 32; s++) begin
      cfg.ps_demod = phase_t'(s) << 27;
      repeat (300) @(posedge clk);
      avg(e, dd, mg);
      n_ps_sweep++;
      if (e > best) begin best = e; best_ps = cfg.ps_demod; end
    end
    cfg.ps_demod = best_ps;
    e = best;
    $display("demodulation phase %h, error %f, about 1.18*256*d0 = %f", best_ps, e, 1.18 * 256.0 * d0);
    check(e > 1.05 * 256.0 * d0 && e < 1.25 * 256.0 * d0, "error-signal slope at 200 kHz");

    // 2. RAM detection
    a_ram = A_RAM;
    repeat (6000) @(posedge clk);
    avg(e, dd, mg);
    mag0 = mg;
    $display("open-loop RAM |I+jQ| = %f (about 1.18*0.93*256*A = %f)", mag0, 1.18 * 0.93 * 256.0 * A_RAM);
    check(mag0 > 1.0 * 256.0 * A_RAM && mag0 < 1.2 * 256.0 * A_RAM, "RAM amplitude at 200 kHz");

    // 3. lock without RAM suppression
    cfg.pi_fast.enable = 1'b1;
    cfg.pi_slow.enable = 1'b1;
    repeat (1000000) @(posedge clk);
    avg(e, dd, mg);
    dlock0 = dd;
    $display("locked without RS: d=%f err=%f fast=%0d slow=%0d", dd, e, slow_dac_fast, slow_dac_slow);
    if (e < 2000.0 && e > -2000.0) n_lock++;
    if (slow_dac_fast < 100 && slow_dac_fast > -100 && slow_dac_slow > 1000) n_takeover++;
    check(e < 2000.0 && e > -2000.0, "lock holds at 200 kHz");
    check(abs_r(dd) > 100.0, "RAM pulls the lock point");

    // 4. RAM suppression
    cfg.gain_i = '{mant: -16'sd16384, exp: 4'd9};
    cfg.gain_q = cfg.gain_i;
    best = 1.0e30;
    for (int s = 0; s < 16; s++) begin
      cfg.ps_ram_am = phase_t'(s) << 28;
      repeat (6000) @(posedge clk);
      avg(e, dd, mg);
      n_ps_sweep++;
      if (mg < best) begin best = mg; best_ps = cfg.ps_ram_am; end
    end
    cfg.ps_ram_am = best_ps;
    repeat (600000) @(posedge clk);
    avg(e, dd, mg);
    res = mg / mag0;
    dlock1 = dd;
    $display("with RS: RAM residual %f, lock offset %f (was %f)", res, dlock1, dlock0);
    if (res < 0.75) n_cancel++;
    if (dlock1 / dlock0 < 0.7 && dlock1 / dlock0 > 0.0) n_offset_cut++;
    check(res < 0.75, "RAM residual reduced at 200 kHz");
    check(dlock1 / dlock0 < 0.7 && dlock1 / dlock0 > 0.0, "lock offset reduced at 200 kHz");

    $display("mechanisms: sweep steps %0d, monitor updates %0d, locks %0d, takeover %0d, cancel %0d, offset cut %0d",
             n_ps_sweep, n_mon, n_lock, n_takeover, n_cancel, n_offset_cut);
    check(n_mon > 0 && n_derand > 0 && n_lock > 0 && n_takeover > 0 && n_cancel > 0 && n_offset_cut > 0,
          "every mechanism happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
