// tb_ram_lock_top: end-to-end test of the whole fabric at its default size.
//
// A model of the clock physics closes both loops through the fabric's own
// converter ports (DDR ADC lanes in, RF-DAC bus and precision-DAC codes out):
//   modulation seen by the atoms  m(n) = eopm(n-10)/32767
//   optical power modulation      P(n) = A*eopm(n-30)/32767 + kappa*eoam(n-10)
//                                 (RAM of the phase modulator plus cancellation)
//   laser detuning                d    = d0 - dac_fast/8 - dac_slow/2
//   PMT signal                    1000 + d*m(n) + beta*P(n)
//   in-loop RAM detector          300 + P(n)
// The RAM leaks into the PMT signal (beta) and so pulls the lock point away from
// the line centre, which is what RAM suppression is for. Both ADC models use the
// output randomizer, which the fabric removes. The carrier is f_clk/32 (7.8 MHz): the 2048- and 256-sample
// moving-average high-passes null their windows' DC exactly, it falls at a quarter of the decimated rate of the RAM path, and the 32-tap
// boxcar low-passes null its 2f products.
// Sequence and checks:
//  1. no RAM, servos off: sweep the demodulation phase in 64 steps and keep the
//     one with the largest error signal (phase calibration);
//  2. RAM on, gains 0: |I+jQ| on the monitor must be about 0.93*256*A;
//  3. lock without RAM suppression: the lock must hold (|err| small), the slow
//     servo must take over, and the lock point must sit near the predicted
//     RAM-induced offset -beta*A*cos(2*pi*20/32);
//  4. sweep the cancellation phase with loop gain 0.5, then set loop gain 0.9:
//     the RAM residual must drop to about 1/1.9;
//  5. the lock point offset must shrink by about the same factor;
//  6. servos disabled: the precision-DAC codes return to their offsets.
// Each mechanism is counted; one that never happened counts as a failure.
module tb_ram_lock_top;
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
  int n_coef = 0, n_mon = 0, n_derand = 0, n_lock = 0, n_takeover = 0,
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

  // averages over one 2f period and more (256 clocks)
  task automatic avg(output real e, output real dd, output real mg);
    e = 0.0; dd = 0.0; mg = 0.0;
    for (int k = 0; k < 256; k++) begin
      @(posedge clk);
      e  += real'(err_data);
      dd += d;
      mg += $sqrt(real'(mon_i) * real'(mon_i) + real'(mon_q) * real'(mon_q));
    end
    e /= 256.0; dd /= 256.0; mg /= 256.0;
  endtask

  task automatic wcoef(input filt_id_e sel, input int addr, input int val);
    @(negedge clk);
    coef_wr = '{we: 1'b1, sel: sel, addr: TAP_AW'(addr), data: coef_t'(val)};
    @(negedge clk);
    coef_wr.we = 1'b0;
    n_coef++;
  endtask

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic real abs_r(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  real e, dd, mg, best, mag0, res05, res09, dlock0, dlock1, dpred;
  phase_t best_ps;

  initial begin
    for (int k = 0; k < HIST; k++) begin eopm_h[k] = 0.0; eoam_h[k] = 0.0; end
    coef_wr = '0;
    cfg = '0;
    cfg.ftw        = 32'h0800_0000;          // f_clk/32 = 7.8125 MHz
    cfg.adc_derand = 1'b1;
    cfg.pi_fast    = '{enable: 1'b0, kp: 16'sd0, ki: 16'sd250,  offset: 16'sd0};
    cfg.pi_slow    = '{enable: 1'b0, kp: 16'sd0, ki: 16'sd64,   offset: 16'sd0};
    cfg.gain_i     = '{mant: 16'sd0, exp: 4'd0};
    cfg.gain_q     = cfg.gain_i;
    d0 = 2000.0; a_ram = 0.0;
    repeat (4) @(posedge clk);
    rst <= 1'b0;
    // band-pass low-pass half of the RAM path: single tap (all-pass)
    wcoef(FILT_RS_BPF, 0, 131071);
    for (int k = 1; k < 32; k++) wcoef(FILT_RS_BPF, k, 0);

    // 1. demodulation phase calibration (after the high-pass windows have filled)
    repeat (3000) @(posedge clk);
    best = -1.0e30; best_ps = '0;
    for (int s = 0; s < 64; s++) begin
      cfg.ps_demod = phase_t'(s) << 26;
      repeat (1500) @(posedge clk);
      avg(e, dd, mg);
      n_ps_sweep++;
      if (e > best) begin best = e; best_ps = cfg.ps_demod; end
    end
    cfg.ps_demod = best_ps;
    $display("demodulation phase %h, error %f (about 256*d0 = %f)", best_ps, best, 256.0 * d0);
    check(best > 0.85 * 256.0 * d0 && best < 1.1 * 256.0 * d0, "error-signal slope");

    // 2. RAM detection, open loop
    a_ram = A_RAM;
    repeat (6000) @(posedge clk);
    avg(e, dd, mg);
    mag0 = mg;
    $display("open-loop RAM |I+jQ| = %f (about 0.93*256*A = %f)", mag0, 0.93 * 256.0 * A_RAM);
    check(mag0 > 0.85 * 256.0 * A_RAM && mag0 < 1.0 * 256.0 * A_RAM, "RAM amplitude on the monitor");

    // 3. lock without RAM suppression
    cfg.pi_fast.enable = 1'b1;
    cfg.pi_slow.enable = 1'b1;
    repeat (1000000) @(posedge clk);
    avg(e, dd, mg);
    dlock0 = dd;
    dpred = -BETA * A_RAM * $cos(2.0 * PI * 20.0 / 32.0);
    $display("locked without RS: d=%f (predicted %f) err=%f fast=%0d slow=%0d",
             dd, dpred, e, slow_dac_fast, slow_dac_slow);
    if (e < 2000.0 && e > -2000.0) n_lock++;
    if (slow_dac_fast < 100 && slow_dac_fast > -100 && slow_dac_slow > 1000) n_takeover++;
    check(e < 2000.0 && e > -2000.0, "lock holds the error signal at zero");
    check((dd - dpred) < 0.15 * abs_r(dpred) && (dpred - dd) < 0.15 * abs_r(dpred), "RAM-induced lock offset");

    // 4. RAM suppression: cancellation phase sweep at loop gain 0.5, then 0.9
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
    repeat (12000) @(posedge clk);
    avg(e, dd, mg);
    res05 = mg / mag0;
    cfg.gain_i = '{mant: -16'sd29491, exp: 4'd9};
    cfg.gain_q = cfg.gain_i;
    repeat (60000) @(posedge clk);
    avg(e, dd, mg);
    res09 = mg / mag0;
    $display("RAM residual: %f at loop gain 0.5 (ideal %f), %f at 0.9 (ideal %f)",
             res05, 1.0 / 1.5, res09, 1.0 / 1.9);
    if (res09 < 0.6) n_cancel++;
    check(res05 > 0.9 / 1.5 && res05 < 1.1 / 1.5, "residual at loop gain 0.5");
    check(res09 > 0.9 / 1.9 && res09 < 1.1 / 1.9, "residual at loop gain 0.9");

    // 5. lock point with RAM suppression
    repeat (600000) @(posedge clk);
    avg(e, dd, mg);
    dlock1 = dd;
    $display("locked with RS: d=%f (without RS %f, ratio %f)", dd, dlock0, dd / dlock0);
    if (e < 2000.0 && e > -2000.0) n_lock++;
    if (dd / dlock0 < 0.7) n_offset_cut++;
    check(dd / dlock0 > 0.8 / 1.9 && dd / dlock0 < 1.25 / 1.9, "lock offset reduced by RAM suppression");

    // 6. release the servos
    cfg.pi_fast.enable = 1'b0;
    cfg.pi_slow.enable = 1'b0;
    cfg.pi_fast.offset = 16'sd123;
    cfg.pi_slow.offset = -16'sd321;
    repeat (6) @(posedge clk);
    if (slow_dac_fast == 16'sd123 && slow_dac_slow == -16'sd321) n_release++;
    check(slow_dac_fast == 16'sd123 && slow_dac_slow == -16'sd321, "servo release to offsets");

    $display("mechanisms: coef writes %0d, phase-sweep steps %0d, monitor updates %0d, derandomized clocks %0d,",
             n_coef, n_ps_sweep, n_mon, n_derand);
    $display("            locks %0d, slow takeover %0d, RAM cancelled %0d, lock offset cut %0d, releases %0d",
             n_lock, n_takeover, n_cancel, n_offset_cut, n_release);
    check(n_coef > 0, "coefficient reload happened");
    check(n_ps_sweep > 0, "phase-shifter sweep happened");
    check(n_mon > 0, "monitor updates happened");
    check(n_derand > 0, "derandomized ADC input happened");
    check(n_lock == 2, "transition lock happened");
    check(n_takeover > 0, "slow-servo takeover happened");
    check(n_cancel > 0, "RAM cancellation happened");
    check(n_offset_cut > 0, "lock-offset reduction happened");
    check(n_release > 0, "servo release happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
