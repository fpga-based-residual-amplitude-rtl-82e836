// tb_ram_suppression: detection and closed-loop cancellation of RAM.
// Optics model: the in-loop detector sees a DC level, the RAM tone
// A*sin(w n + phi_r) and kappa times the amplitude-modulator drive (eoam),
// delayed 5 clocks. The carrier is f_clk/256, i.e. 1/32 of the decimated rate,
// so the default 32-tap boxcar I/Q low-pass cancels the 2f product exactly. The
// band-pass low-pass half is loaded with a 2-tap average (the reset boxcar would
// null the carrier). With the gain g = mant*2^exp/2^22 the loop gain is
// L = kappa*g and the residual should fall to 1/(1+L) of the open-loop RAM.
//  1. gain 0: |I+jQ| = 256*A within 6% (256 = 8 decimation * 2 HPF extension
//     * 32767/2^10 mixer scale / 2); shifting phi_r by 90 degrees rotates (I,Q)
//     by 90 degrees;
//  2. the cancellation phase is found by sweeping the AM DDS phase in 16 steps
//     (the same fine-tuning the monitor outputs are meant for): the best
//     residual with L = 0.5 must be 1/1.5 of the open-loop RAM within 8%;
//  3. raising the gain to L = 0.9 must lower it to 1/1.9 within 8%.
module tb_ram_suppression;
  import ram_pkg::*;
  localparam real PI = 3.14159265358979;
  localparam real A = 2000.0, KAPPA = 0.25;
  logic clk = 1'b0, rst = 1'b1;
  adc_t adc_data;
  amp_t det_sin, det_cos, am_sin, am_cos;
  coef_wr_t coef_wr;
  gain_t gain_i, gain_q;
  logic mon_valid;
  lpf_t mon_i, mon_q;
  dac_t eoam;
  dac_t eoam_d [5];
  int checks = 0, failures = 0;
  longint cyc = 0;
  real phi_r, phi_am, mag0, best, best_phi, r, ang0, ang1, da;

  always #2 clk = ~clk;

  ram_suppression dut (
    .clk, .rst, .adc_valid(1'b1), .adc_data, .det_sin, .det_cos, .am_sin, .am_cos,
    .coef_wr, .gain_i, .gain_q, .mon_valid, .mon_i, .mon_q, .eoam);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    real v, th;
    cyc++;
    th = 2.0 * PI * real'(cyc) / 256.0;
    v = 500.0 + A * $sin(th + phi_r) + KAPPA * real'(eoam_d[4]);
    if (v > 8191.0) v = 8191.0;
    if (v < -8192.0) v = -8192.0;
    adc_data = adc_t'($rtoi(v));
    det_sin = amp_t'($rtoi(32767.0 * $sin(th)));
    det_cos = amp_t'($rtoi(32767.0 * $cos(th)));
    am_sin  = amp_t'($rtoi(32767.0 * $sin(th + phi_am)));
    am_cos  = amp_t'($rtoi(32767.0 * $cos(th + phi_am)));
    for (int k = 4; k > 0; k--) eoam_d[k] = eoam_d[k-1];
    eoam_d[0] = eoam;
  end

  function automatic real mag();
    return $sqrt(real'(mon_i) * real'(mon_i) + real'(mon_q) * real'(mon_q));
  endfunction

  task automatic wcoef(input filt_id_e sel, input int addr, input int val);
    @(negedge clk);
    coef_wr = '{we: 1'b1, sel: sel, addr: TAP_AW'(addr), data: coef_t'(val)};
    @(negedge clk);
    coef_wr.we = 1'b0;
  endtask

  task automatic expect_ratio(input real got, input real want, input string what);
    checks++;
    if (got > want * 1.08 || got < want * 0.92) begin
      failures++;
      $display("%s: ratio %f expected %f", what, got, want);
    end else $display("%s: ratio %f (expected %f)", what, got, want);
  endtask

  initial begin
    coef_wr = '0;
    gain_i = '{mant: 16'sd0, exp: 4'd0};
    gain_q = gain_i;
    phi_r = 0.3; phi_am = 0.0;
    for (int k = 0; k < 5; k++) eoam_d[k] = '0;
    repeat (4) @(posedge clk);
    rst <= 1'b0;
    // band-pass low-pass half: 2-tap average
    wcoef(FILT_RS_BPF, 0, 65536);
    wcoef(FILT_RS_BPF, 1, 65536);
    for (int k = 2; k < 32; k++) wcoef(FILT_RS_BPF, k, 0);
    // 1. open loop
    repeat (6000) @(posedge clk);
    mag0 = mag();
    ang0 = $atan2(real'(mon_q), real'(mon_i));
    $display("open loop I=%0d Q=%0d |.|=%f", mon_i, mon_q, mag0);
    checks++;
    if (mag0 > 256.0 * A * 1.06 || mag0 < 256.0 * A * 0.94) begin
      failures++; $display("RAM amplitude %f expected %f", mag0, 256.0 * A);
    end
    phi_r = 0.3 + PI / 2.0;
    repeat (4000) @(posedge clk);
    ang1 = $atan2(real'(mon_q), real'(mon_i));
    da = ang1 - ang0;
    if (da > PI) da -= 2.0 * PI;
    if (da < -PI) da += 2.0 * PI;
    checks++;
    if ((da < 0 ? -da : da) < PI / 2.0 - 0.04 || (da < 0 ? -da : da) > PI / 2.0 + 0.04) begin
      failures++; $display("phase rotation %f rad, expected pi/2", da);
    end
    phi_r = 0.3;
    // 2. cancellation phase sweep at L = 0.5: g = 2 -> mant 16384, exp 9
    gain_i = '{mant: -16'sd16384, exp: 4'd9};
    gain_q = gain_i;
    best = 1.0e30; best_phi = 0.0;
    for (int s = 0; s < 16; s++) begin
      phi_am = 2.0 * PI * real'(s) / 16.0;
      repeat (6000) @(posedge clk);
      r = mag();
      if (r < best) begin best = r; best_phi = phi_am; end
    end
    phi_am = best_phi;
    repeat (12000) @(posedge clk);
    expect_ratio(mag() / mag0, 1.0 / 1.5, "residual at L=0.5");
    // 3. L = 0.9: g = 3.6
    gain_i = '{mant: -16'sd29491, exp: 4'd9};
    gain_q = gain_i;
    repeat (60000) @(posedge clk);
    expect_ratio(mag() / mag0, 1.0 / 1.9, "residual at L=0.9");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
