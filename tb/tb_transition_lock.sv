// tb_transition_lock: open- and closed-loop test of the transition lock.
// A model of the clock replaces the optics: the PMT signal carries a DC level
// plus a component at the modulation frequency whose amplitude is proportional
// to the laser detuning, d = d0 - dac_fast/8 - dac_slow/2 (ADC LSB). The
// modulation runs at f_clk/32 so that a 32-tap boxcar removes the 2f product
// exactly, and the reference sine lags by the 1028-clock filter/pipeline delay
// (1024 samples of moving-average centre delay plus the pipeline).
//  1. servos off: the error signal must be 4*d*32767/2/256 = 256*d (within 6%),
//     unaffected by the DC level, and change sign with the detuning;
//  2. servos on: the lock must pull |d| below 1 LSB, and the slow servo must
//     take over the correction so that dac_fast returns near 0 while dac_slow
//     settles at +2*d0.
module tb_transition_lock;
  import ram_pkg::*;
  localparam real PI = 3.14159265358979;
  localparam longint LAG = 1028;
  logic clk = 1'b0, rst = 1'b1;
  adc_t adc_data;
  amp_t ref_sin;
  coef_wr_t coef_wr;
  pi_cfg_t pi_fast, pi_slow;
  logic err_valid, fast_valid, slow_valid;
  lpf_t err_data;
  dac_t dac_fast, dac_slow;
  int checks = 0, failures = 0;
  longint cyc = 0;
  real d0, d;

  always #2 clk = ~clk;

  transition_lock dut (
    .clk, .rst, .adc_valid(1'b1), .adc_data, .ref_sin, .coef_wr, .pi_fast, .pi_slow,
    .err_valid, .err_data, .fast_valid, .dac_fast, .slow_valid, .dac_slow);

  initial begin
    repeat (1500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // clock-transition model, updated between rising edges
  always @(negedge clk) begin
    real v;
    cyc++;
    d = d0 - real'(dac_fast) / 8.0 - real'(dac_slow) / 2.0;
    v = 1000.0 + d * $sin(2.0 * PI * real'(cyc) / 32.0);
    if (v > 8191.0) v = 8191.0;
    if (v < -8192.0) v = -8192.0;
    adc_data = adc_t'($rtoi(v));
    ref_sin  = amp_t'($rtoi(32767.0 * $sin(2.0 * PI * real'(cyc - LAG) / 32.0)));
  end

  task automatic check_err(input real expect_v);
    real e;
    repeat (3000) @(posedge clk);
    e = real'(err_data);
    checks++;
    if ((e - expect_v) > 0.06 * (expect_v < 0 ? -expect_v : expect_v) + 50.0 ||
        (expect_v - e) > 0.06 * (expect_v < 0 ? -expect_v : expect_v) + 50.0) begin
      failures++;
      $display("error signal %f expected %f", e, expect_v);
    end
  endtask

  initial begin
    coef_wr = '0;
    pi_fast = '{enable: 1'b0, kp: 16'sd0, ki: 16'sd250, offset: 16'sd0};
    pi_slow = '{enable: 1'b0, kp: 16'sd0, ki: 16'sd64, offset: 16'sd0};
    d0 = 3000.0;
    repeat (4) @(posedge clk);
    rst <= 1'b0;
    check_err(256.0 * 3000.0);
    d0 = -1500.0;
    check_err(-256.0 * 1500.0);
    d0 = 0.0;
    check_err(0.0);
    // closed loop
    d0 = 3000.0;
    pi_fast.enable = 1'b1;
    pi_slow.enable = 1'b1;
    repeat (1000000) @(posedge clk);
    $display("locked: d=%f fast=%0d slow=%0d err=%0d", d, dac_fast, dac_slow, err_data);
    checks++;
    if (d > 1.0 || d < -1.0) begin failures++; $display("lock failed, d=%f", d); end
    checks++;
    if (dac_fast > 40 || dac_fast < -40) begin failures++; $display("fast servo not relieved: %0d", dac_fast); end
    checks++;
    if (dac_slow > 6040 || dac_slow < 5960) begin failures++; $display("slow servo at %0d", dac_slow); end
    // servos off again: outputs return to their offsets
    pi_fast.enable = 1'b0;
    pi_slow.enable = 1'b0;
    repeat (5) @(posedge clk);
    checks++;
    if (dac_fast != 0 || dac_slow != 0) begin failures++; $display("offsets not restored"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
