// tb_pi_servo: checks the PI servo against a cycle-exact model.
// Model per valid sample: I = clamp(I + ki*e) to the output range in 2^-24 LSB
// units, out = sat16(offset + sat17((kp*e) >>> 16) + (I >>> 24)). The run covers
// random errors with gaps, a long constant error that drives the integrator
// into its clamp (anti-windup, then recovery when the error changes sign), and
// enable low (integrator cleared, output = offset).
module tb_pi_servo;
  logic clk = 1'b0, rst = 1'b1;
  logic enable, in_valid, out_valid;
  logic signed [23:0] err;
  logic signed [15:0] kp, ki, offset, out_data;
  longint integ, p, tot, e_out;
  longint IMAX, IMIN;
  int checks = 0, failures = 0, nclamp = 0;

  always #2 clk = ~clk;

  pi_servo dut (.clk, .rst, .enable, .in_valid, .err, .kp, .ki, .offset, .out_valid, .out_data);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input logic signed [23:0] e, input bit v, input bit en);
    @(negedge clk);
    err = e; in_valid = v; enable = en;
    if (!en) begin
      integ = 0; e_out = longint'(offset);
    end else if (v) begin
      integ = integ + longint'(e) * longint'(ki);
      if (integ > IMAX) begin integ = IMAX; nclamp++; end
      if (integ < IMIN) begin integ = IMIN; nclamp++; end
      p = (longint'(e) * longint'(kp)) >>> 16;
      if (p > 65535) p = 65535;
      if (p < -65536) p = -65536;
      tot = longint'(offset) + p + (integ >>> 24);
      if (tot > 32767) tot = 32767;
      if (tot < -32768) tot = -32768;
      e_out = tot;
    end
    @(posedge clk); #0.1;
    checks++;
    if (longint'(out_data) != e_out || out_valid != v) begin
      failures++;
      if (failures < 6) $display("err=%0d out=%0d expected %0d", e, out_data, e_out);
    end
  endtask

  initial begin
    IMAX = 32767 * (longint'(1) << 24);
    IMIN = -32768 * (longint'(1) << 24);
    enable = 0; in_valid = 0; err = 0; kp = 16'sd20000; ki = 16'sd3000; offset = 16'sd1000;
    integ = 0; e_out = 0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    step(24'sd0, 1'b1, 1'b0);
    for (int n = 0; n < 1500; n++) step(24'($urandom) >>> 6, 1'($urandom % 4 != 0), 1'b1);
    // wind the integrator into the upper clamp, then recover
    ki = 16'sd30000;
    for (int n = 0; n < 600; n++) step(24'sd4000000, 1'b1, 1'b1);
    for (int n = 0; n < 50; n++)  step(-24'sd4000000, 1'b1, 1'b1);
    // disable: output returns to offset
    offset = -16'sd500;
    for (int n = 0; n < 5; n++)   step(24'sd123456, 1'b1, 1'b0);
    kp = -16'sd7000; ki = -16'sd100;
    for (int n = 0; n < 500; n++) step(24'($urandom), 1'b1, 1'b1);
    checks++;
    if (nclamp == 0) begin failures++; $display("integrator clamp never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
