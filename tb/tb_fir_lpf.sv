// tb_fir_lpf: checks the configurable FIR against a direct convolution.
// A random 16-tap coefficient set is written through the coefficient port, then
// random samples (with gaps in in_valid) are filtered. Each out_valid must be set
// by the third rising edge after the one that accepted its sample (the checker,
// sampling at rising edges, sees it one edge later) and carry sat((sum h[k] x[n-k]) >>> 17) over 24
// bits. The reset coefficients (unity-gain boxcar) are checked first with a DC
// input, and a full-scale input checks the saturation.
module tb_fir_lpf;
  localparam int TAPS = 16;
  logic clk = 1'b0, rst = 1'b1;
  logic coef_we, in_valid, out_valid;
  logic [3:0] coef_addr;
  logic signed [17:0] coef_data;
  logic signed [23:0] in_data, out_data;
  longint h [TAPS];
  longint xs [$];
  longint expect_q [$];
  int     vdelay [$];
  int checks = 0, failures = 0, cyc = 0;

  always #2 clk = ~clk;
  always @(posedge clk) cyc++;

  fir_lpf #(.IN_W(24), .OUT_W(24), .TAPS(TAPS), .OUT_SHIFT(17)) dut (
    .clk, .rst, .coef_we, .coef_addr, .coef_data, .in_valid, .in_data,
    .out_valid, .out_data);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint model();
    longint acc = 0;
    for (int k = 0; k < TAPS; k++) if (k < xs.size()) acc += h[k] * xs[k];
    acc = acc >>> 17;
    if (acc > 8388607) acc = 8388607;
    if (acc < -8388608) acc = -8388608;
    return acc;
  endfunction

  always @(posedge clk) begin
    if (!rst && out_valid) begin
      checks++;
      if (expect_q.size() == 0 || longint'(out_data) != expect_q[0] || cyc - vdelay[0] != 4) begin
        failures++;
        if (failures < 6) $display("out %0d expected %0d latency %0d", out_data,
                                   (expect_q.size() != 0) ? expect_q[0] : 0, cyc - vdelay[0]);
      end
      if (expect_q.size() != 0) begin void'(expect_q.pop_front()); void'(vdelay.pop_front()); end
    end
  end

  task automatic push(input logic signed [23:0] v, input bit valid);
    @(negedge clk);
    in_valid = valid; in_data = v;
    if (valid) begin
      xs.push_front(longint'(v));
      if (xs.size() > TAPS) void'(xs.pop_back());
      expect_q.push_back(model());
      vdelay.push_back(cyc);
    end
  endtask

  initial begin
    coef_we = 0; coef_addr = 0; coef_data = 0; in_valid = 0; in_data = 0;
    for (int k = 0; k < TAPS; k++) h[k] = longint'(131072 / TAPS);
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    // reset coefficients: DC gain ~1
    for (int n = 0; n < 40; n++) push(24'sd100000, 1'b1);
    // new random coefficients
    @(negedge clk); in_valid = 0;
    repeat (5) @(posedge clk);
    for (int k = 0; k < TAPS; k++) begin
      @(negedge clk);
      coef_we = 1; coef_addr = 4'(k); coef_data = 18'($urandom);
      h[k] = longint'(coef_data);
    end
    @(negedge clk); coef_we = 0;
    for (int n = 0; n < 2000; n++) push(24'($urandom), ($urandom % 3) != 0);
    // saturation: large input with all-positive coefficients
    @(negedge clk); in_valid = 0;
    repeat (5) @(posedge clk);
    for (int k = 0; k < TAPS; k++) begin
      @(negedge clk);
      coef_we = 1; coef_addr = 4'(k); coef_data = 18'sd60000; h[k] = 60000;
    end
    @(negedge clk); coef_we = 0;
    for (int n = 0; n < 40; n++) push(24'sd8000000, 1'b1);
    for (int n = 0; n < 40; n++) push(-24'sd8000000, 1'b1);
    @(negedge clk); in_valid = 0;
    repeat (6) @(posedge clk);
    checks++;
    if (expect_q.size() != 0) begin failures++; $display("%0d outputs missing", expect_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
