// tb_fir_hpf: checks the moving-average high-pass at its default size
// (14-bit input, 2 extension bits, N = 2048).
// Model: sum = x[n] + ... + x[n-2047] (samples before reset count as 0),
// y = sat16(4*x[n-1024] - (sum >>> 9)). Every output is compared with the model
// and must appear 3 clocks after its input (seen one edge later by the checker).
// Phases: random data with gaps in in_valid; a constant input, which must be
// removed exactly once the window has filled; a 200 kHz tone at 250 MSps, which
// must pass with an amplitude between 0.8 and 1.25 of 4x the input.
module tb_fir_hpf;
  localparam int N = 2048;
  logic clk = 1'b0, rst = 1'b1;
  logic in_valid, out_valid;
  logic signed [13:0] in_data;
  logic signed [15:0] out_data;
  longint xs [$];
  longint sum;
  longint expect_q [$];
  int     vdelay [$];
  int checks = 0, failures = 0, cyc = 0, nout = 0, phase_kind = 0, peak = 0;

  always #2 clk = ~clk;
  always @(posedge clk) cyc++;

  fir_hpf dut (.clk, .rst, .in_valid, .in_data, .out_valid, .out_data);

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (!rst && out_valid) begin
      nout++;
      checks++;
      if (expect_q.size() == 0 || longint'(out_data) != expect_q[0] || cyc - vdelay[0] != 4) begin
        failures++;
        if (failures < 6) $display("out %0d expected %0d", out_data, (expect_q.size() != 0) ? expect_q[0] : 0);
      end
      if (expect_q.size() != 0) begin void'(expect_q.pop_front()); void'(vdelay.pop_front()); end
      if (phase_kind == 1 && nout > N + 8) begin
        checks++;
        if (out_data != 0) begin failures++; $display("DC not removed: %0d", out_data); end
      end
      if (phase_kind == 2 && nout > N + 8) begin
        if (int'(out_data) > peak) peak = int'(out_data);
      end
    end
  end

  task automatic push(input logic signed [13:0] v, input bit valid);
    longint m, lp;
    @(negedge clk);
    in_valid = valid; in_data = v;
    if (valid) begin
      xs.push_front(longint'(v));
      sum += longint'(v);
      if (xs.size() > N) sum -= xs.pop_back();
      lp = sum >>> 9;
      m = 4 * ((xs.size() > N / 2) ? xs[N / 2] : 0) - lp;
      if (m > 32767) m = 32767;
      if (m < -32768) m = -32768;
      expect_q.push_back(m);
      vdelay.push_back(cyc);
    end
  endtask

  initial begin
    in_valid = 0; in_data = 0; sum = 0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    phase_kind = 0;
    for (int n = 0; n < 6000; n++) push(14'($urandom), ($urandom % 4) != 0);
    phase_kind = 1; nout = 0;
    for (int n = 0; n < 2 * N + 200; n++) push(14'sd3000, 1'b1);
    phase_kind = 2; nout = 0;
    for (int n = 0; n < 4 * N; n++)
      push(14'($rtoi(1500.0 * $sin(2.0 * 3.14159265358979 * real'(n) * 200.0e3 / 250.0e6))), 1'b1);
    @(negedge clk); in_valid = 0;
    repeat (6) @(posedge clk);
    checks++;
    if (peak < 4 * 1500 * 8 / 10 || peak > 4 * 1500 * 125 / 100) begin
      failures++; $display("200 kHz tone peak %0d, input peak %0d", peak, 4 * 1500);
    end else $display("200 kHz tone peak %0d for 4x input peak %0d", peak, 4 * 1500);
    checks++;
    if (expect_q.size() != 0) begin failures++; $display("%0d outputs missing", expect_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
