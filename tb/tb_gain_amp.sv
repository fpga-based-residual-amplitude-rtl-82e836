// tb_gain_amp: checks the adjustable-gain amplifier.
// out must equal sat16((in * mant * 2^exp) >>> 30) one clock later. Gains are
// swept over mantissa and exponent, covering attenuation, gain, sign inversion
// and saturation in both directions.
module tb_gain_amp;
  logic clk = 1'b0, rst = 1'b1;
  logic in_valid, out_valid;
  logic signed [23:0] in_data;
  logic signed [15:0] mant, out_data;
  logic [3:0] exp_i;
  longint e;
  int checks = 0, failures = 0, nsat = 0;

  always #2 clk = ~clk;

  gain_amp dut (.clk, .rst, .in_valid, .in_data, .mant, .exp_i, .out_valid, .out_data);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_data = 0; mant = 0; exp_i = 0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      in_valid = 1'b1;
      in_data = 24'($urandom) >>> ($urandom % 20);
      mant = 16'($urandom);
      exp_i = 4'($urandom);
      e = ((longint'(in_data) * longint'(mant)) <<< exp_i) >>> 30;
      if (e > 32767) begin e = 32767; nsat++; end
      if (e < -32768) begin e = -32768; nsat++; end
      @(posedge clk); #0.1;
      checks++;
      if (longint'(out_data) != e || !out_valid) begin
        failures++;
        if (failures < 5) $display("in=%0d g=%0d*2^%0d out=%0d expected %0d", in_data, mant, exp_i, out_data, e);
      end
    end
    checks++;
    if (nsat == 0) begin failures++; $display("saturation never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
