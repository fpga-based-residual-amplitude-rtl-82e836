// tb_mixer: checks the digital mixer.
// out must equal sat24((a*b) >>> 7) one clock after the inputs, with out_valid
// following in_valid. Random operands plus the extreme corner (-32768 * -32768).
module tb_mixer;
  logic clk = 1'b0, rst = 1'b1;
  logic in_valid, out_valid;
  logic signed [15:0] a, b;
  logic signed [23:0] out_data;
  longint e;
  bit ev;
  int checks = 0, failures = 0;

  always #2 clk = ~clk;

  mixer #(.A_W(16), .B_W(16), .OUT_W(24), .SHIFT(7)) dut (.clk, .rst, .in_valid, .a, .b, .out_valid, .out_data);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; a = 0; b = 0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      in_valid = 1'($urandom % 2);
      a = (n == 5) ? -16'sd32768 : 16'($urandom);
      b = (n == 5) ? -16'sd32768 : 16'($urandom);
      e = (longint'(a) * longint'(b)) >>> 7;
      if (e > 8388607) e = 8388607;
      if (e < -8388608) e = -8388608;
      ev = in_valid;
      @(posedge clk); #0.1;
      checks++;
      if (longint'(out_data) != e || out_valid != ev) begin
        failures++;
        if (failures < 5) $display("a=%0d b=%0d out=%0d expected %0d", a, b, out_data, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
