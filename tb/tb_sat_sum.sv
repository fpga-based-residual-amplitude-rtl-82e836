// tb_sat_sum: checks the saturating summer: y = sat16(a + b), one clock later.
module tb_sat_sum;
  logic clk = 1'b0, rst = 1'b1;
  logic signed [15:0] a, b, y;
  int e;
  int checks = 0, failures = 0;

  always #2 clk = ~clk;

  sat_sum #(.W(16)) dut (.clk, .rst, .a, .b, .y);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = 0; b = 0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      a = 16'($urandom); b = 16'($urandom);
      e = int'(a) + int'(b);
      if (e > 32767) e = 32767;
      if (e < -32768) e = -32768;
      @(posedge clk); #0.1;
      checks++;
      if (int'(y) != e) begin
        failures++;
        if (failures < 5) $display("a=%0d b=%0d y=%0d expected %0d", a, b, y, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
