// tb_phase_acc: checks the phase accumulator against a reference count.
// After reset the phase must be 0 and then advance by the tuning word every
// clock, wrapping modulo 2^32; the tuning word is changed on the fly.
module tb_phase_acc;
  logic clk = 1'b0, rst = 1'b1;
  logic [31:0] ftw, phase, model;
  int checks = 0, failures = 0;

  always #2 clk = ~clk;

  phase_acc dut (.clk, .rst, .ftw, .phase);

  initial begin
    #20000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ftw = 32'd3436135;   // 200 kHz at 250 MHz
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    @(negedge clk);
    checks++; if (phase != 32'd0) begin failures++; $display("reset phase %h", phase); end
    model = 32'd0;
    for (int n = 0; n < 2000; n++) begin
      if (n == 700)  ftw = 32'hF000_0001;   // exercise wrap-around
      if (n == 1400) ftw = $urandom;
      @(posedge clk); #0.1;
      model = model + ftw;
      checks++;
      if (phase != model) begin
        failures++;
        if (failures < 5) $display("n=%0d phase %h expected %h", n, phase, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
