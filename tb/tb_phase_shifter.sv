// tb_phase_shifter: checks the digital phase shifter.
// The output must equal input + offset (mod 2^32) one clock later, for random
// phases and offsets, including offsets that wrap past a full turn.
module tb_phase_shifter;
  logic clk = 1'b0, rst = 1'b1;
  logic [31:0] phase_in, offset, phase_out, expect_q;
  int checks = 0, failures = 0;

  always #2 clk = ~clk;

  phase_shifter dut (.clk, .rst, .phase_in, .offset, .phase_out);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    phase_in = '0; offset = '0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      phase_in = $urandom;
      offset   = (n % 3 == 0) ? 32'h8000_0000 : $urandom;   // 180 degrees, or random
      expect_q = phase_in + offset;
      @(posedge clk); #0.1;
      checks++;
      if (phase_out != expect_q) begin
        failures++;
        if (failures < 5) $display("n=%0d got %h expected %h", n, phase_out, expect_q);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
