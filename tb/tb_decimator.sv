// tb_decimator: checks the boxcar down-sampler with R = 8.
// Random 14-bit samples are fed with gaps in in_valid; every 8th accepted sample
// must produce exactly one out_valid pulse, one clock later, carrying the sum of
// the 8 samples. The number of output pulses is checked too (rate 1/R).
module tb_decimator;
  localparam int R = 8;
  logic clk = 1'b0, rst = 1'b1;
  logic in_valid, out_valid;
  logic signed [13:0] in_data;
  logic signed [16:0] out_data;
  int checks = 0, failures = 0, accepted = 0, pulses = 0;
  int signed sum_model, expect_q[$];

  always #2 clk = ~clk;

  decimator #(.IN_W(14), .R(R)) dut (.clk, .rst, .in_valid, .in_data, .out_valid, .out_data);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker
  always @(posedge clk) begin
    if (!rst && out_valid) begin
      pulses++;
      checks++;
      if (expect_q.size() == 0 || int'(out_data) != expect_q[0]) begin
        failures++;
        $display("unexpected output %0d", out_data);
      end
      if (expect_q.size() != 0) void'(expect_q.pop_front());
    end
  end

  initial begin
    in_valid = 1'b0; in_data = '0; sum_model = 0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      in_valid = ($urandom % 4) != 0;
      in_data  = (n < 100) ? -14'sd8192 : 14'($urandom);   // start with full-scale negative
      if (in_valid) begin
        sum_model += int'(in_data);
        accepted++;
        if (accepted % R == 0) begin
          expect_q.push_back(sum_model);
          sum_model = 0;
        end
      end
    end
    @(negedge clk); in_valid = 1'b0;
    repeat (3) @(posedge clk);
    checks++;
    if (pulses != accepted / R) begin
      failures++;
      $display("pulses %0d expected %0d", pulses, accepted / R);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
