// tb_adc_ddr_if: checks the DDR receive interface of the 14-bit ADC.
// A converter model drives 7 lanes: even bits before the rising edge, odd bits
// before the falling edge, optionally randomized (bits 13..1 XOR bit 0). Every
// sample must come out intact one clock after its rising edge, with and without
// the randomizer.
module tb_adc_ddr_if;
  logic clk = 1'b0, rst = 1'b1;
  logic derand, valid;
  logic [6:0] ddr_data;
  logic signed [13:0] sample;
  logic [13:0] word, sent [$];
  int checks = 0, failures = 0;

  always #2 clk = ~clk;

  adc_ddr_if dut (.clk, .rst, .derand, .ddr_data, .valid, .sample);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // converter model: new sample each cycle, lanes change mid-way between edges
  task automatic send(input logic [13:0] s, input bit rnd);
    logic [13:0] w;
    w = s;
    if (rnd) w[13:1] = s[13:1] ^ {13{s[0]}};
    #1;   // 1 ns before the rising edge (period 4 ns)
    for (int k = 0; k < 7; k++) ddr_data[k] = w[2*k];
    @(posedge clk); #1;   // 1 ns after rising, 1 ns before falling
    for (int k = 0; k < 7; k++) ddr_data[k] = w[2*k+1];
    @(negedge clk);
  endtask

  initial begin
    ddr_data = '0; derand = 1'b0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    @(negedge clk);
    for (int n = 0; n < 1200; n++) begin
      if (n == 600) derand = 1'b1;
      word = 14'($urandom);
      sent.push_back(word);
      send(word, n >= 600);
    end
    repeat (3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // The word whose even bits were taken at rising edge n is presented after
  // rising edge n+1; by then the next word has been queued, so it is sent[0].
  int seen = 0;
  always @(posedge clk) begin
    #0.5;
    if (!rst && valid && sent.size() >= 2 && seen < 1199) begin
      checks++;
      if (sample != signed'(sent[0])) begin
        failures++;
        if (failures < 5) $display("sample %h expected %h", sample, sent[0]);
      end
      void'(sent.pop_front());
      seen++;
    end
  end
endmodule
