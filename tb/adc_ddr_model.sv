// adc_ddr_model: behavioural model of the digital output of a 14-bit RF-ADC
// (not synthesizable, for testbenches only).
// At each falling edge it takes the analog value 'sample' (already quantized),
// optionally applies the output randomizer (bits 13..1 XOR bit 0), and drives
// the even bits onto the 7 lanes 1 ns later, for the next rising edge, and the
// odd bits 1 ns after that rising edge, for the following falling edge.
module adc_ddr_model (
  input  logic        clk,
  input  logic        randomize,
  input  logic [13:0] sample,
  output logic [6:0]  lanes
);
  logic [13:0] w;
  initial lanes = '0;
  always @(negedge clk) begin
    w = sample;
    if (randomize) w[13:1] = sample[13:1] ^ {13{sample[0]}};
    #1;
    for (int k = 0; k < 7; k++) lanes[k] = w[2*k];
  end
  always @(posedge clk) begin
    #1;
    for (int k = 0; k < 7; k++) lanes[k] = w[2*k+1];
  end
endmodule
