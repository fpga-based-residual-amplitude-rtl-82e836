// adc_ddr_if: receive side of the 14-bit DDR interface of one RF-ADC.
//
// The converter sends each 14-bit sample over 7 lanes at double data rate: lane
// k carries bit 2k in the half-cycle sampled at the rising edge and bit 2k+1 in
// the one sampled at the falling edge of the sample clock. The two halves are
// captured by rising- and falling-edge registers (the differential input buffers
// sit in front of this module) and joined into one word at the next rising edge.
// The converter's output randomizer XORs bits 13..1 with bit 0 to decorrelate the
// digital outputs from the analog input; with derand high this module undoes it.
// Output is two's complement. The paper gives a 14-bit, randomized, differential
// DDR interface; the lane/edge mapping, the randomizer rule (that of common
// 14-bit pipeline ADCs) and the number format are this design's assumptions.
// Timing: a sample launched around rising edge n appears on sample at edge n+1.
module adc_ddr_if #(
  parameter int unsigned ADC_W = 14,
  localparam int unsigned LANES = ADC_W / 2
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    derand,
  input  logic [LANES-1:0]        ddr_data,
  output logic                    valid,
  output logic signed [ADC_W-1:0] sample
);
  logic [LANES-1:0] rise_q, fall_q;
  logic [ADC_W-1:0] word, plain;

  always_ff @(posedge clk) rise_q <= ddr_data;
  always_ff @(negedge clk) fall_q <= ddr_data;

  always_comb begin
    for (int k = 0; k < LANES; k++) begin
      word[2*k]   = rise_q[k];
      word[2*k+1] = fall_q[k];
    end
    plain = word;
    if (derand) plain[ADC_W-1:1] = word[ADC_W-1:1] ^ {(ADC_W-1){word[0]}};
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      valid  <= 1'b0;
      sample <= '0;
    end else begin
      valid  <= 1'b1;
      sample <= signed'(plain);
    end
  end
endmodule
