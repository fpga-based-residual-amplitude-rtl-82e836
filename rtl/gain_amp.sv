// gain_amp: adjustable-gain digital amplifier of the RAM cancellation path.
//
// out = saturate(in * mant * 2^exp / 2^SHIFT) to OUT_W bits. The gain sets the
// loop gain of the RAM servo and therefore the depth of RAM suppression (the
// paper varies it to obtain 20 to 66 dB). A signed 16-bit mantissa and a 4-bit
// exponent span more than 100 dB of gain in fine steps; the mantissa sign also
// sets the feedback polarity. Mantissa/exponent form and the default SHIFT are
// this design's choices; the paper only says the gain is adjustable.
// Timing: one register stage; out_valid is in_valid delayed by one clock.
module gain_amp #(
  parameter int unsigned IN_W  = 24,
  parameter int unsigned G_W   = 16,
  parameter int unsigned E_W   = 4,
  parameter int unsigned OUT_W = 16,
  parameter int unsigned SHIFT = 30
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_data,
  input  logic signed [G_W-1:0]   mant,
  input  logic        [E_W-1:0]   exp_i,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_data
);
  localparam int unsigned PW = IN_W + G_W + 2 ** E_W;

  logic signed [PW-1:0] p;
  assign p = (PW'(in_data) * PW'(mant)) <<< exp_i;

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      out_data  <= OUT_W'(ram_pkg::sat_s(64'(p >>> SHIFT), OUT_W));
    end
  end
endmodule
