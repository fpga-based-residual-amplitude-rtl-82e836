// sat_sum: summing junction of the two amplitude-modulated cancellation waves.
//
// out = saturate(a + b) to W bits, registered. Summing the in-phase and the
// quadrature cancellation waves gives one RF signal of arbitrary amplitude and
// phase for the amplitude modulator. Saturation instead of wrap-around is this
// design's choice. Timing: one register stage.
module sat_sum #(
  parameter int unsigned W = 16
) (
  input  logic                clk,
  input  logic                rst,
  input  logic signed [W-1:0] a,
  input  logic signed [W-1:0] b,
  output logic signed [W-1:0] y
);
  logic signed [W:0] s;
  assign s = (W+1)'(a) + (W+1)'(b);

  always_ff @(posedge clk) begin
    if (rst) y <= '0;
    else     y <= W'(ram_pkg::sat_s(64'(s), W));
  end
endmodule
