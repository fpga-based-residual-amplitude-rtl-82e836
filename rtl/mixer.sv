// mixer: digital mixer (signed multiplier) used for demodulation and for
// amplitude-modulating the cancellation carriers.
//
// out = saturate((a * b) >>> SHIFT) to OUT_W bits. A digital product has no
// flicker noise or offset of its own, which is the point of doing the mixing in
// the fabric. The paper gives the function (mixers driven by DDS sine/cosine,
// AM stages); rescaling by an arithmetic shift with saturation is this design's.
// Timing: one register stage; out_valid is in_valid delayed by one clock.
module mixer #(
  parameter int unsigned A_W   = 16,
  parameter int unsigned B_W   = 16,
  parameter int unsigned OUT_W = 24,
  parameter int unsigned SHIFT = 7
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    in_valid,
  input  logic signed [A_W-1:0]   a,
  input  logic signed [B_W-1:0]   b,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_data
);
  logic signed [A_W+B_W-1:0] p;
  assign p = a * b;

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
