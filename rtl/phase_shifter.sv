// phase_shifter: digital phase shifter ("PS") in front of a DDS lookup.
//
// Adds a programmable offset to the shared accumulator phase, modulo 2^PHASE_W,
// so a full turn is 2^PHASE_W. Because the shift is digital it does not drift,
// which is what lets the fabric cancel fixed cable, modulator and processing
// delays once and for all. One register stage: phase_out(n+1) = phase_in(n) + offset.
module phase_shifter #(
  parameter int unsigned PHASE_W = 32
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [PHASE_W-1:0] phase_in,
  input  logic [PHASE_W-1:0] offset,
  output logic [PHASE_W-1:0] phase_out
);
  always_ff @(posedge clk) begin
    if (rst) phase_out <= '0;
    else     phase_out <= phase_in + offset;
  end
endmodule
