// phase_acc: phase accumulator of the direct digital synthesizers.
//
// Every clock the phase advances by the frequency tuning word, so the output
// frequency is ftw * f_clk / 2^PHASE_W (ftw = 3436135 gives 200 kHz at 250 MHz).
// One accumulator feeds all four sine/cosine generators of the fabric, which is
// what keeps them synchronous; each one adds its own phase offset after it.
// The 32-bit width follows the paper; the synchronous reset to phase 0 is a
// choice of this design. Timing: phase(n+1) = phase(n) + ftw, registered.
module phase_acc #(
  parameter int unsigned PHASE_W = 32
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [PHASE_W-1:0] ftw,
  output logic [PHASE_W-1:0] phase
);
  always_ff @(posedge clk) begin
    if (rst) phase <= '0;
    else     phase <= phase + ftw;
  end
endmodule
