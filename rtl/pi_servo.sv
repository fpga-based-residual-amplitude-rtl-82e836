// pi_servo: proportional-integral servo driving a precision DAC.
//
// For each valid error sample e:
//   I   <- clamp(I + ki*e)                      (integrator, 2^-I_SHIFT LSB units)
//   out <- sat(offset + (kp*e >>> P_SHIFT) + (I >>> I_SHIFT))
// The integrator is clamped to the output range (anti-windup), so it recovers at
// once when the error changes sign. While enable is low the integrator is cleared
// and the output rests at offset, which lets the laser be tuned by hand before
// the lock is engaged. Two of these are cascaded in the transition lock: the
// first takes the demodulated error signal, the second integrates the first one's
// output, splitting fast and slow corrections between two DACs as in the paper.
// The gain formats, shifts, clamping and offset are this design's choices.
// Timing: out_valid is in_valid delayed by one clock.
module pi_servo #(
  parameter int unsigned IN_W    = 24,
  parameter int unsigned OUT_W   = 16,
  parameter int unsigned K_W     = 16,
  parameter int unsigned P_SHIFT = 16,
  parameter int unsigned I_SHIFT = 24
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    enable,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  err,
  input  logic signed [K_W-1:0]   kp,
  input  logic signed [K_W-1:0]   ki,
  input  logic signed [OUT_W-1:0] offset,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_data
);
  localparam int unsigned ACC_W = OUT_W + I_SHIFT + 1;
  localparam int unsigned PW    = IN_W + K_W;
  localparam logic signed [ACC_W-1:0] I_MAX = ACC_W'(((64'sd1 <<< (OUT_W - 1)) - 1) <<< I_SHIFT);
  localparam logic signed [ACC_W-1:0] I_MIN = ACC_W'((-(64'sd1 <<< (OUT_W - 1))) <<< I_SHIFT);

  logic signed [ACC_W-1:0] integ, integ_nx;
  logic signed [ACC_W:0]   isum;
  logic signed [PW-1:0]    pterm, iterm;
  logic signed [OUT_W+2:0] total;

  assign pterm = err * kp;
  assign iterm = err * ki;
  assign isum  = (ACC_W+1)'(integ) + (ACC_W+1)'(iterm);
  // anti-windup clamp
  assign integ_nx = (isum > (ACC_W+1)'(I_MAX)) ? I_MAX :
                    (isum < (ACC_W+1)'(I_MIN)) ? I_MIN : ACC_W'(isum);
  assign total = (OUT_W+3)'(offset)
               + (OUT_W+3)'(ram_pkg::sat_s(64'(pterm >>> P_SHIFT), OUT_W + 1))
               + (OUT_W+3)'(integ_nx >>> I_SHIFT);

  always_ff @(posedge clk) begin
    if (rst) begin
      integ     <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      if (!enable) begin
        integ    <= '0;
        out_data <= offset;
      end else if (in_valid) begin
        integ    <= integ_nx;
        out_data <= OUT_W'(ram_pkg::sat_s(64'(total), OUT_W));
      end
    end
  end
endmodule
