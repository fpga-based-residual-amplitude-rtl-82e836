// fir_lpf: configurable direct-form FIR low-pass filter.
//
// TAPS coefficients (Q1.17, signed) are held in registers and can be rewritten
// at run time through the coefficient port, so the same hardware serves as a
// minimum-phase low-pass (the error-signal and I/Q filters) or as the low-pass
// half of the RAM band-pass. Each accepted sample shifts the
// delay line; all products are formed in parallel and summed, and the sum is
// shifted right by OUT_SHIFT and saturated to OUT_W bits (24 by default, as in
// the paper). With OUT_SHIFT = 17 a coefficient set summing to 2^17 has unity DC
// gain. After reset the coefficients form a unity-gain boxcar.
// The paper gives the role, the 24-bit output and that the filter is configurable;
// the tap count (32), coefficient format and direct form are this design's.
// Timing: out_valid follows in_valid by 3 clocks; one sample per clock at most.
module fir_lpf #(
  parameter int unsigned IN_W      = 24,
  parameter int unsigned OUT_W     = 24,
  parameter int unsigned COEF_W    = 18,
  parameter int unsigned TAPS      = 32,
  parameter int unsigned OUT_SHIFT = 17,
  localparam int unsigned AW = (TAPS > 1) ? $clog2(TAPS) : 1
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     coef_we,
  input  logic [AW-1:0]            coef_addr,
  input  logic signed [COEF_W-1:0] coef_data,
  input  logic                     in_valid,
  input  logic signed [IN_W-1:0]   in_data,
  output logic                     out_valid,
  output logic signed [OUT_W-1:0]  out_data
);
  localparam int unsigned PW  = IN_W + COEF_W;
  localparam int unsigned ACW = PW + AW + 1;
  localparam logic signed [COEF_W-1:0] BOX = COEF_W'((2 ** (COEF_W - 1)) / TAPS);

  logic signed [COEF_W-1:0] coef [TAPS];
  logic signed [IN_W-1:0]   x    [TAPS];
  logic signed [PW-1:0]     prod [TAPS];
  logic                     v0, v1;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < TAPS; k++) coef[k] <= BOX;
    end else if (coef_we && int'(coef_addr) < int'(TAPS)) begin
      coef[coef_addr] <= coef_data;
    end
  end

  // stage 0: delay line
  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < TAPS; k++) x[k] <= '0;
      v0 <= 1'b0;
    end else begin
      v0 <= in_valid;
      if (in_valid) begin
        x[0] <= in_data;
        for (int k = 1; k < TAPS; k++) x[k] <= x[k-1];
      end
    end
  end

  // stage 1: products
  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < TAPS; k++) prod[k] <= '0;
      v1   <= 1'b0;
    end else begin
      for (int k = 0; k < TAPS; k++) prod[k] <= x[k] * coef[k];
      v1   <= v0;
    end
  end

  // stage 2: sum, scale, saturate
  logic signed [ACW-1:0] acc;
  always_comb begin
    acc = '0;
    for (int k = 0; k < TAPS; k++) acc += ACW'(prod[k]);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= v1;
      out_data  <= OUT_W'(ram_pkg::sat_s(64'(acc >>> OUT_SHIFT), OUT_W));
    end
  end
endmodule
