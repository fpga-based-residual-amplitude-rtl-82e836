// dds_sincos: sine/cosine generator of a DDS with Taylor-corrected table lookup.
//
// The top AW bits of the phase address a full-period, 2^AW-entry table of 16-bit
// sine values held in block RAM; the cosine is read from the same table a quarter
// period further on (second read port). The next FRAC_W phase bits give the
// residual angle d = frac * 2*pi / 2^(AW+FRAC_W), and a first-order Taylor step
//   sin(p + d) ~ sin(p) + d*cos(p),   cos(p + d) ~ cos(p) - d*sin(p)
// removes most of the phase-truncation spurs. The table and the Taylor correction
// follow the paper (16-bit table in BRAM, Taylor interpolation); the table depth
// (4096), the FRAC_W = 10 residual bits and the 2*pi constant in Q3.13 are this
// design's choices. The table amplitude is 2^(AMP_W-1)-1 and the corrected sum is
// saturated. Latency: 3 clocks from phase to sin_o/cos_o (table read, multiply,
// add), fully pipelined, one result per clock.
module dds_sincos #(
  parameter int unsigned PHASE_W = 32,
  parameter int unsigned AMP_W   = 16,
  parameter int unsigned AW      = 12,
  parameter int unsigned FRAC_W  = 10
) (
  input  logic                    clk,
  input  logic [PHASE_W-1:0]      phase,
  output logic signed [AMP_W-1:0] sin_o,
  output logic signed [AMP_W-1:0] cos_o
);
  localparam int unsigned DEPTH   = 2 ** AW;
  localparam int unsigned TP_FRAC = 13;
  // round(2*pi * 2^13)
  localparam logic signed [17:0] TWO_PI_Q = 18'sd51472;
  localparam int unsigned SH      = AW + FRAC_W + TP_FRAC;
  localparam int unsigned PROD_W  = AMP_W + FRAC_W + 1 + 18;
  localparam real AMP = real'(2 ** (AMP_W - 1) - 1);

  logic signed [AMP_W-1:0] rom [DEPTH];
  initial begin
    for (int i = 0; i < DEPTH; i++)
      rom[i] = AMP_W'($rtoi($floor(AMP * $sin(2.0 * 3.14159265358979 * real'(i) / real'(DEPTH)) + 0.5)));
  end

  logic [AW-1:0]     idx_s, idx_c;
  logic [FRAC_W-1:0] frac;
  assign idx_s = phase[PHASE_W-1 -: AW];
  assign idx_c = idx_s + AW'(DEPTH / 4);
  assign frac  = phase[PHASE_W-AW-1 -: FRAC_W];

  // stage 1: table read
  logic signed [AMP_W-1:0] s1, c1;
  logic [FRAC_W-1:0]       f1;
  always_ff @(posedge clk) begin
    s1 <= rom[idx_s];
    c1 <= rom[idx_c];
    f1 <= frac;
  end

  // stage 2: Taylor terms d*cos and d*sin
  logic signed [PROD_W-1:0] dc2, ds2;
  logic signed [AMP_W-1:0]  s2, c2;
  logic signed [FRAC_W:0]   f1s;
  assign f1s = signed'({1'b0, f1});
  always_ff @(posedge clk) begin
    dc2 <= PROD_W'(c1 * f1s * TWO_PI_Q);
    ds2 <= PROD_W'(s1 * f1s * TWO_PI_Q);
    s2  <= s1;
    c2  <= c1;
  end

  // stage 3: correction and saturation
  logic signed [AMP_W+1:0] s3, c3;
  assign s3 = (AMP_W+2)'(s2) + (AMP_W+2)'(dc2 >>> SH);
  assign c3 = (AMP_W+2)'(c2) - (AMP_W+2)'(ds2 >>> SH);
  always_ff @(posedge clk) begin
    sin_o <= AMP_W'(ram_pkg::sat_s(64'(s3), AMP_W));
    cos_o <= AMP_W'(ram_pkg::sat_s(64'(c3), AMP_W));
  end
endmodule
