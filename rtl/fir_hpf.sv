// fir_hpf: high-pass filter built as "delayed input minus FIR low-pass".
//
// The low-pass is a moving average over the last N = 2^LOG2N samples, kept as a
// running sum: each new sample is added and the sample N back is subtracted.
// All arithmetic is on integers and the division by N is a shift, so the
// low-pass adds no rounding noise of its own and its zero at DC is exact. The
// input delayed by N/2 samples (the low-pass group delay, to half a sample) minus
// the average leaves the high-pass part: DC and slow flicker are removed while a
// modulation carrier well above fs/N passes with gain close to 1. The last N
// samples sit in a circular buffer (block RAM) read at two points, N and N/2
// samples back. Both output paths carry EXT extra fractional bits.
// The structure, an FIR low-pass followed by a subtractor, is the paper's; the
// moving-average coefficient set (which makes long windows cheap: no multipliers),
// N and EXT are this design's. Until N samples have been seen after reset, the
// unwritten buffer entries count as zero.
// Timing: out_valid follows in_valid by 3 clocks; output width IN_W+EXT, saturated.
module fir_hpf #(
  parameter int unsigned IN_W  = 14,
  parameter int unsigned EXT   = 2,
  parameter int unsigned LOG2N = 11,
  localparam int unsigned OUT_W = IN_W + EXT
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_data,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_data
);
  localparam int unsigned N  = 2 ** LOG2N;
  localparam int unsigned SW = IN_W + LOG2N;

  logic signed [IN_W-1:0] buf_mem [N];
  logic [LOG2N-1:0]       wp;
  logic [LOG2N:0]         fill;          // samples written since reset, saturates at N
  logic                   full1, half1;

  // stage 1: buffer access (read-before-write)
  logic signed [IN_W-1:0] x1, old1, mid1;
  logic                   v1;
  always_ff @(posedge clk) begin
    if (in_valid) begin
      buf_mem[wp] <= in_data;
      old1        <= buf_mem[wp];
      mid1        <= buf_mem[wp + LOG2N'(N / 2)];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp    <= '0;
      fill  <= '0;
      x1    <= '0;
      v1    <= 1'b0;
      full1 <= 1'b0;
      half1 <= 1'b0;
    end else begin
      v1 <= in_valid;
      if (in_valid) begin
        wp    <= wp + 1'b1;
        x1    <= in_data;
        full1 <= (fill == (LOG2N+1)'(N));
        half1 <= (fill >= (LOG2N+1)'(N / 2));
        if (fill != (LOG2N+1)'(N)) fill <= fill + 1'b1;
      end
    end
  end

  // stage 2: running sum over the last N samples
  logic signed [SW-1:0]   sum;
  logic signed [IN_W-1:0] mid2;
  logic                   v2;
  always_ff @(posedge clk) begin
    if (rst) begin
      sum  <= '0;
      mid2 <= '0;
      v2   <= 1'b0;
    end else begin
      v2 <= v1;
      if (v1) begin
        sum  <= sum + SW'(x1) - (full1 ? SW'(old1) : SW'(0));
        mid2 <= half1 ? mid1 : '0;
      end
    end
  end

  // stage 3: subtract the average from the delayed sample
  logic signed [SW+EXT:0] diff;
  assign diff = ((SW+EXT+1)'(mid2) <<< EXT) - ((SW+EXT+1)'(sum) >>> (LOG2N - EXT));

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= v2;
      out_data  <= OUT_W'(ram_pkg::sat_s(64'(diff), OUT_W));
    end
  end
endmodule
