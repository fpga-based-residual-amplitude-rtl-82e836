// decimator: boxcar down-sampler ahead of the RAM lock-in.
//
// Sums R consecutive input samples and emits the sum once every R samples, so
// the output rate is f_in / R and the word grows by log2(R) bits: averaging
// trades rate for resolution, which is what the RAM path needs before its narrow
// filters. The paper states only that the RAM signal is down-sampled to gain
// resolution; the boxcar (sum-and-dump) form and R = 8 are this design's choices.
// Timing: out_valid pulses for one clock, one clock after the R-th input sample
// of a block was accepted; out_data holds the sum until the next pulse.
module decimator #(
  parameter int unsigned IN_W = 14,
  parameter int unsigned R    = 8,
  localparam int unsigned OUT_W = IN_W + $clog2(R)
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_data,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_data
);
  localparam int unsigned CW = (R > 1) ? $clog2(R) : 1;

  logic [CW-1:0]           cnt;
  logic signed [OUT_W-1:0] acc;

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt       <= '0;
      acc       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        if (cnt == CW'(R - 1)) begin
          out_data  <= acc + OUT_W'(in_data);
          out_valid <= 1'b1;
          acc       <= '0;
          cnt       <= '0;
        end else begin
          acc <= acc + OUT_W'(in_data);
          cnt <= cnt + 1'b1;
        end
      end
    end
  end
endmodule
