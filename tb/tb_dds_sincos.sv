// tb_dds_sincos: checks the Taylor-corrected sine/cosine lookup.
// Random phases are applied every clock; three clocks later sin_o and cos_o must
// match 32767*sin/cos of the exact 32-bit phase within 2 LSB. Without the Taylor
// step the error would reach about 50 LSB, so the bound tests the interpolation.
// A phase sweep also checks the latency and the quadrature relation.
module tb_dds_sincos;
  localparam real PI = 3.14159265358979;
  logic clk = 1'b0;
  logic [31:0] phase;
  logic signed [15:0] sin_o, cos_o;
  logic [31:0] hist [4];
  int checks = 0, failures = 0;
  real es, ec, maxe;

  always #2 clk = ~clk;

  dds_sincos dut (.clk, .phase, .sin_o, .cos_o);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    maxe = 0.0;
    phase = '0;
    for (int k = 0; k < 4; k++) hist[k] = '0;
    for (int n = 0; n < 8000; n++) begin
      @(negedge clk);
      if (n >= 4) begin
        // value for the phase applied three clocks before this edge
        es = real'(sin_o) - 32767.0 * $sin(2.0 * PI * real'(hist[2]) / 4294967296.0);
        ec = real'(cos_o) - 32767.0 * $cos(2.0 * PI * real'(hist[2]) / 4294967296.0);
        if (es < 0) es = -es;
        if (ec < 0) ec = -ec;
        if (es > maxe) maxe = es;
        if (ec > maxe) maxe = ec;
        checks++;
        if (es > 2.0 || ec > 2.0) begin
          failures++;
          if (failures < 5) $display("phase %h sin %0d cos %0d err %f %f", hist[2], sin_o, cos_o, es, ec);
        end
      end
      hist[3] = hist[2]; hist[2] = hist[1]; hist[1] = hist[0];
      phase = (n < 4000) ? $urandom : 32'(n) * 32'd3436135 * 32'd251;
      hist[0] = phase;
    end
    $display("max error %f LSB", maxe);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
