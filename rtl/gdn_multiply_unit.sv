// gdn_multiply_unit (MU): signed fixed-point multiply, p = sat(round(a*b >> FRAC)).
//
// In the GDN sum it forms gamma_ij * x_j^2; in iGDN it also forms the final y_i * sqrt(.).
// Rounding adds half an LSB before the arithmetic shift; the result is clipped to 32 bits.
// One cycle of latency, one operation per clock. Latency, rounding and saturation are this
// design's choices; the paper names the unit and maps it to DSP slices.
module gdn_multiply_unit #(
  parameter int unsigned FRAC = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic signed [31:0] a,
  input  logic signed [31:0] b,
  output logic               out_valid,
  output logic signed [31:0] p
);
  logic signed [63:0] prod;
  logic signed [63:0] rnd;

  always_comb begin
    prod = 64'(a) * 64'(b);
    rnd  = (prod + (64'sd1 <<< (FRAC - 1))) >>> FRAC;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
    if (in_valid) begin
      if (rnd > 64'sh7FFF_FFFF)        p <= 32'sh7FFF_FFFF;
      else if (rnd < -64'sh8000_0000)  p <= -32'sh7FFF_FFFF - 32'sh1;
      else                             p <= rnd[31:0];
    end
  end
endmodule
