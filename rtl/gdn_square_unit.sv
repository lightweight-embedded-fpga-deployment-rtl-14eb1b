// gdn_square_unit (SU): squares one Q16.16 activation per clock.
//
// x2 = sat((x*x) >> FRAC). The full 64-bit product is formed (one DSP-style multiply), then
// shifted back to Q16.16 and clipped to the positive 32-bit maximum. One cycle of latency,
// fully pipelined (a new x may enter every clock). The unit is the paper's "square" step of
// GDN; its number format, latency and saturation are this design's choices.
module gdn_square_unit #(
  parameter int unsigned FRAC = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic signed [31:0] x,
  output logic               out_valid,
  output logic signed [31:0] x2
);
  logic signed [63:0] prod;
  logic signed [63:0] shifted;

  always_comb begin
    prod    = 64'(x) * 64'(x);
    shifted = prod >>> FRAC;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
    if (in_valid) x2 <= (shifted > 64'sh7FFF_FFFF) ? 32'sh7FFF_FFFF : shifted[31:0];
  end
endmodule
