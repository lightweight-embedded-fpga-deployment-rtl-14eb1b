// gdn_sqrt_pwl: square root of a non-negative Q16.16 number by piecewise-linear table lookup.
//
// This is the exponent alpha = 1/2 of GDN. The argument n is normalised by an even power of two,
// n = m * 4^e with the mantissa m in [1,4), so that sqrt(n) = sqrt(m) * 2^e. The top SEG_BITS
// bits of the normalised word select a segment of [1,4) (segments below 1 are never used); the
// table holds sqrt at each segment start in Q16, and the value is interpolated linearly with the
// remaining bits before being shifted by e. More SEG_BITS means a finer table and smaller error
// (about 1e-4 relative at the default). The table is computed at elaboration by an integer square
// root, so no data file is needed.
// Timing: two cycles from in_valid to out_valid, one argument per clock.
// The piecewise-linear table follows the paper; the normalisation, segment count and
// interpolation format are this design's choices.
module gdn_sqrt_pwl
  import gdn_pkg::*;
#(
  parameter int unsigned SEG_BITS = 6
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic signed [31:0] n,
  output logic               out_valid,
  output logic signed [31:0] s
);
  localparam int unsigned FW = 32 - SEG_BITS;   // interpolation fraction width
  localparam int unsigned NSEG = 1 << SEG_BITS;

  // sqrt(k / 2^(SEG_BITS-2)) in Q16 for every segment start k (k = NSEG is the end point m = 4).
  logic [17:0] base_tab [NSEG+1];
  for (genvar k = 0; k <= NSEG; k++) begin : g_tab
    assign base_tab[k] = 18'(isqrt64(64'(k) << (34 - SEG_BITS)));
  end

  // Stage 1: normalise.
  logic [4:0]          lead;      // position of the leading one
  logic [3:0]          e_c;
  logic [31:0]         m_c;
  always_comb begin
    lead = '0;
    for (int b = 0; b < 31; b++) if (n[b]) lead = 5'(b);
    e_c = lead[4:1];
    m_c = 32'(n) << (30 - 2 * int'(e_c));
  end

  logic                v1, zero1;
  logic [3:0]          e1;
  logic [SEG_BITS-1:0] idx1;
  logic [FW-1:0]       frac1;
  always_ff @(posedge clk) begin
    if (!rst_n) v1 <= 1'b0;
    else        v1 <= in_valid;
    if (in_valid) begin
      zero1 <= (n <= 0);
      e1    <= e_c;
      idx1  <= m_c[31 -: SEG_BITS];
      frac1 <= m_c[FW-1:0];
    end
  end

  // Stage 2: interpolate and de-normalise: s = sqrt(m) * 2^e * 2^-8 in Q16.16.
  logic [17:0] b0, b1;
  logic [63:0] interp, scaled;
  always_comb begin
    b0     = base_tab[{1'b0, idx1}];
    b1     = base_tab[32'(idx1) + 1];
    interp = 64'(b0) + ((64'(b1 - b0) * 64'(frac1)) >> FW);
    scaled = (interp << e1) >> 8;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= v1;
    if (v1) s <= zero1 ? 32'sd0 : signed'(scaled[31:0]);
  end
endmodule
