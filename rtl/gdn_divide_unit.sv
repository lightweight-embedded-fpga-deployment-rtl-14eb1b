// gdn_divide_unit (DU): y = x / s for the GDN output, by reciprocal and multiply.
//
// The divisor s (positive Q16.16) is normalised to a mantissa m in [1,2): s = m * 2^(p-16),
// where p is its leading-one position. A 2^SEED_BITS-entry table, indexed by the bits below the
// leading one, gives a first reciprocal r0 of m (Q30, the midpoint of each interval); one
// Newton-Raphson step r1 = r0 * (2 - m*r0) squares its error. The quotient is then the product
// x * r1 shifted right by p + 14, rounded and clipped to 32 bits. A divisor of zero yields the
// clipped value with the sign of x.
// Timing: four pipeline stages, one division per clock, out_valid four cycles after in_valid.
// Replacing the division by a reciprocal approximation and a multiplication follows the paper;
// the seed table, the single Newton step and the pipeline depth are this design's choices.
module gdn_divide_unit #(
  parameter int unsigned SEED_BITS = 5
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic signed [31:0] x,
  input  logic signed [31:0] s,
  output logic               out_valid,
  output logic signed [31:0] y
);
  localparam int unsigned NSEED = 1 << SEED_BITS;

  // r0[k] = 2^30 / (1 + (k + 0.5) / 2^SEED_BITS)
  logic [31:0] seed_tab [NSEED];
  for (genvar k = 0; k < NSEED; k++) begin : g_seed
    assign seed_tab[k] = 32'((64'd1 << (31 + SEED_BITS)) / (64'(NSEED) * 2 + 64'(2 * k + 1)));
  end

  // Stage 1: normalise the divisor and look up the seed.
  logic [4:0]  lead;
  logic [31:0] m_c;
  always_comb begin
    lead = '0;
    for (int b = 0; b < 31; b++) if (s[b]) lead = 5'(b);
    m_c = 32'(s) << (31 - int'(lead));
  end

  logic [3:0]         v;
  logic               zero1, zero2, zero3;
  logic signed [31:0] x1, x2, x3;
  logic [4:0]         p1, p2, p3;
  logic [31:0]        m1;
  logic [31:0]        r0_1, r0_2;
  logic [31:0]        e2;
  logic [31:0]        r1_3;

  logic [63:0]        mr, rr;
  logic signed [63:0] q, qr;
  always_comb begin
    mr = 64'(m1) * 64'(r0_1);                          // Q31 * Q30 -> Q61
    rr = 64'(r0_2) * 64'((32'h8000_0000) - e2);        // Q30 * Q30 -> Q60
    q  = 64'(x3) * signed'(64'(r1_3));                 // Q16 * Q30 -> Q46
    qr = (q + (64'sd1 <<< (int'(p3) + 13))) >>> (int'(p3) + 14);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) v <= '0;
    else        v <= {v[2:0], in_valid};
    // stage 1
    x1    <= x;
    p1    <= lead;
    m1    <= m_c;
    zero1 <= (s <= 0);
    r0_1  <= seed_tab[m_c[30 -: SEED_BITS]];
    // stage 2: e = m * r0 (Q30, close to 1.0)
    x2    <= x1; p2 <= p1; zero2 <= zero1;
    r0_2  <= r0_1;
    e2    <= mr[62:31];
    // stage 3: r1 = r0 * (2 - e)
    x3    <= x2; p3 <= p2; zero3 <= zero2;
    r1_3  <= rr[61:30];
    // stage 4: y = x * r1 * 2^-(p+14)
    if (zero3)                          y <= x3[31] ? -32'sh7FFF_FFFF - 32'sh1 : 32'sh7FFF_FFFF;
    else if (qr > 64'sh7FFF_FFFF)       y <= 32'sh7FFF_FFFF;
    else if (qr < -64'sh8000_0000)      y <= -32'sh7FFF_FFFF - 32'sh1;
    else                                y <= qr[31:0];
  end

  assign out_valid = v[3];
endmodule
