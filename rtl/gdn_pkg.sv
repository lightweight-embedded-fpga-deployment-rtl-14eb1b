// gdn_pkg: types, constants and small arithmetic helpers shared by the GDN/iGDN core.
//
// The core works on 32-bit signed fixed-point numbers with FX_FRAC fraction bits (Q16.16),
// the "32-bit precision" of the normalisation, while the surrounding network exchanges int8
// activations. Conversion between the two uses power-of-two scales given as fraction-bit counts
// (symmetric, zero point 0, saturating), a choice of this design.
// A layer is described to the core by a five-word descriptor in memory (desc_t below); the
// layout is this design's own.
package gdn_pkg;

  localparam int unsigned FX_W    = 32;
  localparam int unsigned FX_FRAC = 16;
  localparam int unsigned ACT_W   = 8;
  localparam int unsigned DESC_WORDS = 5;

  typedef logic signed [FX_W-1:0]  fx_t;
  typedef logic signed [ACT_W-1:0] act_t;

  typedef enum logic { MODE_GDN = 1'b0, MODE_IGDN = 1'b1 } gdn_mode_e;

  // Layer descriptor. Word 0: [31] mode, [30] last, [27:24] in_fp, [23:20] out_fp,
  // [15:0] channels. Word 1: pixel count. Words 2-4: word addresses of the parameter block
  // (beta[C] then gamma[C*C], row i = output channel), the packed int8 input and the output.
  typedef struct packed {
    gdn_mode_e   mode;
    logic        last;
    logic [3:0]  in_fp;
    logic [3:0]  out_fp;
    logic [15:0] channels;
    logic [31:0] npix;
    logic [31:0] param_addr;
    logic [31:0] src_addr;
    logic [31:0] dst_addr;
  } desc_t;

  localparam fx_t FX_MAX = 32'sh7FFF_FFFF;
  localparam fx_t FX_MIN = -32'sh7FFF_FFFF - 32'sh1;

  // Saturate a 64-bit signed value to the 32-bit range.
  function automatic fx_t sat_fx(input logic signed [63:0] v);
    if (v > 64'sh0000_0000_7FFF_FFFF)       return FX_MAX;
    else if (v < -64'sh0000_0000_8000_0000) return FX_MIN;
    else                                    return fx_t'(v);
  endfunction

  // int8 with `fp` fraction bits -> Q16.16.
  function automatic fx_t act_to_fx(input act_t a, input logic [3:0] fp);
    logic signed [63:0] w;
    w = 64'(signed'(a)) <<< FX_FRAC;
    return sat_fx(w >>> fp);
  endfunction

  // Q16.16 -> int8 with `fp` fraction bits: round half up, saturate. `sat` flags clipping.
  function automatic act_t fx_to_act(input fx_t v, input logic [3:0] fp, output logic sat);
    logic signed [63:0] w;
    int unsigned sh;
    sh = FX_FRAC - 32'(fp);
    w = 64'(signed'(v));
    if (sh > 0) w = (w + (64'sd1 <<< (sh - 1))) >>> sh;
    sat = 1'b0;
    if (w > 64'sd127)       begin sat = 1'b1; return 8'sd127;  end
    else if (w < -64'sd128) begin sat = 1'b1; return -8'sd128; end
    else return act_t'(w);
  endfunction

  // Integer square root of a 64-bit value (floor), for building tables at elaboration.
  function automatic logic [31:0] isqrt64(input logic [63:0] v);
    logic [63:0] r, b, x;
    x = v; r = '0; b = 64'h4000_0000_0000_0000;
    while (b > x) b = b >> 2;
    while (b != 0) begin
      if (x >= r + b) begin x = x - (r + b); r = (r >> 1) + b; end
      else r = r >> 1;
      b = b >> 2;
    end
    return r[31:0];
  endfunction

endpackage
