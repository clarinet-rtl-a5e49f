// float_to_posit - IEEE-754 binary32 to posit front half (the "FtoP" block).
//
// Unpacks a binary32 value into the unrounded form the normalizer takes:
// sign, scale (unbiased exponent) and the fraction left-aligned in FRW bits,
// with a sticky bit for fraction bits that do not fit. Subnormal inputs are
// normalized with a leading-one search. Zero (either sign) maps to posit zero;
// infinities and NaNs map to NaR, posits having no other exception value.
// The rounding to N bits happens in posit_norm (Melodica stage 4), which the
// FtoP output reaches through the normalizer's input multiplexer.
//
// Interface: f[32] in; {sign, zero, nar, scale, frac[FRW], sticky} out.
// Timing: combinational, in Melodica stage 1. The FtoP -> norm split follows
// the paper's block diagram; the mapping of inf/NaN to NaR is this design's
// choice (the paper does not say).
module float_to_posit
  import posit_pkg::*;
#(
  parameter int unsigned N   = 32,
  parameter int unsigned FRW = N,
  parameter int unsigned SCW = scale_w(N)
) (
  input  logic [FLT_W-1:0]      f,
  output logic                  sign,
  output logic                  zero,
  output logic                  nar,
  output logic signed [SCW-1:0] scale,
  output logic [FRW-1:0]        frac,
  output logic                  sticky
);

  localparam int unsigned WW = FLT_MW + FRW;

  logic [FLT_EW-1:0] e;
  logic [FLT_MW-1:0] m;
  logic [FLT_MW-1:0] mn;
  logic [WW-1:0]     wide;
  int unsigned       lead;

  always_comb begin
    sign = f[FLT_W-1];
    e    = f[FLT_W-2 -: FLT_EW];
    m    = f[FLT_MW-1:0];
    zero = (e == '0) && (m == '0);
    nar  = (e == '1);
    lead = 0;
    for (int i = 0; i < FLT_MW; i++) if (m[i]) lead = i;
    if (e == '0) begin
      // subnormal: value = m * 2^-149; drop the leading one
      mn    = m << (FLT_MW - lead);
      scale = SCW'(signed'(lead) - FLT_BIAS - signed'(FLT_MW) + 1);
    end else begin
      mn    = m;
      scale = SCW'(signed'({1'b0, e}) - FLT_BIAS);
    end
    wide   = {mn, {FRW{1'b0}}};
    frac   = wide[WW-1 -: FRW];
    sticky = (FLT_MW > 0) && (|(wide & ~({WW{1'b1}} << FLT_MW)));
    if (zero || nar) begin
      scale  = '0;
      frac   = '0;
      sticky = 1'b0;
    end
  end

endmodule
