// posit_to_float - posit to IEEE-754 binary32 converter (the "PtoF" block).
//
// Takes the fields of a posit from an extractor and packs them as a binary32
// value: exponent = scale + 127, mantissa = the posit fraction rounded to 23
// bits with round-to-nearest-even (a carry out of the mantissa bumps the
// exponent). Posit zero gives +0, NaR gives the canonical quiet NaN
// 0x7FC00000. Scales above the binary32 range give infinity and scales below
// the normal range flush to signed zero; neither occurs for N <= 32, ES <= 2,
// whose scales stay within +-120.
//
// Interface: {sign, zero, nar, scale, frac[FW]} in, f[32] out.
// Timing: combinational, in Melodica stage 2; the result bypasses the
// normalizer to the output multiplexer, as in the paper's block diagram. The
// rounding and special-value mapping are this design's choices.
module posit_to_float
  import posit_pkg::*;
#(
  parameter int unsigned N   = 32,
  parameter int unsigned ES  = 2,
  parameter int unsigned FW  = frac_w(N, ES),
  parameter int unsigned SCW = scale_w(N)
) (
  input  logic                  sign,
  input  logic                  zero,
  input  logic                  nar,
  input  logic signed [SCW-1:0] scale,
  input  logic [FW-1:0]         frac,
  output logic [FLT_W-1:0]      f
);

  localparam int unsigned WW = FW + FLT_MW + 1;

  logic [WW-1:0]       wide;
  logic [FLT_MW-1:0]   m;
  logic                guard, stk, up;
  logic [FLT_MW:0]     mr;
  logic signed [SCW:0] be;

  always_comb begin
    wide  = {frac, {(FLT_MW + 1){1'b0}}};
    m     = wide[WW-1 -: FLT_MW];
    guard = wide[WW-1-FLT_MW];
    stk   = |wide[WW-2-FLT_MW:0];
    up    = guard & (stk | m[0]);
    mr    = {1'b0, m} + (FLT_MW+1)'(up);
    be    = (SCW+1)'(scale) + (SCW+1)'(FLT_BIAS) + (SCW+1)'(mr[FLT_MW]);
    if (nar)                 f = 32'h7FC0_0000;
    else if (zero)           f = '0;
    else if (be >= 255)      f = {sign, 8'hFF, 23'd0};
    else if (be <= 0)        f = {sign, 31'd0};
    else                     f = {sign, be[FLT_EW-1:0], mr[FLT_MW-1:0]};
  end

endmodule
