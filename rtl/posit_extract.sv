// posit_extract - posit field extractor (the "ext1"/"ext2" blocks of Melodica).
//
// Breaks an N-bit posit with at most ES exponent bits into its parts:
//   value = (-1)^sign * 2^scale * 1.frac,  scale = k * 2^ES + exp,
// where k comes from the regime run length r (k = r-1 for a run of ones,
// k = -r for a run of zeros). Negative posits are two's-complemented first,
// as the format defines. The two special patterns are flagged: all zeros is
// zero, a one followed by zeros is NaR (not-a-real).
//
// Interface: p in, {sign, zero, nar, scale, frac} out. frac holds the fraction
// bits left-aligned (MSB right below the hidden one) in FW = N-ES-3 bits;
// missing low bits are zero. scale is a signed SCW-bit number.
// Timing: purely combinational; Melodica registers its outputs at the end of
// its stage 1. The decoding rules are the posit standard the paper restates;
// the regime search by a priority loop is this design's own construction.
module posit_extract
  import posit_pkg::*;
#(
  parameter int unsigned N   = 32,
  parameter int unsigned ES  = 2,
  parameter int unsigned FW  = frac_w(N, ES),
  parameter int unsigned SCW = scale_w(N)
) (
  input  logic [N-1:0]          p,
  output logic                  sign,
  output logic                  zero,
  output logic                  nar,
  output logic signed [SCW-1:0] scale,
  output logic [FW-1:0]         frac
);

  logic [N-1:0]   mag;
  logic [N-2:0]   body;
  logic [N-2:0]   rest;
  logic           r0;
  logic           run_on;
  int unsigned    run;
  logic signed [SCW-1:0] k;
  logic [SCW-1:0] expo;

  always_comb begin
    sign = p[N-1];
    zero = (p == '0);
    nar  = (p == {1'b1, {(N-1){1'b0}}});
    mag  = sign ? (~p + 1'b1) : p;
    body = mag[N-2:0];
    r0   = body[N-2];
    // Regime run length: count leading bits equal to r0.
    run    = 0;
    run_on = 1'b1;
    for (int i = N - 2; i >= 0; i--) begin
      if (run_on && (body[i] == r0)) run = run + 1;
      else run_on = 1'b0;
    end
    k = r0 ? SCW'(signed'(run) - 1) : -SCW'(signed'(run));
    // Drop regime and its terminating bit; exponent then fraction follow.
    rest = (run + 1 >= N - 1) ? '0 : (body << (run + 1));
    expo = '0;
    if (ES > 0) expo = SCW'(rest >> (N - 1 - ES));
    frac  = FW'(rest >> (N - 1 - ES - FW));
    scale = (k <<< ES) + signed'(expo);
    if (zero || nar) begin
      scale = '0;
      frac  = '0;
    end
  end

endmodule
