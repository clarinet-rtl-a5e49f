// posit_norm - normalizer and rounder (the "norm" block of Melodica stage 4).
//
// Takes an unrounded real value (-1)^sign * 2^scale * 1.frac, plus a sticky bit
// standing for any nonzero bits below frac, and encodes it as the nearest
// N-bit posit with round-to-nearest-even, the only rounding mode posits have.
// The encoding is built in one wide vector: a two-bit regime seed ("10" for
// k >= 0, "01" for k < 0), the ES exponent bits and the fraction. An arithmetic
// right shift by k (k >= 0) or a logical one by -k-1 (k < 0) stretches the seed
// into the regime run. The top N-1 bits are the unrounded magnitude, the next
// bit is the guard, the rest ORed with sticky is the sticky. Scales beyond
// the posit range saturate to maxpos/minpos, since posits never round to zero
// or to NaR. A negative result is the two's complement of the magnitude.
//
// Interface: {sign, zero, nar, scale, frac[FRW], sticky} in, p out.
// Timing: combinational. Rounding rule per the paper (RNE); the construction
// is this design's own.
module posit_norm
  import posit_pkg::*;
#(
  parameter int unsigned N   = 32,
  parameter int unsigned ES  = 2,
  parameter int unsigned FRW = 32,
  parameter int unsigned SCW = scale_w(N)
) (
  input  logic                  sign,
  input  logic                  zero,
  input  logic                  nar,
  input  logic signed [SCW-1:0] scale,
  input  logic [FRW-1:0]        frac,
  input  logic                  sticky,
  output logic [N-1:0]          p
);

  localparam int unsigned VW = 2 + ES + FRW + N;
  localparam int signed KMAX = N - 2;

  logic signed [SCW-1:0] k;
  logic [SCW-1:0]        e;
  logic [VW-1:0]         v;
  logic [VW-1:0]         sh;
  logic [N-2:0]          top;
  logic                  guard;
  logic                  stk;
  logic [N-2:0]          mag;
  logic                  rnd;

  always_comb begin
    k = scale >>> ES;
    e = scale & SCW'((1 << ES) - 1);
    v = '0;
    v[VW-1:VW-2] = (k >= 0) ? 2'b10 : 2'b01;
    v = v | (VW'(e) << (VW - 2 - ES)) | (VW'(frac) << (VW - 2 - ES - FRW));
    if (k >= 0) sh = VW'($signed(v) >>> k);
    else        sh = v >> (-k - 1);
    top   = sh[VW-1 -: N-1];
    guard = sh[VW-N];
    stk   = sticky | (|sh[VW-N-1:0]);
    rnd   = guard & (top[0] | stk);
    if (int'(k) >= KMAX)       mag = {(N-1){1'b1}};              // maxpos
    else if (int'(k) < -KMAX)  mag = {{(N-2){1'b0}}, 1'b1};      // minpos
    else                       mag = top + {{(N-2){1'b0}}, rnd};
    if (mag == '0) mag = {{(N-2){1'b0}}, 1'b1};            // never round to zero
    if (nar)       p = {1'b1, {(N-1){1'b0}}};
    else if (zero) p = '0;
    else if (sign) p = ~{1'b0, mag} + 1'b1;
    else           p = {1'b0, mag};
  end

endmodule
