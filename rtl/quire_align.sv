// quire_align - place a signed magnitude at its fixed-point position in the quire.
//
// The quire is a two's-complement fixed-point number of QW bits whose lowest
// QF bits are fraction (QF = N*N/4 - N/2). A value (-1)^neg * mag * 2^exp,
// with mag an unsigned integer, lands at bit position exp + QF: mag is shifted
// left (or right, dropping bits that fall below the quire's LSB) by that
// amount and negated when neg is set. Bits above the quire width are lost,
// as in any modular accumulator; the quire's carry-guard bits make that
// unreachable for legal posit products.
//
// Interface: {neg, mag[MAGW], exp} in, q[QW] out. Combinational.
// Used by the multiplier, the divider and the quire-initialize path. The
// quire layout is the paper's; this helper is this design's own.
module quire_align
  import posit_pkg::*;
#(
  parameter int unsigned N    = 32,
  parameter int unsigned MAGW = 64,
  parameter int unsigned SCW  = scale_w(N),
  parameter int unsigned QW   = quire_segs(N) * QSEG_W
) (
  input  logic                  neg,
  input  logic [MAGW-1:0]       mag,
  input  logic signed [SCW+1:0] exp,
  output logic [QW-1:0]         q
);

  localparam int signed QF = quire_frac(N);
  localparam int unsigned WW = QW + MAGW;

  logic signed [SCW+2:0] pos;
  logic [WW-1:0]         wide;

  always_comb begin
    pos  = exp + (SCW+3)'(QF);
    wide = WW'(mag);
    if (pos >= 0) wide = wide << pos;
    else          wide = wide >> (-pos);
    q = wide[QW-1:0];
    if (neg) q = ~q + 1'b1;
  end

endmodule
