// posit_mul - exact posit multiplier feeding the quire (the "mul" block).
//
// Multiplies two extracted posits (Melodica stage 2). The significands
// 1.fa and 1.fb (FW+1 bits each) give an exact 2*(FW+1)-bit product; the
// scales add. The product is then aligned to the quire's fixed point and
// turned into a two's-complement addend, negated when the signs differ or
// when the command subtracts (FMS.P). No rounding happens: the quire is
// wide enough to hold any product of two posits exactly.
//
// Interface: extracted fields of both operands and 'sub' in; {nar, zero,
// addend[QW]} out. A zero operand gives a zero addend; a NaR operand sets nar.
// Timing: combinational; Melodica registers the result at the end of stage 2.
// Exactness and quire alignment follow the paper; the structure is this
// design's own.
module posit_mul
  import posit_pkg::*;
#(
  parameter int unsigned N   = 32,
  parameter int unsigned ES  = 2,
  parameter int unsigned FW  = frac_w(N, ES),
  parameter int unsigned SCW = scale_w(N),
  parameter int unsigned QW  = quire_segs(N) * QSEG_W
) (
  input  logic                  a_sign, a_zero, a_nar,
  input  logic signed [SCW-1:0] a_scale,
  input  logic [FW-1:0]         a_frac,
  input  logic                  b_sign, b_zero, b_nar,
  input  logic signed [SCW-1:0] b_scale,
  input  logic [FW-1:0]         b_frac,
  input  logic                  sub,
  output logic                  nar,
  output logic                  zero,
  output logic [QW-1:0]         addend
);

  localparam int unsigned PW = 2 * (FW + 1);

  logic [PW-1:0]         prod;
  logic signed [SCW+1:0] exp;
  logic [QW-1:0]         aligned;

  assign prod = PW'({1'b1, a_frac}) * PW'({1'b1, b_frac});
  assign exp  = (SCW+2)'(a_scale) + (SCW+2)'(b_scale) - (SCW+2)'(2 * FW);
  assign nar  = a_nar | b_nar;
  assign zero = (a_zero | b_zero) & ~nar;

  quire_align #(.N(N), .MAGW(PW), .SCW(SCW), .QW(QW)) u_align (
    .neg (a_sign ^ b_sign ^ sub),
    .mag (prod),
    .exp (exp),
    .q   (aligned)
  );

  assign addend = (zero | nar) ? '0 : aligned;

endmodule
