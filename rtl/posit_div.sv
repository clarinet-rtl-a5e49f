// posit_div - posit divider feeding the quire (the "div" block).
//
// Divides two extracted posits (Melodica stage 2) for FDA.P / FDS.P. The
// significand quotient is formed as floor((1.fa << QB) / 1.fb), i.e. QB
// fraction bits beyond the integer quotient, truncated toward zero; the
// scales subtract. The quotient is aligned to the quire's fixed point and
// negated when the signs differ or the command subtracts (FDS.P).
//
// Interface: extracted fields of dividend (a) and divisor (b) and 'sub' in;
// {nar, zero, addend[QW]} out. Division by zero or a NaR operand gives NaR;
// a zero dividend gives a zero addend.
// Timing: combinational; Melodica registers the result at the end of
// stage 2. The paper names the divider but gives neither its algorithm nor
// its precision: the quotient width QB (default 2*FW+2, about the precision
// of a product) and truncation are this design's own choices.
module posit_div
  import posit_pkg::*;
#(
  parameter int unsigned N   = 32,
  parameter int unsigned ES  = 2,
  parameter int unsigned FW  = frac_w(N, ES),
  parameter int unsigned SCW = scale_w(N),
  parameter int unsigned QW  = quire_segs(N) * QSEG_W,
  parameter int unsigned QB  = 2 * FW + 2
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

  localparam int unsigned DW = FW + 1 + QB;

  logic [DW-1:0]         num;
  logic [DW-1:0]         den;
  logic [DW-1:0]         quo;
  logic signed [SCW+1:0] exp;
  logic [QW-1:0]         aligned;

  assign num  = DW'({1'b1, a_frac}) << QB;
  assign den  = DW'({1'b1, b_frac});
  assign quo  = num / den;
  assign exp  = (SCW+2)'(a_scale) - (SCW+2)'(b_scale) - (SCW+2)'(QB);
  assign nar  = a_nar | b_nar | b_zero;
  assign zero = a_zero & ~nar;

  quire_align #(.N(N), .MAGW(DW), .SCW(SCW), .QW(QW)) u_align (
    .neg (a_sign ^ b_sign ^ sub),
    .mag (quo),
    .exp (exp),
    .q   (aligned)
  );

  assign addend = (zero | nar) ? '0 : aligned;

endmodule
