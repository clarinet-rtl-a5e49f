// tb_posit_mul - checks the exact multiplier at (N=32, ES=2). Operands are
// random extracted fields (sign, scale, 27-bit fraction); the expected quire
// addend is the exact product computed in wide fixed point, placed at the
// quire's binary point (240 fraction bits) and negated for a negative
// product or for the subtract variant. Zero and NaR operands are checked too.
module tb_posit_mul;
  import posit_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int QF = 240;
  logic as, az, an, bs, bz, bn, sub, nar, zero;
  logic signed [11:0] asc, bsc;
  logic [26:0] af, bf;
  logic [511:0] add;

  posit_mul dut (.a_sign(as), .a_zero(az), .a_nar(an), .a_scale(asc), .a_frac(af),
                 .b_sign(bs), .b_zero(bz), .b_nar(bn), .b_scale(bsc), .b_frac(bf),
                 .sub(sub), .nar(nar), .zero(zero), .addend(add));

  function automatic fx_t mk(bit sg, int scale, logic [63:0] frac, int fw);
    fx_t v;
    v = fx_t'(frac | (64'd1 << fw));
    v = v <<< (FXP + scale - fw);
    return sg ? -v : v;
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fx_t a, b;
    logic signed [2047:0] prod;
    logic [511:0] exp_add;
    az = 0; an = 0; bz = 0; bn = 0;
    for (int i = 0; i < 2000; i++) begin
      as = 1'($urandom); bs = 1'($urandom); sub = 1'($urandom);
      af = 27'($urandom); bf = 27'($urandom);
      asc = 12'(int'($urandom_range(0, 120)) - 60);
      bsc = 12'(int'($urandom_range(0, 120)) - 60);
      #1;
      a = mk(as, int'(asc), 64'(af), 27);
      b = mk(bs, int'(bsc), 64'(bf), 27);
      prod = 2048'(a) * 2048'(b);          // scaled by 2^-2FXP
      if (sub) prod = -prod;
      prod = prod >>> (2 * FXP - QF);      // exact: low bits are zero
      exp_add = prod[511:0];
      checks++;
      if (add !== exp_add || nar || zero) begin
        failures++; $display("FAIL mul %0d: a=%0d/%h b=%0d/%h", i, asc, af, bsc, bf);
      end
    end
    az = 1; #1; checks++;
    if (!zero || add != 0) begin failures++; $display("FAIL zero operand"); end
    az = 0; bn = 1; #1; checks++;
    if (!nar) begin failures++; $display("FAIL nar operand"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
