// tb_float_to_posit - checks the float unpacker at FRW=32 and FRW=8. For
// random normal and subnormal binary32 inputs the value rebuilt from
// (sign, scale, frac) must equal the float's exact value truncated to the
// kept fraction bits, and sticky must be set exactly when bits were dropped.
// Zeros, infinities and NaNs are checked for the zero and NaR flags.
module tb_float_to_posit;
  import posit_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [31:0] f;
  logic s32, z32, n32, st32, s8, z8, n8, st8;
  logic signed [11:0] sc32; logic signed [9:0] sc8;
  logic [31:0] fr32; logic [7:0] fr8;

  float_to_posit #(.N(32), .FRW(32)) d32 (.f(f), .sign(s32), .zero(z32), .nar(n32), .scale(sc32), .frac(fr32), .sticky(st32));
  float_to_posit #(.N(8),  .FRW(8))  d8  (.f(f), .sign(s8),  .zero(z8),  .nar(n8),  .scale(sc8),  .frac(fr8),  .sticky(st8));

  function automatic fx_t mk(int scale, logic [63:0] frac, int fw);
    fx_t v;
    v = fx_t'(frac | (64'd1 << fw));
    return v <<< (FXP + scale - fw);
  endfunction

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s f=%h", what, f); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fx_t v, r, ulp;
    for (int i = 0; i < 3000; i++) begin
      f = $urandom;
      if (i % 10 == 0) f[30:23] = 8'd0;      // subnormals
      if (f[30:23] == 8'hFF) f[30:23] = 8'hFE;
      if (f[30:0] == 0) f[0] = 1'b1;
      #1;
      v = float_to_fx(f); if (v < 0) v = -v;
      r = mk(int'(sc32), 64'(fr32), 32);
      ulp = fx_pow2(int'(sc32) - 32);
      chk(s32 == f[31] && !z32 && !n32, "flags32");
      chk(r <= v && v - r < ulp && st32 == (v != r), "value32");
      r = mk(int'(sc8), 64'(fr8), 8);
      ulp = fx_pow2(int'(sc8) - 8);
      chk(r <= v && v - r < ulp && st8 == (v != r), "value8");
    end
    f = 32'h0000_0000; #1; chk(z32 && !n32 && z8, "+0");
    f = 32'h8000_0000; #1; chk(z32 && !n32, "-0");
    f = 32'h7F80_0000; #1; chk(n32 && n8, "inf");
    f = 32'hFFC0_0001; #1; chk(n32, "nan");
    f = 32'h3F80_0000; #1; chk(sc32 == 0 && fr32 == 0 && !st32, "one");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
