// tb_posit_norm - checks the normalizer/rounder. Random unrounded values
// (sign, scale, 32-bit fraction, sticky) are rounded by the DUT and by the
// reference (value-based nearest posit, ties to even), for (32,2) and (8,0).
// Scales are kept where at least one fraction bit survives, so value-based
// and encoding-based ties agree. Saturation to maxpos/minpos, zero and NaR
// are checked directly.
module tb_posit_norm;
  import posit_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic s, z, n, st;
  logic signed [11:0] sc32;
  logic signed [9:0]  sc8;
  logic [31:0] fr32;
  logic [7:0]  fr8;
  logic [31:0] p32;
  logic [7:0]  p8;

  posit_norm #(.N(32), .ES(2), .FRW(32)) dut32 (.sign(s), .zero(z), .nar(n), .scale(sc32), .frac(fr32), .sticky(st), .p(p32));
  posit_norm #(.N(8),  .ES(0), .FRW(8))  dut8  (.sign(s), .zero(z), .nar(n), .scale(sc8),  .frac(fr8),  .sticky(st), .p(p8));

  function automatic fx_t mk(bit sg, int scale, logic [63:0] frac, int fw, bit sticky);
    fx_t v;
    v = fx_t'(frac | (64'd1 << fw));
    v = v <<< (FXP + scale - fw);
    if (sticky) v = v + 1;
    return sg ? -v : v;
  endfunction

  task automatic expect32(logic [31:0] exp_p, string what);
    checks++;
    if (p32 !== exp_p) begin failures++; $display("FAIL %s: got %h exp %h (s=%0d sc=%0d fr=%h st=%0d)", what, p32, exp_p, s, sc32, fr32, st); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] e;
    z = 0; n = 0; st = 0; s = 0; sc8 = 0; fr8 = 0;
    for (int i = 0; i < 3000; i++) begin
      s = 1'($urandom); st = 1'($urandom); fr32 = $urandom;
      if (i % 4 == 0) fr32[8:0] = 9'h100;          // exact ties
      sc32 = 12'(int'($urandom_range(0, 80)) - 40);
      #1;
      e = fx_to_posit(mk(s, int'(sc32), 64'(fr32), 32, st), 32, 2);
      expect32(e[31:0], "round32");
      s = 1'($urandom); fr8 = 8'($urandom); sc8 = 10'(int'($urandom_range(0, 6)) - 3);
      if (i % 4 == 1) fr8[3:0] = 4'h8;
      #1;
      e = fx_to_posit(mk(s, int'(sc8), 64'(fr8), 8, st), 8, 0);
      checks++;
      if (p8 !== e[7:0]) begin failures++; $display("FAIL round8 got %h exp %h sc=%0d fr=%h st=%0d s=%0d", p8, e[7:0], sc8, fr8, st, s); end
    end
    // saturation and specials
    s = 0; st = 0; fr32 = 0; sc32 = 12'sd200; #1; expect32(32'h7FFF_FFFF, "maxpos");
    s = 1; #1; expect32(32'h8000_0001, "-maxpos");
    s = 0; sc32 = -12'sd300; #1; expect32(32'h0000_0001, "minpos");
    z = 1; #1; expect32(32'h0, "zero");
    z = 0; n = 1; #1; expect32(32'h8000_0000, "nar");
    n = 0; s = 0; sc32 = 0; fr32 = 0; #1; expect32(32'h4000_0000, "one");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
