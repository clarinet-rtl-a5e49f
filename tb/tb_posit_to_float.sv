// tb_posit_to_float - checks posit-to-binary32 conversion at (N=32, ES=2),
// where posit fractions (up to 27 bits) must be rounded to 23 bits. Random
// posit field values are converted by the DUT and by the reference
// (nearest binary32, ties to even); zero and NaR map to +0 and 0x7FC00000.
// Exact ties are forced in part of the cases.
module tb_posit_to_float;
  import posit_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic s, z, n;
  logic signed [11:0] sc;
  logic [26:0] fr;
  logic [31:0] f;

  posit_to_float dut (.sign(s), .zero(z), .nar(n), .scale(sc), .frac(fr), .f(f));

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
    logic [31:0] e;
    z = 0; n = 0;
    for (int i = 0; i < 3000; i++) begin
      s = 1'($urandom); fr = 27'($urandom);
      if (i % 3 == 0) fr[3:0] = 4'b1000;
      if (i % 7 == 0) fr = '1;
      sc = 12'(int'($urandom_range(0, 240)) - 120);
      #1;
      e = fx_to_float(mk(s, int'(sc), 64'(fr), 27));
      checks++;
      if (f !== e) begin failures++; $display("FAIL got %h exp %h (s=%0d sc=%0d fr=%h)", f, e, s, sc, fr); end
    end
    z = 1; #1; checks++; if (f !== 32'h0) begin failures++; $display("FAIL zero"); end
    z = 0; n = 1; #1; checks++; if (f !== 32'h7FC0_0000) begin failures++; $display("FAIL nar"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
