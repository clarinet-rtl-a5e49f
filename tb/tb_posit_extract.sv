// tb_posit_extract - checks the posit field extractor against a bit-walking
// reference decoder. Two instances: (N=32, ES=2) with random patterns and
// (N=8, ES=0) with all 256 patterns. For each input the value rebuilt from
// the extractor's outputs, (-1)^sign * 1.frac * 2^scale, must equal the
// reference value exactly, and the zero/NaR flags must match.
module tb_posit_extract;
  import posit_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [31:0] pa; logic [7:0] pb;
  logic sa, za, na, sb, zb, nb;
  logic signed [11:0] sca; logic signed [9:0] scb;
  logic [26:0] fa; logic [4:0] fb;

  posit_extract #(.N(32), .ES(2)) dut32 (.p(pa), .sign(sa), .zero(za), .nar(na), .scale(sca), .frac(fa));
  posit_extract #(.N(8),  .ES(0)) dut8  (.p(pb), .sign(sb), .zero(zb), .nar(nb), .scale(scb), .frac(fb));

  function automatic fx_t rebuild(bit s, int scale, logic [63:0] frac, int fw);
    fx_t v;
    v = fx_t'(frac | (64'd1 << fw));
    v = v <<< (FXP + scale - fw);
    return s ? -v : v;
  endfunction

  task automatic check32(logic [31:0] p);
    fx_t ref_v, got;
    bit rnar;
    pa = p; #1;
    ref_v = posit_to_fx(p, 32, 2, rnar);
    checks++;
    if (rnar) begin
      if (!na) begin failures++; $display("FAIL nar %h", p); end
    end else if (ref_v == 0) begin
      if (!za) begin failures++; $display("FAIL zero %h", p); end
    end else begin
      got = rebuild(sa, int'(sca), 64'(fa), 27);
      if (got != ref_v || za || na) begin failures++; $display("FAIL 32 %h scale=%0d frac=%h", p, sca, fa); end
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fx_t ref_v, got;
    bit rnar;
    check32(32'h0); check32(32'h8000_0000); check32(32'h4000_0000); check32(32'h7FFF_FFFF);
    check32(32'h0000_0001); check32(32'hFFFF_FFFF); check32(32'hC000_0000);
    for (int i = 0; i < 3000; i++) check32($urandom);
    for (int i = 0; i < 256; i++) begin
      pb = 8'(i); #1;
      ref_v = posit_to_fx(64'(i), 8, 0, rnar);
      checks++;
      if (rnar) begin
        if (!nb) begin failures++; $display("FAIL nar8 %h", pb); end
      end else if (ref_v == 0) begin
        if (!zb) begin failures++; $display("FAIL zero8 %h", pb); end
      end else begin
        got = rebuild(sb, int'(scb), 64'(fb), 5);
        if (got != ref_v || zb || nb) begin failures++; $display("FAIL 8 %h scale=%0d frac=%h", pb, scb, fb); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
