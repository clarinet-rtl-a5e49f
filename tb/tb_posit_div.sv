// tb_posit_div - checks the divider at (N=32, ES=2). For random operand
// fields the DUT's quire addend is read back as a quotient Q and checked by
// the defining property of truncating division: with A, B the exact operand
// magnitudes and u = 2^(scale_a - scale_b - QB) the quotient's last place,
// 0 <= A - Q*B < B*u, and the sign must be that of the quotient (flipped for
// the subtract variant). Division by zero must give NaR, 0/x a zero addend.
module tb_posit_div;
  import posit_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int QF = 240;
  localparam int QB = 2 * 27 + 2;
  logic as, az, an, bs, bz, bn, sub, nar, zero;
  logic signed [11:0] asc, bsc;
  logic [26:0] af, bf;
  logic [511:0] add;

  posit_div dut (.a_sign(as), .a_zero(az), .a_nar(an), .a_scale(asc), .a_frac(af),
                 .b_sign(bs), .b_zero(bz), .b_nar(bn), .b_scale(bsc), .b_frac(bf),
                 .sub(sub), .nar(nar), .zero(zero), .addend(add));

  function automatic fx_t mk(int scale, logic [63:0] frac, int fw);
    fx_t v;
    v = fx_t'(frac | (64'd1 << fw));
    return v <<< (FXP + scale - fw);
  endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fx_t a, b;
    logic signed [2047:0] q, r, bu;
    logic signed [511:0] sadd;
    bit neg;
    az = 0; an = 0; bz = 0; bn = 0;
    for (int i = 0; i < 2000; i++) begin
      as = 1'($urandom); bs = 1'($urandom); sub = 1'($urandom);
      af = 27'($urandom); bf = 27'($urandom);
      if (i % 5 == 0) bf = af;                 // exact quotients
      asc = 12'(int'($urandom_range(0, 40)) - 20);
      bsc = 12'(int'($urandom_range(0, 40)) - 20);
      #1;
      a = mk(int'(asc), 64'(af), 27);
      b = mk(int'(bsc), 64'(bf), 27);
      neg = as ^ bs ^ sub;
      sadd = signed'(add);
      q = 2048'(neg ? -sadd : sadd);          // magnitude, scaled by 2^-QF
      q = q <<< (FXP - QF);                    // scaled by 2^-FXP
      r = (2048'(a) <<< FXP) - q * 2048'(b);   // scaled by 2^-2FXP
      bu = 2048'(b) <<< (FXP + int'(asc) - int'(bsc) - QB);
      checks++;
      if (r < 0 || r >= bu || q <= 0 || nar || zero) begin
        failures++; $display("FAIL div %0d: a=%0d/%h b=%0d/%h neg=%0d", i, asc, af, bsc, bf, neg);
      end
    end
    bz = 1; #1; checks++;
    if (!nar) begin failures++; $display("FAIL div by zero"); end
    bz = 0; az = 1; #1; checks++;
    if (!zero || nar || add != 0) begin failures++; $display("FAIL zero dividend"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
