// tb_melodica - drives the posit unit at its default size (N=32, ES=2,
// divider present) with command streams and checks every output against
// the exact reference:
//   * dot products: FCVT_R_P init, a stream of FMA_P / FMS_P issued back to
//     back (in_ready must stay high: one command per cycle), then FCVT_P_R;
//     the result must be the correctly rounded exact sum, and the read must
//     have waited for the quire (quire_stall seen);
//   * divide-accumulate FDA_P / FDS_P against a finely truncated quotient;
//   * FCVT_P_S and FCVT_S_P against value-based rounding, with their
//     latency: out_valid rises 3 edges after the accepting edge, so it is
//     first sampled at the 4th edge (lat == 4 as counted here);
//   * NaR propagating from an FMA_P operand to the quire read-out.
module tb_melodica;
  import posit_pkg::*;
  import posit_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic in_valid, in_ready, out_valid, busy, qstall;
  mel_cmd_e in_cmd;
  logic [31:0] in_op1, in_op2, out_data;

  melodica dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready), .in_cmd(in_cmd),
                .in_op1(in_op1), .in_op2(in_op2), .out_valid(out_valid), .out_data(out_data),
                .busy(busy), .quire_stall(qstall), .quire_value());

  int stall_cycles = 0;
  always @(posedge clk) if (rst_n && qstall) stall_cycles++;

  logic [31:0] outq[$];
  int          outc[$];
  always @(posedge clk) if (rst_n && out_valid) begin outq.push_back(out_data); outc.push_back(cyc); end

  int accept_cyc;
  task automatic issue(mel_cmd_e c, logic [31:0] a, logic [31:0] b);
    in_valid = 1; in_cmd = c; in_op1 = a; in_op2 = b;
    while (!in_ready) @(negedge clk);
    accept_cyc = cyc;
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic get_out(output logic [31:0] d, output int lat);
    int n = 0;
    while (outq.size() == 0 && n < 200) begin @(negedge clk); n++; end
    if (outq.size() == 0) begin d = 'x; lat = -1; return; end
    d = outq.pop_front(); lat = outc.pop_front() - accept_cyc;
  endtask

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fx_t acc, a, b, q;
    bit nar;
    logic [31:0] pa, pb, p0, d, e;
    int lat, t0, len;
    in_valid = 0; in_cmd = CMD_FMA_P; in_op1 = 0; in_op2 = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // ---- dot products ----
    for (int k = 0; k < 12; k++) begin
      p0 = 32'(rand_posit(32, 2, 20));
      acc = posit_to_fx(64'(p0), 32, 2, nar);
      issue(CMD_FCVT_R_P, p0, 0);
      len = (k == 0) ? 1 : $urandom_range(2, 40);
      t0 = cyc;
      for (int i = 0; i < len; i++) begin
        bit sub;
        pa = 32'(rand_posit(32, 2, 10)); pb = 32'(rand_posit(32, 2, 10));
        sub = (i % 3 == 2);
        a = posit_to_fx(64'(pa), 32, 2, nar); b = posit_to_fx(64'(pb), 32, 2, nar);
        acc = sub ? acc - ((a * b) >>> FXP) : acc + ((a * b) >>> FXP);
        in_valid = 1; in_cmd = sub ? CMD_FMS_P : CMD_FMA_P; in_op1 = pa; in_op2 = pb;
        chk(in_ready, "fused ops stream back to back");
        @(negedge clk);
      end
      in_valid = 0;
      chk(cyc - t0 == len, "one fused op per cycle");
      issue(CMD_FCVT_P_R, 0, 0);
      get_out(d, lat);
      e = 32'(fx_to_posit(acc, 32, 2));
      chk(d == e, $sformatf("dot product %0d len %0d: got %h exp %h", k, len, d, e));
    end
    chk(stall_cycles > 0, "quire read waited for accumulates");
    // ---- divide-accumulate ----
    for (int k = 0; k < 40; k++) begin
      pa = 32'(rand_posit(32, 2, 10)); pb = 32'(rand_posit(32, 2, 10));
      a = posit_to_fx(64'(pa), 32, 2, nar); b = posit_to_fx(64'(pb), 32, 2, nar);
      q = (a <<< FXP) / b;   // truncated at 2^-500
      if (k % 2) q = -q;
      issue(CMD_FCVT_R_P, 0, 0);
      issue((k % 2) ? CMD_FDS_P : CMD_FDA_P, pa, pb);
      issue(CMD_FCVT_P_R, 0, 0);
      get_out(d, lat);
      e = 32'(fx_to_posit(q, 32, 2));
      chk(d == e, $sformatf("divide %h/%h got %h exp %h", pa, pb, d, e));
    end
    // ---- conversions ----
    for (int k = 0; k < 200; k++) begin
      logic [31:0] f;
      f = $urandom; f[30:23] = 8'(127 + int'($urandom_range(0, 60)) - 30);
      issue(CMD_FCVT_P_S, f, 0);
      get_out(d, lat);
      e = 32'(fx_to_posit(float_to_fx(f), 32, 2));
      chk(d == e, $sformatf("fcvt.p.s %h got %h exp %h", f, d, e));
      chk(lat == 4, $sformatf("fcvt.p.s latency %0d", lat));
      pa = 32'(rand_posit(32, 2, 100));
      issue(CMD_FCVT_S_P, pa, 0);
      get_out(d, lat);
      e = fx_to_float(posit_to_fx(64'(pa), 32, 2, nar));
      chk(d == e, $sformatf("fcvt.s.p %h got %h exp %h", pa, d, e));
      chk(lat == 4, $sformatf("fcvt.s.p latency %0d", lat));
    end
    // ---- NaR ----
    issue(CMD_FCVT_R_P, 32'h4000_0000, 0);
    issue(CMD_FMA_P, 32'h8000_0000, 32'h4000_0000);
    issue(CMD_FCVT_P_R, 0, 0);
    get_out(d, lat);
    chk(d == 32'h8000_0000, "NaR accumulate");
    issue(CMD_FCVT_R_P, 0, 0);
    issue(CMD_FCVT_P_R, 0, 0);
    get_out(d, lat);
    chk(d == 32'h0, "zero quire reads zero");
    chk(outq.size() == 0, "no extra outputs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
