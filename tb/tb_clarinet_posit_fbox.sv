// tb_clarinet_posit_fbox - end-to-end test of the posit F-pipe at its
// default configuration (32-bit posits, es = 2, divider, 32 posit registers).
// The testbench stands in for the rest of the pipeline: it keeps GPR and FPR
// arrays, hands each instruction over with its rs1 operands, applies
// write-backs, and models a word memory with a 2-cycle load latency.
// Programs, assembled from the published encodings:
//   1. posit dot product with data in memory: PLW/PLW/FMA.P per element,
//      FCVT.R.P before, FCVT.P.R and PSW after (posit-in-memory style);
//   2. the same with posits moved in from integer registers (PMV.W.X) and
//      the result moved out with PMV.X.W (the style used without compiler
//      support for posit types);
//   3. float data: FCVT.P.S per operand, FMS.P/FDA.P, result back to the
//      FPR with FCVT.S.P (float-posit interop);
// each result checked against the exactly rounded reference. Every
// mechanism is counted and must occur: back-to-back fused ops, quire-read
// stall, PRF bypass, loads, stores, both moves, both conversions, divide.
module tb_clarinet_posit_fbox;
  import posit_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic iss_valid, iss_ready, is_posit, wb_valid, wb_to_fpr;
  logic [31:0] iss_instr, iss_rs1_gpr, iss_rs1_fpr, wb_data;
  logic [4:0] wb_rd;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_rsp_valid;
  logic [31:0] mem_req_addr, mem_req_wdata, mem_rsp_rdata;
  logic [1:0] mem_req_size;
  logic busy, qstall, bypass;

  clarinet_posit_fbox dut (
    .clk(clk), .rst_n(rst_n),
    .iss_valid(iss_valid), .iss_ready(iss_ready), .iss_instr(iss_instr),
    .iss_rs1_gpr(iss_rs1_gpr), .iss_rs1_fpr(iss_rs1_fpr), .iss_is_posit(is_posit),
    .wb_valid(wb_valid), .wb_to_fpr(wb_to_fpr), .wb_rd(wb_rd), .wb_data(wb_data),
    .mem_req_valid(mem_req_valid), .mem_req_ready(mem_req_ready), .mem_req_we(mem_req_we),
    .mem_req_addr(mem_req_addr), .mem_req_size(mem_req_size), .mem_req_wdata(mem_req_wdata),
    .mem_rsp_valid(mem_rsp_valid), .mem_rsp_rdata(mem_rsp_rdata),
    .busy(busy), .quire_stall(qstall), .prf_bypass(bypass));

  // ---------------- pipeline-side models ----------------
  logic [31:0] gpr [32];
  logic [31:0] fpr [32];
  logic [31:0] mem [logic [31:0]];
  int n_stall = 0, n_bypass = 0, n_load = 0, n_store = 0, n_b2b = 0;
  int n_pmvwx = 0, n_pmvxw = 0, n_cvtps = 0, n_cvtsp = 0, n_div = 0;

  always @(posedge clk) if (rst_n) begin
    if (wb_valid) begin
      if (wb_to_fpr) fpr[wb_rd] <= wb_data;
      else if (wb_rd != 0) gpr[wb_rd] <= wb_data;
    end
    if (qstall) n_stall++;
    if (bypass) n_bypass++;
  end

  // memory: always ready, loads answer two cycles later
  logic [31:0] ld_q [$];
  int          ld_t [$];
  assign mem_req_ready = 1'b1;
  always @(posedge clk) begin
    mem_rsp_valid <= 1'b0;
    if (rst_n && mem_req_valid && mem_req_ready) begin
      if (mem_req_we) begin mem[mem_req_addr] = mem_req_wdata; n_store++; end
      else begin ld_q.push_back(mem.exists(mem_req_addr) ? mem[mem_req_addr] : 32'h0); ld_t.push_back(cyc + 2); n_load++; end
    end
    if (ld_t.size() > 0 && ld_t[0] <= cyc) begin
      mem_rsp_valid <= 1'b1;
      mem_rsp_rdata <= ld_q.pop_front();
      void'(ld_t.pop_front());
    end
  end

  // ---------------- instruction encodings ----------------
  localparam logic [6:0] OPFP = 7'b1010011;
  function automatic logic [31:0] R(logic [6:0] f7, logic [4:0] rs2, logic [4:0] rs1, logic [4:0] rd);
    return {f7, rs2, rs1, 3'b000, rd, OPFP};
  endfunction
  function automatic logic [31:0] FCVT_R_P(int rs1); return R(7'b0101010, 5'h10, 5'(rs1), 5'd0); endfunction
  function automatic logic [31:0] FCVT_P_R(int rd);  return R(7'b1101010, 5'h10, 5'd0, 5'(rd)); endfunction
  function automatic logic [31:0] FMA_P(int a, int b); return R(7'b0110010, 5'(b), 5'(a), 5'd0); endfunction
  function automatic logic [31:0] FMS_P(int a, int b); return R(7'b0110110, 5'(b), 5'(a), 5'd0); endfunction
  function automatic logic [31:0] FDA_P(int a, int b); return R(7'b0111010, 5'(b), 5'(a), 5'd0); endfunction
  function automatic logic [31:0] PMV_X_W(int rd, int rs1); return R(7'b1110000, 5'h10, 5'(rs1), 5'(rd)); endfunction
  function automatic logic [31:0] PMV_W_X(int rd, int rs1); return R(7'b1111010, 5'h00, 5'(rs1), 5'(rd)); endfunction
  function automatic logic [31:0] FCVT_P_S(int rd, int rs1); return R(7'b0100110, 5'h00, 5'(rs1), 5'(rd)); endfunction
  function automatic logic [31:0] FCVT_S_P(int rd, int rs1); return R(7'b0100100, 5'h10, 5'(rs1), 5'(rd)); endfunction
  function automatic logic [31:0] PLW(int rd, int rs1, int imm);
    return {12'(imm), 5'(rs1), 3'b110, 5'(rd), 7'b0000111};
  endfunction
  function automatic logic [31:0] PSW(int rs2, int rs1, int imm);
    logic [11:0] i; i = 12'(imm);
    return {i[11:5], 5'(rs2), 5'(rs1), 3'b110, i[4:0], 7'b0100111};
  endfunction

  logic [31:0] last_instr;
  int          last_issue_cyc;
  task automatic exec(logic [31:0] ins);
    iss_valid = 1; iss_instr = ins; #1;
    iss_rs1_gpr = gpr[ins[19:15]]; iss_rs1_fpr = fpr[ins[19:15]];
    while (!iss_ready) begin
      @(negedge clk);
      iss_rs1_gpr = gpr[ins[19:15]]; iss_rs1_fpr = fpr[ins[19:15]];
    end
    checks++;
    if (!is_posit) begin failures++; $display("FAIL not decoded as posit: %h", ins); end
    if (last_issue_cyc == cyc - 1 && ins[31:25] inside {7'b0110010, 7'b0110110, 7'b0111010}
        && last_instr[31:25] inside {7'b0110010, 7'b0110110, 7'b0111010}) n_b2b++;
    last_instr = ins; last_issue_cyc = cyc;
    if (ins[31:25] == 7'b1111010) n_pmvwx++;
    if (ins[31:25] == 7'b1110000) n_pmvxw++;
    if (ins[31:25] == 7'b0100110) n_cvtps++;
    if (ins[31:25] == 7'b0100100) n_cvtsp++;
    if (ins[31:25] == 7'b0111010) n_div++;
    @(negedge clk);
    iss_valid = 0;
  endtask

  task automatic drain();
    int n = 0;
    while ((busy || ld_q.size() > 0) && n < 1000) begin @(negedge clk); n++; end
    @(negedge clk); @(negedge clk);
  endtask

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fx_t acc, a, b;
    bit nar;
    logic [31:0] pa, pb, e;
    int len;
    iss_valid = 0; iss_instr = 0; iss_rs1_gpr = 0; iss_rs1_fpr = 0; last_instr = 0; last_issue_cyc = -10;
    for (int i = 0; i < 32; i++) begin gpr[i] = 0; fpr[i] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---- 1. posit data in memory ----
    for (int k = 0; k < 4; k++) begin
      len = 8 + 8 * k;
      gpr[10] = 32'h1000; gpr[11] = 32'h2000; gpr[12] = 32'h3000;
      acc = '0;
      for (int i = 0; i < len; i++) begin
        pa = 32'(rand_posit(32, 2, 8)); pb = 32'(rand_posit(32, 2, 8));
        mem[32'h1000 + 4 * i] = pa; mem[32'h2000 + 4 * i] = pb;
        a = posit_to_fx(64'(pa), 32, 2, nar); b = posit_to_fx(64'(pb), 32, 2, nar);
        acc = acc + ((a * b) >>> FXP);
      end
      exec(FCVT_R_P(0));                      // p0 is zero: clear the quire
      // load in blocks of four pairs, then four back-to-back FMA.P
      for (int i = 0; i < len; i += 4) begin
        for (int j = 0; j < 4; j++) begin
          exec(PLW(1 + j, 10, 4 * (i + j)));
          exec(PLW(5 + j, 11, 4 * (i + j)));
        end
        for (int j = 0; j < 4; j++) exec(FMA_P(1 + j, 5 + j));
      end
      exec(FCVT_P_R(9));
      exec(PSW(9, 12, 4 * k));                // reads p9 as it arrives: bypass
      drain();
      e = 32'(fx_to_posit(acc, 32, 2));
      chk(mem[32'h3000 + 4 * k] == e, $sformatf("memory dot product %0d: got %h exp %h", k, mem[32'h3000 + 4 * k], e));
    end

    // ---- 2. posits through integer registers ----
    for (int k = 0; k < 4; k++) begin
      len = 5 + 3 * k;
      acc = '0;
      exec(FCVT_R_P(0));
      for (int i = 0; i < len; i++) begin
        pa = 32'(rand_posit(32, 2, 8)); pb = 32'(rand_posit(32, 2, 8));
        a = posit_to_fx(64'(pa), 32, 2, nar); b = posit_to_fx(64'(pb), 32, 2, nar);
        acc = acc + ((a * b) >>> FXP);
        gpr[5] = pa; gpr[6] = pb;
        exec(PMV_W_X(1, 5));
        exec(PMV_W_X(2, 6));
        exec(FMA_P(1, 2));
      end
      exec(FCVT_P_R(3));
      exec(PMV_X_W(7, 3));
      drain();
      e = 32'(fx_to_posit(acc, 32, 2));
      chk(gpr[7] == e, $sformatf("register dot product %0d: got %h exp %h", k, gpr[7], e));
    end

    // ---- 3. float data, posit compute ----
    for (int k = 0; k < 4; k++) begin
      logic [31:0] fa, fb, qa, qb;
      fx_t va, vb;
      acc = '0;
      exec(FCVT_R_P(0));
      for (int i = 0; i < 6; i++) begin
        fa = $urandom; fa[30:23] = 8'(127 + int'($urandom_range(0, 16)) - 8);
        fb = $urandom; fb[30:23] = 8'(127 + int'($urandom_range(0, 16)) - 8);
        fpr[1] = fa; fpr[2] = fb;
        exec(FCVT_P_S(1, 1));
        exec(FCVT_P_S(2, 2));
        qa = 32'(fx_to_posit(float_to_fx(fa), 32, 2));
        qb = 32'(fx_to_posit(float_to_fx(fb), 32, 2));
        va = posit_to_fx(64'(qa), 32, 2, nar); vb = posit_to_fx(64'(qb), 32, 2, nar);
        if (i == 5) begin
          exec(FDA_P(1, 2));
          acc = acc + (va <<< FXP) / vb;
        end else if (i % 2) begin
          exec(FMS_P(1, 2));
          acc = acc - ((va * vb) >>> FXP);
        end else begin
          exec(FMA_P(1, 2));
          acc = acc + ((va * vb) >>> FXP);
        end
      end
      exec(FCVT_P_R(3));
      exec(FCVT_S_P(4, 3));
      drain();
      e = fx_to_float(posit_to_fx(fx_to_posit(acc, 32, 2), 32, 2, nar));
      chk(fpr[4] == e, $sformatf("float interop %0d: got %h exp %h", k, fpr[4], e));
    end

    chk(n_b2b > 0,    $sformatf("back-to-back fused ops seen %0d", n_b2b));
    chk(n_stall > 0,  $sformatf("quire-read stalls seen %0d", n_stall));
    chk(n_bypass > 0, $sformatf("PRF bypasses seen %0d", n_bypass));
    chk(n_load > 0 && n_store > 0, "loads and stores seen");
    chk(n_pmvwx > 0 && n_pmvxw > 0, "both moves seen");
    chk(n_cvtps > 0 && n_cvtsp > 0, "both float conversions seen");
    chk(n_div > 0, "divide-accumulate seen");
    $display("events: b2b=%0d stall=%0d bypass=%0d load=%0d store=%0d pmv.w.x=%0d pmv.x.w=%0d fcvt.p.s=%0d fcvt.s.p=%0d fda=%0d",
             n_b2b, n_stall, n_bypass, n_load, n_store, n_pmvwx, n_pmvxw, n_cvtps, n_cvtsp, n_div);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
