// tb_posit_kernels - the evaluated kernels, as quire access patterns, run
// on the posit F-pipe at its default configuration (32-bit posits, es = 2).
//
// The kernels differ in how many fused multiply-adds fall between one quire
// initialisation and the following read:
//   xDot   length 4096: one init/read around 4096 accumulations;
//   xGEMV  64 x 64:     64 dot products of length 64;
//   xGEMM  16 x 16:     256 dot products of length 16;
//   xGivens (8):        64 single accumulations, each read at once;
//   Lucas-Kanade, 5x5 window: per pixel two dot products of length 25 and
//   one of length 2.
// Each dot product is run in the posits-in-integer-registers style: both
// operands are moved into the posit registers with PMV.W.X, multiplied into
// the quire with FMA.P, and the rounded result is read with FCVT.P.R and
// moved back with PMV.X.W. Every result is compared with the exactly rounded
// value of the exact sum. Operand values are random posits between 2^-8 and
// 2^8 of either sign.
//
// Timing: the quire-updating instructions must not wait for one another, so
// a dot product of length L must take at most 3L issue cycles plus a fixed
// overhead (the adder drain, the quire read and the normalizer); this is
// checked per kernel, and the cycles are printed.
module tb_posit_kernels;
  import posit_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic iss_valid, iss_ready, is_posit, wb_valid, wb_to_fpr;
  logic [31:0] iss_instr, iss_rs1_gpr, iss_rs1_fpr, wb_data;
  logic [4:0] wb_rd;
  logic mem_req_valid, mem_req_we, mem_req_ready, mem_rsp_valid;
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

  // No loads or stores in these programs.
  assign mem_req_ready = 1'b1;
  assign mem_rsp_valid = 1'b0;
  assign mem_rsp_rdata = '0;

  logic [31:0] gpr [32];
  always @(posedge clk) if (rst_n && wb_valid && !wb_to_fpr && wb_rd != 0) gpr[wb_rd] <= wb_data;

  localparam logic [6:0] OPFP = 7'b1010011;
  function automatic logic [31:0] R(logic [6:0] f7, logic [4:0] rs2, logic [4:0] rs1, logic [4:0] rd);
    return {f7, rs2, rs1, 3'b000, rd, OPFP};
  endfunction
  function automatic logic [31:0] FCVT_R_P(int rs1); return R(7'b0101010, 5'h10, 5'(rs1), 5'd0); endfunction
  function automatic logic [31:0] FCVT_P_R(int rd);  return R(7'b1101010, 5'h10, 5'd0, 5'(rd)); endfunction
  function automatic logic [31:0] FMA_P(int a, int b); return R(7'b0110010, 5'(b), 5'(a), 5'd0); endfunction
  function automatic logic [31:0] PMV_X_W(int rd, int rs1); return R(7'b1110000, 5'h10, 5'(rs1), 5'(rd)); endfunction
  function automatic logic [31:0] PMV_W_X(int rd, int rs1); return R(7'b1111010, 5'h00, 5'(rs1), 5'(rd)); endfunction

  task automatic exec(logic [31:0] ins);
    iss_valid = 1; iss_instr = ins; #1;
    iss_rs1_gpr = gpr[ins[19:15]];
    while (!iss_ready) begin
      @(negedge clk);
      iss_rs1_gpr = gpr[ins[19:15]];
    end
    @(negedge clk);
    iss_valid = 0;
  endtask

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // One dot product of length len; returns the cycles from the quire init to
  // the result in the integer register file.
  task automatic dot(int len, string name, int idx, output int cycles);
    fx_t acc, a, b;
    bit nar;
    logic [31:0] pa, pb, e;
    int t0;
    acc = '0;
    t0 = cyc;
    exec(FCVT_R_P(0));                       // p0 holds zero
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
    @(negedge clk);
    cycles = cyc - t0;
    e = 32'(fx_to_posit(acc, 32, 2));
    chk(gpr[7] == e, $sformatf("%s #%0d (length %0d): got %h expected %h", name, idx, len, gpr[7], e));
  endtask

  // Fixed cost of one init/read pair beyond three issue slots per element:
  // the two extra instructions, the last accumulate's trip through the
  // 16 adder segments, the quire read and the normaliser.
  localparam int OVERHEAD = 40;

  task automatic kernel(string name, int reads, int len);
    int c, total, worst;
    total = 0; worst = 0;
    for (int r = 0; r < reads; r++) begin
      dot(len, name, r, c);
      total += c;
      if (c > worst) worst = c;
    end
    chk(worst <= 3 * len + OVERHEAD,
        $sformatf("%s: %0d cycles for one dot product of length %0d, limit %0d", name, worst, len, 3 * len + OVERHEAD));
    $display("%-12s %4d quire reads x %4d accumulations: %7d cycles", name, reads, len, total);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    iss_valid = 0; iss_instr = 0; iss_rs1_gpr = 0; iss_rs1_fpr = 0;
    for (int i = 0; i < 32; i++) gpr[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    kernel("xDot",         1, 4096);
    kernel("xGEMV",       64,   64);
    kernel("xGEMM",      256,   16);
    kernel("xGivens",     64,    1);
    kernel("LK 5x5",       2,   25);
    kernel("LK 2-vector",  1,    2);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
