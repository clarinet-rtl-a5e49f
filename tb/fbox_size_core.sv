// fbox_size_core - end-to-end stimulus and checker for the posit F-pipe built
// at one posit configuration (N, ES), instantiated by tb_fbox_sizes for the
// smaller configurations. It stands in for the rest of the core with a GPR
// and an FPR array and no memory, and runs, after start:
//   * dot products of random posits moved in with PMV.W.X, accumulated with
//     a random mix of FMA.P and FMS.P, read with FCVT.P.R and moved out with
//     PMV.X.W (low N bits compared with the exactly rounded sum);
//   * FCVT.P.S of random floats and FCVT.S.P of the posit results, against
//     value-based rounding.
// Operand magnitudes are kept small enough that every sum keeps at least one
// fraction bit. done rises when finished; checks and failures count.
module fbox_size_core #(
  parameter int unsigned N  = 16,
  parameter int unsigned ES = 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic done,
  output int   checks,
  output int   failures
);
  import posit_ref_pkg::*;

  logic iss_valid, iss_ready, is_posit, wb_valid, wb_to_fpr;
  logic [31:0] iss_instr, iss_rs1_gpr, iss_rs1_fpr, wb_data;
  logic [4:0] wb_rd;
  logic mem_req_valid, mem_req_we, mem_req_ready, mem_rsp_valid;
  logic [31:0] mem_req_addr, mem_req_wdata, mem_rsp_rdata;
  logic [1:0] mem_req_size;
  logic busy, qstall, bypass;

  clarinet_posit_fbox #(.N(N), .ES(ES)) dut (
    .clk(clk), .rst_n(rst_n),
    .iss_valid(iss_valid), .iss_ready(iss_ready), .iss_instr(iss_instr),
    .iss_rs1_gpr(iss_rs1_gpr), .iss_rs1_fpr(iss_rs1_fpr), .iss_is_posit(is_posit),
    .wb_valid(wb_valid), .wb_to_fpr(wb_to_fpr), .wb_rd(wb_rd), .wb_data(wb_data),
    .mem_req_valid(mem_req_valid), .mem_req_ready(mem_req_ready), .mem_req_we(mem_req_we),
    .mem_req_addr(mem_req_addr), .mem_req_size(mem_req_size), .mem_req_wdata(mem_req_wdata),
    .mem_rsp_valid(mem_rsp_valid), .mem_rsp_rdata(mem_rsp_rdata),
    .busy(busy), .quire_stall(qstall), .prf_bypass(bypass));

  assign mem_req_ready = 1'b1;
  assign mem_rsp_valid = 1'b0;
  assign mem_rsp_rdata = '0;

  logic [31:0] gpr [32];
  logic [31:0] fpr [32];
  always @(posedge clk) if (rst_n && wb_valid) begin
    if (wb_to_fpr) fpr[wb_rd] <= wb_data;
    else if (wb_rd != 0) gpr[wb_rd] <= wb_data;
  end

  localparam logic [6:0] OPFP = 7'b1010011;
  function automatic logic [31:0] R(logic [6:0] f7, logic [4:0] rs2, logic [4:0] rs1, logic [4:0] rd);
    return {f7, rs2, rs1, 3'b000, rd, OPFP};
  endfunction
  function automatic logic [31:0] FCVT_R_P(int rs1); return R(7'b0101010, 5'h10, 5'(rs1), 5'd0); endfunction
  function automatic logic [31:0] FCVT_P_R(int rd);  return R(7'b1101010, 5'h10, 5'd0, 5'(rd)); endfunction
  function automatic logic [31:0] FMA_P(int a, int b); return R(7'b0110010, 5'(b), 5'(a), 5'd0); endfunction
  function automatic logic [31:0] FMS_P(int a, int b); return R(7'b0110110, 5'(b), 5'(a), 5'd0); endfunction
  function automatic logic [31:0] PMV_X_W(int rd, int rs1); return R(7'b1110000, 5'h10, 5'(rs1), 5'(rd)); endfunction
  function automatic logic [31:0] PMV_W_X(int rd, int rs1); return R(7'b1111010, 5'h00, 5'(rs1), 5'(rd)); endfunction
  function automatic logic [31:0] FCVT_P_S(int rd, int rs1); return R(7'b0100110, 5'h00, 5'(rs1), 5'(rd)); endfunction
  function automatic logic [31:0] FCVT_S_P(int rd, int rs1); return R(7'b0100100, 5'h10, 5'(rs1), 5'(rd)); endfunction

  task automatic exec(logic [31:0] ins);
    iss_valid = 1; iss_instr = ins; #1;
    iss_rs1_gpr = gpr[ins[19:15]]; iss_rs1_fpr = fpr[ins[19:15]];
    while (!iss_ready) begin
      @(negedge clk);
      iss_rs1_gpr = gpr[ins[19:15]]; iss_rs1_fpr = fpr[ins[19:15]];
    end
    @(negedge clk);
    iss_valid = 0;
  endtask

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL (N=%0d ES=%0d) %s", N, ES, what); end
  endtask

  // Operand range: products of two operands and short sums of them stay well
  // inside the range where fraction bits survive.
  localparam int LIM = (N <= 8) ? 1 : 4;
  localparam logic [31:0] MASK = (N == 32) ? 32'hFFFF_FFFF : ((32'd1 << N) - 1);

  initial begin
    fx_t acc, a, b;
    bit nar, neg;
    logic [31:0] pa, pb, e, f, ef;
    int len;
    checks = 0; failures = 0; done = 0;
    iss_valid = 0; iss_instr = 0; iss_rs1_gpr = 0; iss_rs1_fpr = 0;
    for (int i = 0; i < 32; i++) begin gpr[i] = 0; fpr[i] = 0; end
    wait (start);
    @(negedge clk);

    for (int k = 0; k < 24; k++) begin
      len = 1 + (k % 8);
      acc = '0;
      exec(FCVT_R_P(0));                     // p0 holds zero
      for (int i = 0; i < len; i++) begin
        pa = 32'(rand_posit(N, ES, LIM)); pb = 32'(rand_posit(N, ES, LIM));
        a = posit_to_fx(64'(pa), N, ES, nar); b = posit_to_fx(64'(pb), N, ES, nar);
        neg = $urandom_range(0, 2) == 0;
        acc = neg ? acc - ((a * b) >>> FXP) : acc + ((a * b) >>> FXP);
        gpr[5] = pa; gpr[6] = pb;
        exec(PMV_W_X(1, 5));
        exec(PMV_W_X(2, 6));
        exec(neg ? FMS_P(1, 2) : FMA_P(1, 2));
      end
      exec(FCVT_P_R(3));
      exec(PMV_X_W(7, 3));
      exec(FCVT_S_P(4, 3));                  // the result as a float too
      repeat (8) @(negedge clk);
      e = 32'(fx_to_posit(acc, N, ES));
      chk(gpr[7] == e, $sformatf("dot product %0d (length %0d): got %h expected %h", k, len, gpr[7], e));
      ef = fx_to_float(posit_to_fx(64'(e), N, ES, nar));
      chk(fpr[4] == ef, $sformatf("FCVT.S.P of %h: got %h expected %h", e, fpr[4], ef));
    end

    for (int k = 0; k < 24; k++) begin
      // random float between 2^-LIM and 2^LIM
      f = {1'($urandom), 8'(127 - LIM + $urandom_range(0, 2 * LIM - 1)), 23'($urandom)};
      fpr[8] = f;
      exec(FCVT_P_S(9, 8));
      repeat (8) @(negedge clk);
      exec(PMV_X_W(10, 9));
      repeat (2) @(negedge clk);
      e = 32'(fx_to_posit(float_to_fx(f), N, ES));
      chk((gpr[10] & MASK) == e, $sformatf("FCVT.P.S of %h: got %h expected %h", f, gpr[10], e));
    end
    done = 1;
  end
endmodule
