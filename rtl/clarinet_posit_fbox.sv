// clarinet_posit_fbox - posit half of the core's floating-point box.
//
// The core runs posit arithmetic beside IEEE floating point: a posit register
// file (PRF) holds posit values, a quire accumulator inside the Melodica unit
// holds long sums without rounding, and twelve new instructions move data
// between these and the integer (GPR) and float (FPR) registers and memory.
// This module is the part of the F-pipe that serves those instructions. The
// rest of the in-order pipeline, its GPR/FPR/CSR files, the FPU and the
// caches sit outside and connect through the ports:
//   iss_*  the instruction at the execute stage, with the GPR and FPR values
//          of its rs1 already read (and forwarded) by the pipeline;
//          iss_is_posit tells the pipeline whether to route it here or to the FPU;
//   wb_*   results bound for the GPR (PMV.X.W) or the FPR (FCVT.S.P);
//   mem_*  posit loads (PLW) and stores (PSW); the address is rs1 + imm.
//
// Per instruction:
//   FCVT.R.P, FMA.P, FMS.P, FDA.P, FDS.P  issue to Melodica and complete when
//       accepted (they only change the quire), so they stream back to back.
//   FCVT.P.R, FCVT.P.S  issue to Melodica, wait for its result, write the PRF.
//   FCVT.S.P            issue to Melodica, wait, send the float to the FPR.
//   PLW                 memory read, wait, write the PRF.
//   PSW                 memory write of a PRF value, completes when accepted.
//   PMV.W.X             GPR value (low N bits) into the PRF, single cycle.
//   PMV.X.W             PRF value, zero-extended, to the GPR, single cycle.
// While waiting for a result the unit is not ready, except in the cycle the
// result arrives: it then accepts the next instruction at once and that
// instruction reads the arriving value through the PRF bypass (pbypass).
// In that cycle PMV.W.X and PMV.X.W are held off, as the PRF write port or
// the write-back port is taken by the result.
//
// Timing: iss_valid && iss_ready is the issue handshake; wb_valid is a
// one-cycle pulse, registered, one cycle after the result is known; memory
// requests use valid/ready and load data returns on mem_rsp_valid.
//
// The instruction set, the PRF, the quire-as-accumulator integration and the
// immediate completion of quire updates follow the paper. The port-level
// split from the rest of the pipeline, the one-outstanding-result rule and
// the memory request format are this design's choices. N must be at most 32.
module clarinet_posit_fbox
  import posit_pkg::*;
#(
  parameter int unsigned N      = 32,
  parameter int unsigned ES     = 2,
  parameter bit          DIV_EN = 1'b1,
  parameter int unsigned NREGS  = 32
) (
  input  logic        clk,
  input  logic        rst_n,
  // issue from the pipeline
  input  logic        iss_valid,
  output logic        iss_ready,
  input  logic [31:0] iss_instr,
  input  logic [31:0] iss_rs1_gpr,
  input  logic [31:0] iss_rs1_fpr,
  output logic        iss_is_posit,
  // write-back to GPR / FPR
  output logic        wb_valid,
  output logic        wb_to_fpr,
  output logic [4:0]  wb_rd,
  output logic [31:0] wb_data,
  // posit loads and stores
  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output logic        mem_req_we,
  output logic [31:0] mem_req_addr,
  output logic [1:0]  mem_req_size,   // log2 of bytes: 0 byte, 1 half, 2 word
  output logic [31:0] mem_req_wdata,
  input  logic        mem_rsp_valid,
  input  logic [31:0] mem_rsp_rdata,
  // status / events
  output logic        busy,
  output logic        quire_stall,
  output logic        prf_bypass
);

  typedef enum logic [1:0] {S_IDLE, S_WAIT_MEL, S_WAIT_MEM} state_e;

  state_e  state_q;
  pinstr_t dec;
  logic    pend_fpr_q;
  logic [4:0] pend_rd_q;

  posit_decoder u_dec (.instr(iss_instr), .dec(dec));
  assign iss_is_posit = dec.valid;

  // ---------------- PRF ----------------
  logic [N-1:0] prf_rd1, prf_rd2, prf_wd;
  logic         prf_we, byp1, byp2;
  logic [4:0]   prf_wa;

  posit_regfile #(.N(N), .NREGS(NREGS)) u_prf (
    .clk(clk), .rst_n(rst_n),
    .rs1(dec.rs1[$clog2(NREGS)-1:0]), .rs2(dec.rs2[$clog2(NREGS)-1:0]),
    .rd1(prf_rd1), .rd2(prf_rd2), .bypass1(byp1), .bypass2(byp2),
    .we(prf_we), .wa(prf_wa[$clog2(NREGS)-1:0]), .wd(prf_wd));

  // ---------------- Melodica ----------------
  logic             mel_in_valid, mel_in_ready, mel_out_valid;
  mel_cmd_e         mel_cmd;
  logic [FLT_W-1:0] mel_op1, mel_out_data;
  logic             mel_busy;

  melodica #(.N(N), .ES(ES), .DIV_EN(DIV_EN)) u_mel (
    .clk(clk), .rst_n(rst_n),
    .in_valid(mel_in_valid), .in_ready(mel_in_ready), .in_cmd(mel_cmd),
    .in_op1(mel_op1), .in_op2(prf_rd2),
    .out_valid(mel_out_valid), .out_data(mel_out_data),
    .busy(mel_busy), .quire_stall(quire_stall), .quire_value());

  // ---------------- issue control ----------------
  logic rsp_now;     // a pending result arrives this cycle
  logic can_issue;   // the unit may take an instruction this cycle
  logic is_mel, mel_has_out, is_move;
  logic go;          // instruction issues this cycle

  always_comb begin
    unique case (dec.kind)
      PI_FMA_P:    mel_cmd = CMD_FMA_P;
      PI_FMS_P:    mel_cmd = CMD_FMS_P;
      PI_FDA_P:    mel_cmd = CMD_FDA_P;
      PI_FDS_P:    mel_cmd = CMD_FDS_P;
      PI_FCVT_R_P: mel_cmd = CMD_FCVT_R_P;
      PI_FCVT_P_R: mel_cmd = CMD_FCVT_P_R;
      PI_FCVT_P_S: mel_cmd = CMD_FCVT_P_S;
      default:     mel_cmd = CMD_FCVT_S_P;
    endcase
    is_mel = dec.kind inside {PI_FMA_P, PI_FMS_P, PI_FDA_P, PI_FDS_P, PI_FCVT_R_P,
                              PI_FCVT_P_R, PI_FCVT_P_S, PI_FCVT_S_P};
    mel_has_out = dec.kind inside {PI_FCVT_P_R, PI_FCVT_P_S, PI_FCVT_S_P};
    is_move = dec.kind inside {PI_PMV_W_X, PI_PMV_X_W};
    mel_op1 = (dec.kind == PI_FCVT_P_S) ? iss_rs1_fpr : FLT_W'(prf_rd1);

    rsp_now = ((state_q == S_WAIT_MEL) && mel_out_valid) ||
              ((state_q == S_WAIT_MEM) && mem_rsp_valid);
    can_issue = (state_q == S_IDLE) || (rsp_now && !is_move);

    iss_ready = 1'b0;
    if (can_issue && dec.valid) begin
      if (is_mel)                                   iss_ready = mel_in_ready;
      else if (dec.kind inside {PI_PLW, PI_PSW})    iss_ready = mem_req_ready;
      else                                          iss_ready = 1'b1;
    end
    go = iss_valid && iss_ready;

    mel_in_valid  = iss_valid && can_issue && is_mel;
    mem_req_valid = iss_valid && can_issue && (dec.kind inside {PI_PLW, PI_PSW});
    mem_req_we    = (dec.kind == PI_PSW);
    mem_req_addr  = iss_rs1_gpr + dec.imm;
    mem_req_wdata = 32'(prf_rd2);
    mem_req_size  = (N <= 8) ? 2'd0 : (N <= 16) ? 2'd1 : 2'd2;

    // PRF write: arriving result, or a GPR-to-PRF move.
    prf_we = 1'b0;
    prf_wa = pend_rd_q;
    prf_wd = '0;
    if (state_q == S_WAIT_MEL && mel_out_valid && !pend_fpr_q) begin
      prf_we = 1'b1;
      prf_wd = mel_out_data[N-1:0];
    end else if (state_q == S_WAIT_MEM && mem_rsp_valid) begin
      prf_we = 1'b1;
      prf_wd = mem_rsp_rdata[N-1:0];
    end else if (go && dec.kind == PI_PMV_W_X) begin
      prf_we = 1'b1;
      prf_wa = dec.rd;
      prf_wd = iss_rs1_gpr[N-1:0];
    end
  end

  assign prf_bypass = go && ((byp1 && dec.kind inside {PI_FCVT_R_P, PI_FMA_P, PI_FMS_P,
                               PI_FDA_P, PI_FDS_P, PI_FCVT_S_P, PI_PMV_X_W}) ||
                             (byp2 && dec.kind inside {PI_FMA_P, PI_FMS_P, PI_FDA_P,
                               PI_FDS_P, PI_PSW}));
  assign busy = (state_q != S_IDLE) || mel_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      pend_fpr_q <= 1'b0;
      pend_rd_q  <= '0;
      wb_valid   <= 1'b0;
      wb_to_fpr  <= 1'b0;
      wb_rd      <= '0;
      wb_data    <= '0;
    end else begin
      wb_valid <= 1'b0;
      if (state_q == S_WAIT_MEL && mel_out_valid && pend_fpr_q) begin
        wb_valid  <= 1'b1;
        wb_to_fpr <= 1'b1;
        wb_rd     <= pend_rd_q;
        wb_data   <= mel_out_data;
      end
      if (rsp_now) state_q <= S_IDLE;
      if (go) begin
        unique case (dec.kind)
          PI_FCVT_P_R, PI_FCVT_P_S, PI_FCVT_S_P: begin
            state_q    <= S_WAIT_MEL;
            pend_rd_q  <= dec.rd;
            pend_fpr_q <= (dec.kind == PI_FCVT_S_P);
          end
          PI_PLW: begin
            state_q    <= S_WAIT_MEM;
            pend_rd_q  <= dec.rd;
            pend_fpr_q <= 1'b0;
          end
          PI_PMV_X_W: begin
            wb_valid  <= 1'b1;
            wb_to_fpr <= 1'b0;
            wb_rd     <= dec.rd;
            wb_data   <= 32'(prf_rd1);
          end
          default: ;
        endcase
      end
    end
  end

  // The pipeline only routes posit instructions here.
  assert property (@(posedge clk) disable iff (!rst_n) iss_valid |-> iss_is_posit);

endmodule
