// posit_decoder - recognises the new posit instructions of the core.
//
// Twelve instructions are added, all reusing existing major opcodes:
//   OP-FP (1010011), R-format, funct7 selects the operation:
//     FCVT.R.P 0101010  rs2=10000  rd=00000   init quire from posit rs1
//     FCVT.P.R 1101010  rs2=10000  rs1=00000  read quire into posit rd
//     FMA.P    0110010  FMS.P 0110110  FDA.P 0111010  FDS.P 0111110 (rd=00000)
//     PMV.X.W  1110000  rs2=10000  funct3=000 PRF -> GPR move
//     PMV.W.X  1111010  rs2=00000  funct3=000 GPR -> PRF move
//     FCVT.P.S 0100110  rs2=00000  float -> posit
//     FCVT.S.P 0100100  rs2=10000  posit -> float
//   LOAD-FP (0000111) with funct3 (Rm) = 110: PLW, I-format.
//   STORE-FP (0100111) with funct3 (Rm) = 110: PSW, S-format.
// Bits 26:25 of funct7 are the fmt field (10 = posit). The quire-read
// instruction is also accepted with rs2 = 10001, the quire type code the
// text gives. Fields the table prints as fixed zeros (rd of the compute and
// quire-init instructions, rs1 of the quire read) are not checked, so any
// value there decodes the same; rm is ignored, posits having one rounding mode.
//
// Interface: instr[32] in, a pinstr_t out (valid, kind, rs1, rs2, rd,
// sign-extended imm). Combinational. The bit patterns are the paper's.
module posit_decoder
  import posit_pkg::*;
(
  input  logic [31:0] instr,
  output pinstr_t     dec
);

  logic [6:0] opc, f7;
  logic [4:0] rs2;
  logic [2:0] f3;

  always_comb begin
    opc = instr[6:0];
    f7  = instr[31:25];
    rs2 = instr[24:20];
    f3  = instr[14:12];
    dec.kind = PI_NONE;
    dec.rs1  = instr[19:15];
    dec.rs2  = rs2;
    dec.rd   = instr[11:7];
    dec.imm  = '0;
    unique case (opc)
      OPC_OP_FP: begin
        unique case (f7)
          F7_FCVT_R_P: if (rs2 == RS2_POSIT) dec.kind = PI_FCVT_R_P;
          F7_FCVT_P_R: if (rs2 == RS2_POSIT || rs2 == RS2_QUIRE) dec.kind = PI_FCVT_P_R;
          F7_FMA_P:    dec.kind = PI_FMA_P;
          F7_FMS_P:    dec.kind = PI_FMS_P;
          F7_FDA_P:    dec.kind = PI_FDA_P;
          F7_FDS_P:    dec.kind = PI_FDS_P;
          F7_PMV_X_W:  if (rs2 == RS2_POSIT && f3 == 3'b000) dec.kind = PI_PMV_X_W;
          F7_PMV_W_X:  if (rs2 == RS2_ZERO  && f3 == 3'b000) dec.kind = PI_PMV_W_X;
          F7_FCVT_P_S: if (rs2 == RS2_ZERO)  dec.kind = PI_FCVT_P_S;
          F7_FCVT_S_P: if (rs2 == RS2_POSIT) dec.kind = PI_FCVT_S_P;
          default:     dec.kind = PI_NONE;
        endcase
      end
      OPC_LOAD_FP: if (f3 == RM_POSIT_LS) begin
        dec.kind = PI_PLW;
        dec.imm  = {{20{instr[31]}}, instr[31:20]};
      end
      OPC_STORE_FP: if (f3 == RM_POSIT_LS) begin
        dec.kind = PI_PSW;
        dec.imm  = {{20{instr[31]}}, instr[31:25], instr[11:7]};
      end
      default: dec.kind = PI_NONE;
    endcase
    dec.valid = (dec.kind != PI_NONE);
  end

endmodule
