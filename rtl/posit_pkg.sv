// posit_pkg - shared types, encodings and width helpers of the posit extension.
//
// Holds what the posit datapath modules and the instruction front end share:
//   * the Melodica command set (one command per new compute/convert instruction),
//   * the decoded instruction kinds of the twelve new RISC-V instructions,
//   * the opcode, funct7, rs2 and funct3 values of those instructions, taken
//     bit for bit from the published encoding table,
//   * functions that derive field widths from the posit parameters N and ES:
//     fraction width, scale width, quire width (N*N/2), quire fraction bits
//     (N*N/4 - N/2) and the number of 32-bit quire segments.
// Nothing here is clocked. The numeric encoding of the command enum is this
// design's own choice; the instruction bit patterns follow the paper.
package posit_pkg;

  // Segment width of the quire's pipelined adder (paper: fixed at 32).
  localparam int unsigned QSEG_W = 32;
  // IEEE-754 binary32 layout used by the float converters (float-width 32).
  localparam int unsigned FLT_W  = 32;
  localparam int unsigned FLT_EW = 8;
  localparam int unsigned FLT_MW = 23;
  localparam int signed   FLT_BIAS = 127;

  // Melodica commands (Table "Mapping Clarinet instructions to Melodica commands").
  typedef enum logic [2:0] {
    CMD_FMA_P    = 3'd0,
    CMD_FMS_P    = 3'd1,
    CMD_FDA_P    = 3'd2,
    CMD_FDS_P    = 3'd3,
    CMD_FCVT_R_P = 3'd4,
    CMD_FCVT_P_R = 3'd5,
    CMD_FCVT_P_S = 3'd6,
    CMD_FCVT_S_P = 3'd7
  } mel_cmd_e;

  // Decoded posit instruction kinds.
  typedef enum logic [3:0] {
    PI_NONE     = 4'd0,
    PI_FCVT_R_P = 4'd1,
    PI_FCVT_P_R = 4'd2,
    PI_FMA_P    = 4'd3,
    PI_FMS_P    = 4'd4,
    PI_FDA_P    = 4'd5,
    PI_FDS_P    = 4'd6,
    PI_PLW      = 4'd7,
    PI_PSW      = 4'd8,
    PI_PMV_X_W  = 4'd9,
    PI_PMV_W_X  = 4'd10,
    PI_FCVT_P_S = 4'd11,
    PI_FCVT_S_P = 4'd12
  } pinstr_e;

  typedef struct packed {
    logic    valid;    // instruction is one of the new posit instructions
    pinstr_e kind;
    logic [4:0]  rs1;
    logic [4:0]  rs2;
    logic [4:0]  rd;
    logic [31:0] imm;  // sign-extended I- or S-format immediate (PLW/PSW)
  } pinstr_t;

  // Major opcodes (bits 6:0).
  localparam logic [6:0] OPC_OP_FP   = 7'b1010011;
  localparam logic [6:0] OPC_LOAD_FP = 7'b0000111;
  localparam logic [6:0] OPC_STORE_FP= 7'b0100111;
  // funct7 (bits 31:25) of the R-format posit instructions.
  localparam logic [6:0] F7_FCVT_R_P = 7'b0101010;
  localparam logic [6:0] F7_FCVT_P_R = 7'b1101010;
  localparam logic [6:0] F7_FMA_P    = 7'b0110010;
  localparam logic [6:0] F7_FMS_P    = 7'b0110110;
  localparam logic [6:0] F7_FDA_P    = 7'b0111010;
  localparam logic [6:0] F7_FDS_P    = 7'b0111110;
  localparam logic [6:0] F7_PMV_X_W  = 7'b1110000;
  localparam logic [6:0] F7_PMV_W_X  = 7'b1111010;
  localparam logic [6:0] F7_FCVT_P_S = 7'b0100110;
  localparam logic [6:0] F7_FCVT_S_P = 7'b0100100;
  // rs2 type codes: posit 0x10, quire 0x11, single float / integer 0x00.
  localparam logic [4:0] RS2_POSIT   = 5'h10;
  localparam logic [4:0] RS2_QUIRE   = 5'h11;
  localparam logic [4:0] RS2_ZERO    = 5'h00;
  // Rm / funct3 code marking a posit load or store.
  localparam logic [2:0] RM_POSIT_LS = 3'b110;

  // Width helpers.
  function automatic int unsigned frac_w(int unsigned n, int unsigned es);
    // Widest fraction field of an (n, es) posit: sign, 2 regime bits, es bits.
    return (n > es + 3) ? n - es - 3 : 1;
  endfunction

  function automatic int unsigned quire_w(int unsigned n);
    return n * n / 2;
  endfunction

  function automatic int unsigned quire_frac(int unsigned n);
    return n * n / 4 - n / 2;
  endfunction

  function automatic int unsigned quire_segs(int unsigned n);
    return (quire_w(n) + QSEG_W - 1) / QSEG_W;
  endfunction

  // Signed scale width: enough for quire scales and binary32 scales.
  function automatic int unsigned scale_w(int unsigned n);
    int unsigned w;
    w = $clog2(n * n) + 2;
    return (w < 10) ? 10 : w;
  endfunction

endpackage
