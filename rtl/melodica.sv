// melodica - posit arithmetic unit with a quire accumulator.
//
// Executes one command per cycle from the CPU pipeline in four stages:
//   stage 1, extraction:    ext1/ext2 decode the posit operands; FtoP unpacks
//                           a float operand (FCVT.P.S).
//   stage 2, computation:   multiply (FMA/FMS) or divide (FDA/FDS) into a
//                           quire-aligned addend; align ext1's value for a
//                           quire init (FCVT.R.P); PtoF packs a float (FCVT.S.P).
//   stage 3, quire:         accumulate, init, or read request/response.
//   stage 4, normalization: norm rounds the quire read-out or the FtoP result
//                           to a posit; the PtoF result is multiplexed in
//                           directly.
// Commands that only change the quire (FMA_P, FMS_P, FDA_P, FDS_P, FCVT_R_P)
// produce no output: the CPU may go on as soon as they are accepted, and
// several queue up in the pipeline. The quire's own accumulate pipeline
// (NSEG cycles deep) keeps taking one accumulate per cycle. A quire init or
// read held in stage 3 waits until all earlier accumulates have left the
// quire pipeline; while it waits, the stages behind it stall (in_ready low).
// Commands with an output (FCVT_P_R, FCVT_P_S, FCVT_S_P) deliver out_data with
// a one-cycle out_valid pulse, in order; out_data holds a posit in its low N
// bits (zero-extended) or a binary32 value.
//
// Timing: accepted at a clock edge when in_valid && in_ready. Outputs of
// FCVT_P_S and FCVT_S_P appear 3 cycles after acceptance; FCVT_P_R takes
// 5 cycles plus any wait for outstanding accumulates. An accumulate reaches
// stage 3 two cycles after acceptance and is complete NSEG cycles later.
//
// Parameters N, ES (posit format) and DIV_EN (divider present, as in the
// "-DIV" configurations). The stage split, the command set and the interfaces
// between sub-blocks follow the paper's block diagram and command table. The
// valid/ready handshake, the output pulse without back-pressure and the
// stall rule are this design's choices. With DIV_EN = 0, FDA_P and FDS_P
// leave the quire unchanged.
module melodica
  import posit_pkg::*;
#(
  parameter int unsigned N      = 32,
  parameter int unsigned ES     = 2,
  parameter bit          DIV_EN = 1'b1,
  parameter int unsigned FW     = frac_w(N, ES),
  parameter int unsigned SCW    = scale_w(N),
  parameter int unsigned NSEG   = quire_segs(N),
  parameter int unsigned QW     = NSEG * QSEG_W
) (
  input  logic             clk,
  input  logic             rst_n,
  // command from the CPU pipeline
  input  logic             in_valid,
  output logic             in_ready,
  input  mel_cmd_e         in_cmd,
  input  logic [FLT_W-1:0] in_op1,   // posit in [N-1:0], or a binary32
  input  logic [N-1:0]     in_op2,
  // response to the CPU pipeline
  output logic             out_valid,
  output logic [FLT_W-1:0] out_data,
  // status
  output logic             busy,        // work in flight anywhere
  output logic             quire_stall, // stage 3 waiting on the quire
  output logic [QW-1:0]    quire_value
);

  localparam int unsigned FRW = N;

  // ---------------- stage 1: extraction ----------------
  logic                  e1_sign, e1_zero, e1_nar, e2_sign, e2_zero, e2_nar;
  logic signed [SCW-1:0] e1_scale, e2_scale;
  logic [FW-1:0]         e1_frac, e2_frac;
  logic                  fp_sign, fp_zero, fp_nar, fp_sticky;
  logic signed [SCW-1:0] fp_scale;
  logic [FRW-1:0]        fp_frac;

  posit_extract #(.N(N), .ES(ES), .FW(FW), .SCW(SCW)) u_ext1 (
    .p(in_op1[N-1:0]), .sign(e1_sign), .zero(e1_zero), .nar(e1_nar),
    .scale(e1_scale), .frac(e1_frac));
  posit_extract #(.N(N), .ES(ES), .FW(FW), .SCW(SCW)) u_ext2 (
    .p(in_op2), .sign(e2_sign), .zero(e2_zero), .nar(e2_nar),
    .scale(e2_scale), .frac(e2_frac));
  float_to_posit #(.N(N), .FRW(FRW), .SCW(SCW)) u_ftop (
    .f(in_op1), .sign(fp_sign), .zero(fp_zero), .nar(fp_nar),
    .scale(fp_scale), .frac(fp_frac), .sticky(fp_sticky));

  typedef struct packed {
    logic                  sign, zero, nar;
    logic signed [SCW-1:0] scale;
    logic [FW-1:0]         frac;
  } pfields_t;

  typedef struct packed {
    logic                  sign, zero, nar;
    logic signed [SCW-1:0] scale;
    logic [FRW-1:0]        frac;
    logic                  sticky;
  } unrounded_t;

  logic       s1_valid;
  mel_cmd_e   s1_cmd;
  pfields_t   s1_a, s1_b;
  unrounded_t s1_fp;

  logic adv;  // stages 1..3 advance

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_cmd   <= CMD_FMA_P;
      s1_a     <= '0;
      s1_b     <= '0;
      s1_fp    <= '0;
    end else if (adv) begin
      s1_valid <= in_valid;
      if (in_valid) begin
        s1_cmd <= in_cmd;
        s1_a   <= '{e1_sign, e1_zero, e1_nar, e1_scale, e1_frac};
        s1_b   <= '{e2_sign, e2_zero, e2_nar, e2_scale, e2_frac};
        s1_fp  <= '{fp_sign, fp_zero, fp_nar, fp_scale, fp_frac, fp_sticky};
      end
    end
  end

  // ---------------- stage 2: computation ----------------
  logic          sub;
  logic          mul_nar, mul_zero, div_nar, div_zero;
  logic [QW-1:0] mul_add, div_add, init_val;
  logic [FLT_W-1:0] ptof_f;

  assign sub = (s1_cmd == CMD_FMS_P) || (s1_cmd == CMD_FDS_P);

  posit_mul #(.N(N), .ES(ES), .FW(FW), .SCW(SCW), .QW(QW)) u_mul (
    .a_sign(s1_a.sign), .a_zero(s1_a.zero), .a_nar(s1_a.nar),
    .a_scale(s1_a.scale), .a_frac(s1_a.frac),
    .b_sign(s1_b.sign), .b_zero(s1_b.zero), .b_nar(s1_b.nar),
    .b_scale(s1_b.scale), .b_frac(s1_b.frac),
    .sub(sub), .nar(mul_nar), .zero(mul_zero), .addend(mul_add));

  generate
    if (DIV_EN) begin : g_div
      posit_div #(.N(N), .ES(ES), .FW(FW), .SCW(SCW), .QW(QW)) u_div (
        .a_sign(s1_a.sign), .a_zero(s1_a.zero), .a_nar(s1_a.nar),
        .a_scale(s1_a.scale), .a_frac(s1_a.frac),
        .b_sign(s1_b.sign), .b_zero(s1_b.zero), .b_nar(s1_b.nar),
        .b_scale(s1_b.scale), .b_frac(s1_b.frac),
        .sub(sub), .nar(div_nar), .zero(div_zero), .addend(div_add));
    end else begin : g_nodiv
      assign div_nar  = 1'b0;
      assign div_zero = 1'b1;
      assign div_add  = '0;
    end
  endgenerate

  logic [QW-1:0] init_aligned;
  quire_align #(.N(N), .MAGW(FW + 1), .SCW(SCW), .QW(QW)) u_init_align (
    .neg(s1_a.sign), .mag({1'b1, s1_a.frac}),
    .exp((SCW+2)'(s1_a.scale) - (SCW+2)'(FW)), .q(init_aligned));
  assign init_val = (s1_a.zero || s1_a.nar) ? '0 : init_aligned;

  posit_to_float #(.N(N), .ES(ES), .FW(FW), .SCW(SCW)) u_ptof (
    .sign(s1_a.sign), .zero(s1_a.zero), .nar(s1_a.nar),
    .scale(s1_a.scale), .frac(s1_a.frac), .f(ptof_f));

  logic             s2_valid;
  mel_cmd_e         s2_cmd;
  logic [QW-1:0]    s2_q;
  logic             s2_qnar;
  logic [FLT_W-1:0] s2_f;
  unrounded_t       s2_fp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_valid <= 1'b0;
      s2_cmd   <= CMD_FMA_P;
      s2_q     <= '0;
      s2_qnar  <= 1'b0;
      s2_f     <= '0;
      s2_fp    <= '0;
    end else if (adv) begin
      s2_valid <= s1_valid;
      if (s1_valid) begin
        s2_cmd <= s1_cmd;
        s2_fp  <= s1_fp;
        s2_f   <= ptof_f;
        unique case (s1_cmd)
          CMD_FMA_P, CMD_FMS_P: begin s2_q <= mul_add;  s2_qnar <= mul_nar; end
          CMD_FDA_P, CMD_FDS_P: begin s2_q <= div_add;  s2_qnar <= div_nar; end
          default:              begin s2_q <= init_val; s2_qnar <= s1_a.nar; end
        endcase
      end
    end
  end

  // ---------------- stage 3: quire ----------------
  logic             s3_valid;
  mel_cmd_e         s3_cmd;
  logic [QW-1:0]    s3_q;
  logic             s3_qnar;
  logic [FLT_W-1:0] s3_f;
  unrounded_t       s3_fp;
  logic             s3_rd_issued;
  logic             s3_done;
  logic             s3_fused, s3_init, s3_read;

  logic                  q_busy, q_rsp_valid, q_sign, q_zero, q_nar, q_sticky;
  logic signed [SCW-1:0] q_scale;
  logic [FRW-1:0]        q_frac;
  logic                  q_init_v, q_acc_v, q_rd_req;

  assign s3_fused = s3_valid && (s3_cmd inside {CMD_FMA_P, CMD_FMS_P, CMD_FDA_P, CMD_FDS_P});
  assign s3_init  = s3_valid && (s3_cmd == CMD_FCVT_R_P);
  assign s3_read  = s3_valid && (s3_cmd == CMD_FCVT_P_R);

  assign q_acc_v  = s3_fused && (DIV_EN || s3_cmd inside {CMD_FMA_P, CMD_FMS_P});
  assign q_init_v = s3_init && !q_busy;
  assign q_rd_req = s3_read && !s3_rd_issued && !q_busy;

  always_comb begin
    if (s3_init)      s3_done = !q_busy;
    else if (s3_read) s3_done = q_rsp_valid;
    else              s3_done = 1'b1;
  end
  assign adv         = !s3_valid || s3_done;
  assign in_ready    = adv;
  assign quire_stall = s3_valid && !s3_done;

  quire #(.N(N), .FRW(FRW), .SCW(SCW), .NSEG(NSEG), .QW(QW)) u_quire (
    .clk(clk), .rst_n(rst_n),
    .init_valid(q_init_v), .init_nar(s3_qnar), .init_value(s3_q),
    .acc_valid(q_acc_v), .acc_nar(s3_qnar), .acc_value(s3_q),
    .rd_req(q_rd_req), .rd_rsp_valid(q_rsp_valid),
    .rd_sign(q_sign), .rd_zero(q_zero), .rd_nar(q_nar),
    .rd_scale(q_scale), .rd_frac(q_frac), .rd_sticky(q_sticky),
    .busy(q_busy), .value(quire_value), .zflags());

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s3_valid     <= 1'b0;
      s3_cmd       <= CMD_FMA_P;
      s3_q         <= '0;
      s3_qnar      <= 1'b0;
      s3_f         <= '0;
      s3_fp        <= '0;
      s3_rd_issued <= 1'b0;
    end else begin
      if (q_rd_req) s3_rd_issued <= 1'b1;
      if (adv) begin
        s3_valid     <= s2_valid;
        s3_rd_issued <= 1'b0;
        if (s2_valid) begin
          s3_cmd  <= s2_cmd;
          s3_q    <= s2_q;
          s3_qnar <= s2_qnar;
          s3_f    <= s2_f;
          s3_fp   <= s2_fp;
        end
      end
    end
  end

  // ---------------- stage 4: normalization ----------------
  logic             s4_valid;
  mel_cmd_e         s4_cmd;
  unrounded_t       s4_u;
  logic [FLT_W-1:0] s4_f;
  logic [N-1:0]     norm_p;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s4_valid <= 1'b0;
      s4_cmd   <= CMD_FMA_P;
      s4_u     <= '0;
      s4_f     <= '0;
    end else begin
      s4_valid <= s3_valid && s3_done &&
                  (s3_cmd inside {CMD_FCVT_P_R, CMD_FCVT_P_S, CMD_FCVT_S_P});
      if (s3_valid && s3_done) begin
        s4_cmd <= s3_cmd;
        s4_f   <= s3_f;
        s4_u   <= (s3_cmd == CMD_FCVT_P_R)
                  ? '{q_sign, q_zero, q_nar, q_scale, q_frac, q_sticky}
                  : s3_fp;
      end
    end
  end

  posit_norm #(.N(N), .ES(ES), .FRW(FRW), .SCW(SCW)) u_norm (
    .sign(s4_u.sign), .zero(s4_u.zero), .nar(s4_u.nar), .scale(s4_u.scale),
    .frac(s4_u.frac), .sticky(s4_u.sticky), .p(norm_p));

  assign out_valid = s4_valid;
  assign out_data  = (s4_cmd == CMD_FCVT_S_P) ? s4_f : FLT_W'(norm_p);
  assign busy      = s1_valid || s2_valid || s3_valid || s4_valid || q_busy;

  // A quire read or init is only issued with the accumulate pipeline empty.
  assert property (@(posedge clk) disable iff (!rst_n) (q_rd_req || q_init_v) |-> !q_busy);
  assert property (@(posedge clk) disable iff (!rst_n) !(q_init_v && q_acc_v));

endmodule
