// quire - segmented, pipelined fixed-point accumulator of Melodica.
//
// The quire holds N*N/2 bits in two's complement: sign, N-1 carry-guard
// bits, N*N/4-N/2 integer bits and as many fraction bits, enough to hold the
// square of the largest and of the smallest posit. It is stored as NSEG
// segments of 32 bits (the last one sign-extended when N*N/2 is not a
// multiple of 32), each with a zero flag.
//
// Accumulate: the addend is added by a pipelined segmented adder. In the
// cycle acc_valid is high, segment 0 adds its addend slice; its carry and the
// remaining addend move to a stage register, and one cycle later segment 1
// adds, and so on. An accumulate therefore completes in NSEG cycles (1, 4 and
// 16 for 8-, 16- and 32-bit posits), and a new one can enter every cycle:
// later accumulates always reach each segment after earlier ones, so the
// skewed pipeline computes the exact running sum.
//
// Init: loads a value (the posit operand already aligned) into the register.
// Read: the magnitude of the quire is formed and registered with one zero
// flag per segment (cycle 1); the flags select the highest nonzero segment
// and a 32-bit leading-zero count inside it gives the leading-one position
// (cycle 2), from which scale and a left-aligned fraction plus sticky bit are
// produced for the normalizer. The response comes 2 cycles after rd_req.
//
// busy is high while accumulates are in flight; init and rd_req must only be
// issued when busy is low (Melodica waits for this, so a read returns the sum
// of all earlier accumulates). NaR is kept as a separate flag: an init or an
// accumulate of NaR makes the quire NaR until the next init.
//
// Follows the paper: quire layout, 32-bit segments, zero flags used for the
// leading-zero count, pipelined segmented adder, init/accumulate/read
// interfaces. This design's own: the exact pipeline register layout, the
// 2-cycle read, the NaR flag and the busy-based ordering.
module quire
  import posit_pkg::*;
#(
  parameter int unsigned N    = 32,
  parameter int unsigned FRW  = N,
  parameter int unsigned SCW  = scale_w(N),
  parameter int unsigned NSEG = quire_segs(N),
  parameter int unsigned QW   = NSEG * QSEG_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // init interface
  input  logic                  init_valid,
  input  logic                  init_nar,
  input  logic [QW-1:0]         init_value,
  // accumulate interface
  input  logic                  acc_valid,
  input  logic                  acc_nar,
  input  logic [QW-1:0]         acc_value,
  // read request / response
  input  logic                  rd_req,
  output logic                  rd_rsp_valid,
  output logic                  rd_sign,
  output logic                  rd_zero,
  output logic                  rd_nar,
  output logic signed [SCW-1:0] rd_scale,
  output logic [FRW-1:0]        rd_frac,
  output logic                  rd_sticky,
  // status
  output logic                  busy,
  output logic [QW-1:0]         value,
  output logic [NSEG-1:0]       zflags
);

  localparam int unsigned SW = QSEG_W;
  localparam int signed   QF = quire_frac(N);

  logic [SW-1:0]   seg_q  [NSEG];
  logic [NSEG-1:0] zf_q;
  logic            nar_q;

  // Adder pipeline: stage s (s >= 1) holds an accumulate whose segments
  // 0..s-1 are done, the full addend and the carry out of segment s-1.
  logic            st_valid [NSEG];
  logic [QW-1:0]   st_add   [NSEG];
  logic            st_carry [NSEG];

  logic            s_v    [NSEG];
  logic [QW-1:0]   s_add  [NSEG];
  logic            s_cin  [NSEG];
  logic [SW:0]     s_sum  [NSEG];

  always_comb begin
    for (int s = 0; s < NSEG; s++) begin
      s_v[s]   = (s == 0) ? acc_valid : st_valid[s];
      s_add[s] = (s == 0) ? acc_value : st_add[s];
      s_cin[s] = (s == 0) ? 1'b0      : st_carry[s];
      s_sum[s] = {1'b0, seg_q[s]} + {1'b0, s_add[s][s*SW +: SW]} + (SW+1)'(s_cin[s]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < NSEG; s++) begin
        seg_q[s]    <= '0;
        st_valid[s] <= 1'b0;
        st_add[s]   <= '0;
        st_carry[s] <= 1'b0;
      end
      zf_q  <= '1;
      nar_q <= 1'b0;
    end else begin
      if (init_valid) begin
        for (int s = 0; s < NSEG; s++) begin
          seg_q[s] <= init_value[s*SW +: SW];
          zf_q[s]  <= (init_value[s*SW +: SW] == '0);
        end
        nar_q <= init_nar;
      end else begin
        for (int s = 0; s < NSEG; s++) begin
          if (s_v[s]) begin
            seg_q[s] <= s_sum[s][SW-1:0];
            zf_q[s]  <= (s_sum[s][SW-1:0] == '0);
          end
        end
        if (acc_valid && acc_nar) nar_q <= 1'b1;
      end
      for (int s = 1; s < NSEG; s++) begin
        st_valid[s] <= s_v[s-1];
        st_add[s]   <= s_add[s-1];
        st_carry[s] <= s_sum[s-1][SW];
      end
    end
  end

  always_comb begin
    busy = 1'b0;
    for (int s = 1; s < NSEG; s++) busy = busy | st_valid[s];
    for (int s = 0; s < NSEG; s++) value[s*SW +: SW] = seg_q[s];
  end
  assign zflags = zf_q;

  // ---------------- read path ----------------
  logic            r1_valid, r1_sign, r1_nar, r1_zero;
  logic [QW-1:0]   r1_mag;
  logic [NSEG-1:0] r1_zf;
  logic [QW-1:0]   neg_value;

  assign neg_value = ~value + 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r1_valid <= 1'b0;
      r1_sign  <= 1'b0;
      r1_nar   <= 1'b0;
      r1_zero  <= 1'b1;
      r1_mag   <= '0;
      r1_zf    <= '1;
    end else begin
      r1_valid <= rd_req;
      if (rd_req) begin
        r1_sign <= value[QW-1];
        r1_nar  <= nar_q;
        r1_zero <= &zf_q;
        r1_mag  <= value[QW-1] ? neg_value : value;
        for (int s = 0; s < NSEG; s++)
          r1_zf[s] <= value[QW-1] ? (neg_value[s*SW +: SW] == '0) : zf_q[s];
      end
    end
  end

  // Leading one: highest nonzero segment from the flags, then a 32-bit LZC.
  int unsigned     hseg;
  int unsigned     hbit;
  int unsigned     pos;
  logic [SW-1:0]   hword;
  logic [QW-1:0]   shl;

  always_comb begin
    hseg = 0;
    for (int s = 0; s < NSEG; s++) if (!r1_zf[s]) hseg = s;
    hword = r1_mag[hseg*SW +: SW];
    hbit  = 0;
    for (int b = 0; b < SW; b++) if (hword[b]) hbit = b;
    pos = hseg * SW + hbit;
    shl = r1_mag << (QW - 1 - pos);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_rsp_valid <= 1'b0;
      rd_sign      <= 1'b0;
      rd_zero      <= 1'b1;
      rd_nar       <= 1'b0;
      rd_scale     <= '0;
      rd_frac      <= '0;
      rd_sticky    <= 1'b0;
    end else begin
      rd_rsp_valid <= r1_valid;
      if (r1_valid) begin
        rd_sign   <= r1_sign;
        rd_zero   <= r1_zero;
        rd_nar    <= r1_nar;
        rd_scale  <= SCW'(signed'(pos) - QF);
        rd_frac   <= shl[QW-2 -: FRW];
        rd_sticky <= |(shl & ~({QW{1'b1}} << (QW - 1 - FRW)));
      end
    end
  end

endmodule
