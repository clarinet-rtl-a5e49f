// quire_tb_core - reusable stimulus/checker for one quire configuration,
// instantiated by tb_quire for several posit widths. Runs:
//   * bursts of back-to-back accumulates of random sign-extended addends,
//     checking that busy stays high exactly NSEG-1 cycles after the last one
//     (an accumulate takes NSEG cycles) and that the register then equals a
//     modular reference sum;
//   * reads, checking the 2-cycle response and that sign, zero, scale,
//     fraction and sticky describe the reference value exactly;
//   * init, and NaR propagation through an accumulate.
module quire_tb_core #(parameter int N = 32) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  output logic done,
  output int   checks,
  output int   failures
);
  import posit_pkg::*;
  localparam int NSEG = quire_segs(N);
  localparam int QW = NSEG * 32;
  localparam int QF = quire_frac(N);

  logic iv, inar, av, anar, rq, rv, rs, rz, rn, rst_k;
  logic [QW-1:0] ival, aval, val;
  logic signed [scale_w(N)-1:0] rsc;
  logic [N-1:0] rfr;
  logic busy;

  quire #(.N(N)) dut (.clk(clk), .rst_n(rst_n), .init_valid(iv), .init_nar(inar), .init_value(ival),
    .acc_valid(av), .acc_nar(anar), .acc_value(aval), .rd_req(rq), .rd_rsp_valid(rv),
    .rd_sign(rs), .rd_zero(rz), .rd_nar(rn), .rd_scale(rsc), .rd_frac(rfr), .rd_sticky(rst_k),
    .busy(busy), .value(val), .zflags());

  logic [QW-1:0] refq;

  function automatic logic [QW-1:0] rnd_addend(int bits);
    logic [QW-1:0] x;
    for (int i = 0; i < QW; i += 32) x[i +: 32] = $urandom;
    if (bits < QW) begin
      x = x & ((QW'(1) << bits) - 1);
      if ($urandom_range(0, 1)) x = ~x + 1;
    end
    return x;
  endfunction

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL N=%0d %s", N, what); end
  endtask

  task automatic do_read();
    logic [QW-1:0] mag, rebuilt;
    int lat;
    bit exp_sign;
    @(negedge clk); rq = 1;
    @(negedge clk); rq = 0;
    lat = 1;
    while (!rv && lat < 10) begin @(negedge clk); lat++; end
    chk(lat == 2, $sformatf("read latency %0d", lat));
    exp_sign = refq[QW-1];
    mag = exp_sign ? ~refq + 1 : refq;
    chk(rs == exp_sign, "read sign");
    chk(rz == (refq == 0), "read zero");
    if (refq != 0) begin
      // value = 2^scale * 1.frac (+ sticky): rebuild the truncated integer
      int p;
      p = int'(rsc) + QF;
      rebuilt = (QW'(1) << p) | ((p >= N) ? (QW'(rfr) << (p - N)) : (QW'(rfr) >> (N - p)));
      chk(p >= 0 && p < QW && mag[p] && (mag >> (p + 1)) == 0, "read scale");
      chk((p < N) || (mag >> (p - N)) == (rebuilt >> (p - N)), "read frac");
      chk(rst_k == ((p > N) && ((mag & ((QW'(1) << (p - N)) - 1)) != 0)), "read sticky");
    end
  endtask

  initial begin
    iv = 0; inar = 0; av = 0; anar = 0; rq = 0; ival = '0; aval = '0;
    refq = '0; checks = 0; failures = 0; done = 0;
    wait (start);
    for (int burst = 0; burst < 20; burst++) begin
      int len, cnt;
      len = $urandom_range(1, 12);
      for (int i = 0; i < len; i++) begin
        @(negedge clk);
        av = 1; aval = rnd_addend((burst % 3 == 0) ? QW : $urandom_range(8, QW - 40));
        refq = refq + aval;
      end
      @(negedge clk); av = 0;
      cnt = 0;
      while (busy && cnt < 100) begin @(negedge clk); cnt++; end
      // one cycle already elapsed after the last accumulate's first segment
      chk(cnt == NSEG - 1, $sformatf("accumulate latency busy=%0d cycles", cnt));
      chk(val == refq, "accumulated value");
      do_read();
    end
    // init
    @(negedge clk); iv = 1; ival = rnd_addend(100); refq = ival;
    @(negedge clk); iv = 0;
    chk(val == refq, "init value");
    do_read();
    @(negedge clk); iv = 1; ival = '0; refq = '0;
    @(negedge clk); iv = 0;
    do_read();
    // NaR
    @(negedge clk); av = 1; anar = 1; aval = '0;
    @(negedge clk); av = 0; anar = 0;
    while (busy) @(negedge clk);
    @(negedge clk); rq = 1; @(negedge clk); rq = 0; @(negedge clk);
    chk(rv && rn, "nar read");
    @(negedge clk); iv = 1; inar = 0; ival = '0;
    @(negedge clk); iv = 0;
    @(negedge clk); rq = 1; @(negedge clk); rq = 0; @(negedge clk);
    chk(rv && !rn && rz, "init clears nar");
    done = 1;
  end
endmodule
