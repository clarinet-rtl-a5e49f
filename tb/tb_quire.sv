// tb_quire - runs quire_tb_core for 32-bit posits (512-bit quire, 16
// segments, accumulate latency 16), 24-bit posits (288 bits, 9 segments),
// 16-bit posits (128 bits, 4 segments) and 8-bit posits (32 bits, 1 segment:
// single-cycle accumulate).
module tb_quire;
  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;
  logic d32, d24, d16, d8;
  int c32, f32, c24, f24, c16, f16, c8, f8;

  quire_tb_core #(.N(32)) u32 (.clk(clk), .rst_n(rst_n), .start(start), .done(d32), .checks(c32), .failures(f32));
  quire_tb_core #(.N(24)) u24 (.clk(clk), .rst_n(rst_n), .start(start), .done(d24), .checks(c24), .failures(f24));
  quire_tb_core #(.N(16)) u16 (.clk(clk), .rst_n(rst_n), .start(start), .done(d16), .checks(c16), .failures(f16));
  quire_tb_core #(.N(8))  u8  (.clk(clk), .rst_n(rst_n), .start(start), .done(d8),  .checks(c8),  .failures(f8));

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c32 + c24 + c16 + c8, f32 + f24 + f16 + f8 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); start = 1;
    wait (d32 && d24 && d16 && d8);
    $display("TB_RESULT checks=%0d failures=%0d", c32 + c24 + c16 + c8, f32 + f24 + f16 + f8);
    $finish;
  end
endmodule
