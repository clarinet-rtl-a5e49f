// tb_fbox_sizes - runs the whole posit F-pipe at the two smaller posit
// configurations it is built for besides the default (32, 2): 8-bit posits
// with es = 0 (32-bit quire, one segment) and 16-bit posits with es = 1
// (128-bit quire, four segments). Each configuration is driven by its own
// fbox_size_core: dot products through PMV moves and FMA.P/FMS.P, quire
// reads, and float conversions, checked against exact reference values.
module tb_fbox_sizes;
  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;
  logic d8, d16;
  int c8, f8, c16, f16;

  fbox_size_core #(.N(8),  .ES(0)) u8  (.clk(clk), .rst_n(rst_n), .start(start), .done(d8),  .checks(c8),  .failures(f8));
  fbox_size_core #(.N(16), .ES(1)) u16 (.clk(clk), .rst_n(rst_n), .start(start), .done(d16), .checks(c16), .failures(f16));

  initial begin
    repeat (50000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c8 + c16, f8 + f16 + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); start = 1;
    wait (d8 && d16);
    $display("TB_RESULT checks=%0d failures=%0d", c8 + c16, f8 + f16);
    $finish;
  end
endmodule
