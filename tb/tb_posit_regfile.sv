// tb_posit_regfile - checks the 32 x 32-bit posit register file against a
// shadow array: random writes and reads on both ports, reset to zero, and
// the same-cycle write-through bypass with its indicator outputs.
module tb_posit_regfile;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [4:0] rs1, rs2, wa;
  logic [31:0] rd1, rd2, wd;
  logic we, b1, b2;
  logic [31:0] shadow [32];

  posit_regfile dut (.clk(clk), .rst_n(rst_n), .rs1(rs1), .rs2(rs2), .rd1(rd1), .rd2(rd2),
                     .bypass1(b1), .bypass2(b2), .we(we), .wa(wa), .wd(wd));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; wa = 0; wd = 0; rs1 = 0; rs2 = 0;
    for (int i = 0; i < 32; i++) shadow[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 32; i++) begin
      rs1 = 5'(i); rs2 = 5'(31 - i); #1;
      chk(rd1 == 0 && rd2 == 0, "reset value");
    end
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      we = 1'($urandom); wa = 5'($urandom); wd = $urandom;
      rs1 = 5'($urandom); rs2 = (i % 4 == 0) ? wa : 5'($urandom);
      #1;
      chk(rd1 == ((we && wa == rs1) ? wd : shadow[rs1]), "port 1");
      chk(rd2 == ((we && wa == rs2) ? wd : shadow[rs2]), "port 2");
      chk(b2 == (we && wa == rs2) && b1 == (we && wa == rs1), "bypass flags");
      @(posedge clk);
      if (we) shadow[wa] = wd;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
