// tb_posit_decoder - checks decoding of the twelve posit instructions from
// their published bit patterns (assembled here field by field), their
// register fields and immediates, and that neighbouring encodings (ordinary
// FP instructions, FLW/FSW, wrong rs2 codes) are not taken as posit ones.
module tb_posit_decoder;
  import posit_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [31:0] instr;
  pinstr_t d;
  posit_decoder dut (.instr(instr), .dec(d));

  function automatic logic [31:0] r(logic [6:0] f7, logic [4:0] rs2, logic [4:0] rs1, logic [2:0] f3, logic [4:0] rd, logic [6:0] op);
    return {f7, rs2, rs1, f3, rd, op};
  endfunction

  task automatic expect_kind(logic [31:0] i, pinstr_e k, string what);
    instr = i; #1;
    checks++;
    if (d.kind != k || d.valid != (k != PI_NONE)) begin
      failures++; $display("FAIL %s: instr=%h kind=%0d", what, i, d.kind);
    end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 50; t++) begin
      logic [4:0] a, b, c; logic [2:0] rm; logic [11:0] im;
      a = 5'($urandom); b = 5'($urandom); c = 5'($urandom); rm = 3'($urandom); im = 12'($urandom);
      expect_kind(r(7'b0101010, 5'b10000, a, rm, 5'b00000, 7'b1010011), PI_FCVT_R_P, "fcvt.r.p");
      checks++; if (d.rs1 != a) begin failures++; $display("FAIL rs1"); end
      expect_kind(r(7'b1101010, 5'b10000, 5'b00000, rm, c, 7'b1010011), PI_FCVT_P_R, "fcvt.p.r");
      checks++; if (d.rd != c) begin failures++; $display("FAIL rd"); end
      expect_kind(r(7'b1101010, 5'b10001, 5'b00000, rm, c, 7'b1010011), PI_FCVT_P_R, "fcvt.p.r rs2=0x11");
      expect_kind(r(7'b0110010, b, a, rm, 5'b00000, 7'b1010011), PI_FMA_P, "fma.p");
      checks++; if (d.rs1 != a || d.rs2 != b) begin failures++; $display("FAIL fma regs"); end
      expect_kind(r(7'b0110110, b, a, rm, 5'b00000, 7'b1010011), PI_FMS_P, "fms.p");
      expect_kind(r(7'b0111010, b, a, rm, 5'b00000, 7'b1010011), PI_FDA_P, "fda.p");
      expect_kind(r(7'b0111110, b, a, rm, 5'b00000, 7'b1010011), PI_FDS_P, "fds.p");
      expect_kind({im, a, 3'b110, c, 7'b0000111}, PI_PLW, "plw");
      checks++; if (d.imm != {{20{im[11]}}, im} || d.rd != c) begin failures++; $display("FAIL plw imm"); end
      expect_kind({im[11:5], b, a, 3'b110, im[4:0], 7'b0100111}, PI_PSW, "psw");
      checks++; if (d.imm != {{20{im[11]}}, im} || d.rs2 != b) begin failures++; $display("FAIL psw imm"); end
      expect_kind(r(7'b1110000, 5'b10000, a, 3'b000, c, 7'b1010011), PI_PMV_X_W, "pmv.x.w");
      expect_kind(r(7'b1111010, 5'b00000, a, 3'b000, c, 7'b1010011), PI_PMV_W_X, "pmv.w.x");
      expect_kind(r(7'b0100110, 5'b00000, a, rm, c, 7'b1010011), PI_FCVT_P_S, "fcvt.p.s");
      expect_kind(r(7'b0100100, 5'b10000, a, rm, c, 7'b1010011), PI_FCVT_S_P, "fcvt.s.p");
      // not posit instructions
      expect_kind({im, a, 3'b010, c, 7'b0000111}, PI_NONE, "flw");
      expect_kind({im[11:5], b, a, 3'b010, im[4:0], 7'b0100111}, PI_NONE, "fsw");
      expect_kind(r(7'b1110000, 5'b00000, a, 3'b000, c, 7'b1010011), PI_NONE, "fmv.x.w");
      expect_kind(r(7'b1111000, 5'b00000, a, 3'b000, c, 7'b1010011), PI_NONE, "fmv.w.x");
      expect_kind(r(7'b0000000, b, a, rm, c, 7'b1010011), PI_NONE, "fadd.s");
      expect_kind(r(7'b0100100, 5'b00000, a, rm, c, 7'b1010011), PI_NONE, "fcvt.s.p wrong rs2");
      expect_kind(r(7'b0110010, b, a, rm, c, 7'b0110011), PI_NONE, "integer op");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
