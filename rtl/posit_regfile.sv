// posit_regfile - the Posit Register File (PRF) added to the core.
//
// NREGS registers of N bits hold posit-typed values. Two combinational read
// ports serve the two source operands; one write port takes results (from
// Melodica, posit loads and GPR-to-PRF moves). A write-through bypass
// forwards the value being written in the same cycle to a read of the same
// register, the PRF's share of the "pbypass" forwarding path. All registers
// reset to zero (posit zero); register 0 is an ordinary register.
//
// Interface: rs1/rs2 addresses in, rd1/rd2 data out (combinational), plus
// we/wa/wd written at the rising clock edge. bypass1/bypass2 report that a
// read was served from the write port.
// The size (32 x N bits) is the paper's; reset and the bypass placement are
// this design's choices.
module posit_regfile #(
  parameter int unsigned N     = 32,
  parameter int unsigned NREGS = 32,
  parameter int unsigned AW    = $clog2(NREGS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [AW-1:0] rs1,
  input  logic [AW-1:0] rs2,
  output logic [N-1:0]  rd1,
  output logic [N-1:0]  rd2,
  output logic          bypass1,
  output logic          bypass2,
  input  logic          we,
  input  logic [AW-1:0] wa,
  input  logic [N-1:0]  wd
);

  logic [N-1:0] regs [NREGS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NREGS; i++) regs[i] <= '0;
    end else if (we) begin
      regs[wa] <= wd;
    end
  end

  assign bypass1 = we && (wa == rs1);
  assign bypass2 = we && (wa == rs2);
  assign rd1 = bypass1 ? wd : regs[rs1];
  assign rd2 = bypass2 ? wd : regs[rs2];

endmodule
