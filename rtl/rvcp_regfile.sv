// rvcp_regfile: 32 x 32-bit integer register file.
//
// Built like a distributed (LUT) RAM, as in the paper: two asynchronous read
// ports addressed in ID by RS1/RS2, one write port written on the rising
// clock edge from WB. x0 is never written and so always reads 0 (the paper
// does not describe reset). Write-before-read
// in the same cycle is not provided here: the core's ID-stage operand mux
// bypasses the value being written by WB. The array is given its zero
// start value by initialisation, as a distributed RAM is on an FPGA.
module rvcp_regfile
  import rvcp_pkg::*;
(
  input  logic  clk,
  input  reg_t  rs1,
  input  reg_t  rs2,
  output word_t rd1,
  output word_t rd2,
  input  logic  we,
  input  reg_t  rd,
  input  word_t wd
);
  word_t regs [32];

  initial begin
    for (int i = 0; i < 32; i++) regs[i] = '0;
  end

  always_ff @(posedge clk) begin
    if (we && rd != 5'd0) regs[rd] <= wd;
  end

  assign rd1 = regs[rs1];
  assign rd2 = regs[rs2];
endmodule
