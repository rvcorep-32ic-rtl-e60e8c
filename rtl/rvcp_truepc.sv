// rvcp_truepc: correct-path address generation, EX and MA stages (TruePC, TruePC_2).
//
// When a branch is mispredicted the fetch unit needs, besides the correct
// address TruePC, the address two bytes above it (TruePC_2) for its second
// program counter. Adding 2 after TruePC is known would lengthen the
// critical PC-selection path, so both values are produced in the pipeline:
//
//   EX:  BelowPC   = PC + (Comp ? 2 : 4)     BelowPC_2 = PC + (Comp ? 4 : 6)
//        TakenPC   = ALU_IN1 + IMM           TakenPC_2 = ALU_IN1 + IMM_2
//   MA:  TruePC    = BranchTaken ? TakenPC   : BelowPC
//        TruePC_2  = BranchTaken ? TakenPC_2 : BelowPC_2
//
// with IMM_2 = IMM + 2 computed in ID and ALU_IN1 the target base (the
// branch's PC, or the forwarded rs1 for JALR). The five values live in the
// EX/MA pipeline register inside this module. This structure is the paper's
// (constants 2/4 and 4/6, the Comp and BranchTaken selects); clearing bit 0
// of JALR targets is the RISC-V rule, applied to both TakenPC values.
//
// Interface: ex_* are EX-stage inputs; en loads the EX/MA copy on the clock
// edge. below_pc is the EX-stage BelowPC (the link value of jumps). The
// ma_* outputs and true_pc/true_pc_2 are from the registered copy.
module rvcp_truepc
  import rvcp_pkg::*;
(
  input  logic  clk,
  input  logic  en,
  input  word_t ex_pc,
  input  logic  ex_comp,
  input  logic  ex_jalr,
  input  word_t ex_base,
  input  word_t ex_imm,
  input  word_t ex_imm_2,
  input  logic  ex_taken,
  output word_t below_pc,
  output word_t taken_pc_ex,
  output logic  ma_taken,
  output word_t ma_taken_pc,
  output word_t true_pc,
  output word_t true_pc_2
);
  word_t below_pc_2, taken_pc_2;
  word_t r_below, r_below_2, r_taken, r_taken_2;

  assign below_pc    = ex_pc + (ex_comp ? 32'd2 : 32'd4);
  assign below_pc_2  = ex_pc + (ex_comp ? 32'd4 : 32'd6);
  assign taken_pc_ex = (ex_base + ex_imm)   & ~{31'd0, ex_jalr};
  assign taken_pc_2  = (ex_base + ex_imm_2) & ~{31'd0, ex_jalr};

  always_ff @(posedge clk) begin
    if (en) begin
      r_below   <= below_pc;
      r_below_2 <= below_pc_2;
      r_taken   <= taken_pc_ex;
      r_taken_2 <= taken_pc_2;
      ma_taken  <= ex_taken;
    end
  end

  assign ma_taken_pc = r_taken;
  assign true_pc     = ma_taken ? r_taken   : r_below;
  assign true_pc_2   = ma_taken ? r_taken_2 : r_below_2;
endmodule
