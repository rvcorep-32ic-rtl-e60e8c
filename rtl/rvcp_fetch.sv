// rvcp_fetch: instruction fetch unit with two program counters (PC and PC_2).
//
// The fetch unit keeps PC, the address of the instruction in IF, and PC_2,
// always PC + 2, in two separate registers. The two 16-bit entries of the
// instruction memory they address arrive together and are concatenated
// (entry at PC in bits 15:0, entry at PC_2 in bits 31:16), so a 32-bit
// instruction is fetched in one cycle even when it starts at the upper half
// of a 32-bit word, the typical case after a branch.
//
// NextPC is selected from five candidates, and NextPC_2 from the five
// values two bytes above them, with the same select:
//
//   branch miss from MA   TruePC          TruePC_2   (from the pipeline)
//   load-use stall        PC              PC_2
//   predicted taken       PredPC          PredPC_2   (adder after the BTB)
//   16-bit instruction    PC + 2          PC_2 + 2
//   32-bit instruction    PC + 4          PC_2 + 4
//
// PC_2 is therefore never computed from NextPC, which would put an adder
// behind the PC multiplexer on the critical path: every candidate's "+2"
// copy is ready when the select arrives. This duplication is the paper's
// proposal. The priority between the candidates and the reset behaviour
// (valid is low until the first NextPC, supplied by the core through the
// TruePC input, has been fetched) are this design's choices.
//
// Timing: next_pc / next_pc_2 go to the synchronous-read instruction memory
// and the branch predictor; pc, pc_2 and the memory data describe the same
// instruction one cycle later. The instruction word output is the two memory
// read ports joined, {imem_q_b, imem_q_a}, with no register or logic between:
// its bits come straight from inputs on purpose.
module rvcp_fetch
  import rvcp_pkg::*;
(
  input  logic  clk,
  input  logic  rst,
  input  logic  miss,
  input  word_t true_pc,
  input  word_t true_pc_2,
  input  logic  stall,
  input  logic  pred_taken,
  input  word_t pred_pc,
  input  word_t pred_pc_2,
  input  logic [15:0] imem_q_a,
  input  logic [15:0] imem_q_b,
  output word_t next_pc,
  output word_t next_pc_2,
  output word_t pc,
  output word_t pc_2,
  output word_t inst,
  output logic  comp,
  output logic  valid
);
  assign inst = {imem_q_b, imem_q_a};
  assign comp = is_comp(imem_q_a[1:0]);

  always_comb begin
    if (miss) begin
      next_pc = true_pc;   next_pc_2 = true_pc_2;
    end else if (stall) begin
      next_pc = pc;        next_pc_2 = pc_2;
    end else if (pred_taken) begin
      next_pc = pred_pc;   next_pc_2 = pred_pc_2;
    end else if (comp) begin
      next_pc = pc + 32'd2; next_pc_2 = pc_2 + 32'd2;
    end else begin
      next_pc = pc + 32'd4; next_pc_2 = pc_2 + 32'd4;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      pc    <= '0;
      pc_2  <= 32'd2;
      valid <= 1'b0;
    end else begin
      pc    <= next_pc;
      pc_2  <= next_pc_2;
      valid <= 1'b1;
    end
  end

  // PC_2 is a separate register but must always equal PC + 2.
  a_pc2: assert property (@(posedge clk) disable iff (rst) pc_2 == pc + 32'd2);
endmodule
