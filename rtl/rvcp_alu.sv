// rvcp_alu: integer ALU of the EX stage.
//
// Produces the two results the paper's pipeline diagram labels Arithmetic
// Result (RV32I arithmetic, logic, shift and compare operations) and Branch
// Result (the condition of a conditional branch, selected by funct3). The
// branch condition compares the two forwarded register operands, while the
// arithmetic part sees the operand muxes' outputs. Combinational.
module rvcp_alu
  import rvcp_pkg::*;
(
  input  alu_op_e    op,
  input  word_t      a,
  input  word_t      b,
  output word_t      y,
  input  logic [2:0] br_cond,
  input  word_t      br_a,
  input  word_t      br_b,
  output logic       br_true
);
  always_comb begin
    unique case (op)
      ALU_ADD:   y = a + b;
      ALU_SUB:   y = a - b;
      ALU_SLL:   y = a << b[4:0];
      ALU_SLT:   y = {31'd0, $signed(a) < $signed(b)};
      ALU_SLTU:  y = {31'd0, a < b};
      ALU_XOR:   y = a ^ b;
      ALU_SRL:   y = a >> b[4:0];
      ALU_SRA:   y = word_t'($signed(a) >>> b[4:0]);
      ALU_OR:    y = a | b;
      ALU_AND:   y = a & b;
      default:   y = b;   // ALU_PASSB
    endcase
  end

  always_comb begin
    unique case (br_cond)
      F3_BEQ:  br_true = br_a == br_b;
      F3_BNE:  br_true = br_a != br_b;
      F3_BLT:  br_true = $signed(br_a) < $signed(br_b);
      F3_BGE:  br_true = $signed(br_a) >= $signed(br_b);
      F3_BLTU: br_true = br_a < br_b;
      F3_BGEU: br_true = br_a >= br_b;
      default: br_true = 1'b0;
    endcase
  end
endmodule
