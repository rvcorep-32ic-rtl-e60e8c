// rvcp_pdec_id: ID-stage parallel decoder (ParallelDecoderID) with the IMM_2 adder.
//
// The instruction held in the IF/ID register is decoded twice at the same
// time: once as a 32-bit RV32I instruction and once as a 16-bit RV32C
// instruction, each straight into the micro code (uop_t). The Comp bit
// selects one of the two results. No decompressor sits in front of the
// decoder, which is the point of the paper's ParallelDecoderID: expanding
// the 16-bit instruction first would lengthen the path that produces IMM
// and, behind it, IMM_2.
//
// IMM_2 = IMM + 2 is computed right after the decoder so that the EX stage
// can form TakenPC_2 = ALU_IN1 + IMM_2 in parallel with TakenPC.
//
// Interface: purely combinational. inst is the instruction word (a 16-bit
// instruction sits in bits 15:0), comp says which half of the decoder to
// use. Unknown encodings, FENCE, ECALL, EBREAK and CSR accesses decode to a
// no-op; the paper covers RV32IC only and names no system instructions, so
// that choice, like the micro-code format, is this design's.
module rvcp_pdec_id
  import rvcp_pkg::*;
(
  input  word_t inst,
  input  logic  comp,
  output uop_t  uop,
  output word_t imm_2
);

  uop_t u32, u16;

  function automatic uop_t nop_uop();
    uop_t u;
    u = '0;
    u.alu_op   = ALU_ADD;
    u.src1     = SRC1_RS1;
    u.br       = BR_NONE;
    u.mem_size = MEM_W;
    return u;
  endfunction

  // ---------------------------------------------------------------- 32-bit
  always_comb begin
    logic [6:0] opc;
    logic [2:0] f3;
    logic [6:0] f7;
    word_t imm_i, imm_s, imm_b, imm_u, imm_j;
    opc   = inst[6:0];
    f3    = inst[14:12];
    f7    = inst[31:25];
    imm_i = {{20{inst[31]}}, inst[31:20]};
    imm_s = {{20{inst[31]}}, inst[31:25], inst[11:7]};
    imm_b = {{19{inst[31]}}, inst[31], inst[7], inst[30:25], inst[11:8], 1'b0};
    imm_u = {inst[31:12], 12'b0};
    imm_j = {{11{inst[31]}}, inst[31], inst[19:12], inst[20], inst[30:21], 1'b0};
    u32 = nop_uop();
    u32.rs1 = inst[19:15];
    u32.rs2 = inst[24:20];
    u32.rd  = inst[11:7];
    unique case (opc)
      7'b0110111: begin // LUI
        u32.alu_op = ALU_PASSB; u32.use_imm = 1'b1; u32.imm = imm_u; u32.rd_we = 1'b1;
      end
      7'b0010111: begin // AUIPC
        u32.src1 = SRC1_PC; u32.use_imm = 1'b1; u32.imm = imm_u; u32.rd_we = 1'b1;
      end
      7'b1101111: begin // JAL
        u32.br = BR_JAL; u32.src1 = SRC1_PC; u32.imm = imm_j; u32.rd_we = 1'b1;
      end
      7'b1100111: begin // JALR
        u32.br = BR_JALR; u32.use_rs1 = 1'b1; u32.imm = imm_i; u32.rd_we = 1'b1;
      end
      7'b1100011: begin // branches
        if (f3 != 3'b010 && f3 != 3'b011) begin
          u32.br = BR_COND; u32.br_cond = f3; u32.src1 = SRC1_PC;
          u32.use_rs1 = 1'b1; u32.use_rs2 = 1'b1; u32.imm = imm_b;
        end
      end
      7'b0000011: begin // loads
        if (f3 inside {3'b000, 3'b001, 3'b010, 3'b100, 3'b101}) begin
          u32.is_load = 1'b1; u32.use_rs1 = 1'b1; u32.use_imm = 1'b1; u32.imm = imm_i;
          u32.mem_size = mem_size_e'(f3[1:0]);
          u32.mem_uns = f3[2]; u32.rd_we = 1'b1;
        end
      end
      7'b0100011: begin // stores
        if (f3 inside {3'b000, 3'b001, 3'b010}) begin
          u32.is_store = 1'b1; u32.use_rs1 = 1'b1; u32.use_rs2 = 1'b1; u32.use_imm = 1'b1;
          u32.imm = imm_s; u32.mem_size = mem_size_e'(f3[1:0]);
        end
      end
      7'b0010011: begin // OP-IMM
        u32.use_rs1 = 1'b1; u32.use_imm = 1'b1; u32.imm = imm_i; u32.rd_we = 1'b1;
        unique case (f3)
          3'b000: u32.alu_op = ALU_ADD;
          3'b010: u32.alu_op = ALU_SLT;
          3'b011: u32.alu_op = ALU_SLTU;
          3'b100: u32.alu_op = ALU_XOR;
          3'b110: u32.alu_op = ALU_OR;
          3'b111: u32.alu_op = ALU_AND;
          3'b001: u32.alu_op = ALU_SLL;
          default: u32.alu_op = f7[5] ? ALU_SRA : ALU_SRL;
        endcase
      end
      7'b0110011: begin // OP
        u32.use_rs1 = 1'b1; u32.use_rs2 = 1'b1; u32.rd_we = 1'b1;
        unique case (f3)
          3'b000: u32.alu_op = f7[5] ? ALU_SUB : ALU_ADD;
          3'b001: u32.alu_op = ALU_SLL;
          3'b010: u32.alu_op = ALU_SLT;
          3'b011: u32.alu_op = ALU_SLTU;
          3'b100: u32.alu_op = ALU_XOR;
          3'b101: u32.alu_op = f7[5] ? ALU_SRA : ALU_SRL;
          3'b110: u32.alu_op = ALU_OR;
          default: u32.alu_op = ALU_AND;
        endcase
      end
      default: ; // FENCE, SYSTEM, unknown: no-op
    endcase
    if (u32.rd == 5'd0) u32.rd_we = 1'b0;
    if (!u32.use_rs1) u32.rs1 = 5'd0;
    if (!u32.use_rs2) u32.rs2 = 5'd0;
  end

  // ---------------------------------------------------------------- 16-bit
  always_comb begin
    logic [15:0] c;
    reg_t rdp, rs2p, rfull, r2full;
    c      = inst[15:0];
    rdp    = {2'b01, c[4:2]};
    rs2p   = {2'b01, c[4:2]};
    rfull  = c[11:7];
    r2full = c[6:2];
    u16 = nop_uop();
    unique case ({c[1:0], c[15:13]})
      // quadrant 0
      5'b00_000: begin // C.ADDI4SPN
        if (c[12:5] != 8'd0) begin
          u16.rs1 = 5'd2; u16.use_rs1 = 1'b1; u16.rd = rdp; u16.rd_we = 1'b1; u16.use_imm = 1'b1;
          u16.imm = {22'd0, c[10:7], c[12:11], c[5], c[6], 2'b00};
        end
      end
      5'b00_010: begin // C.LW
        u16.is_load = 1'b1; u16.rs1 = {2'b01, c[9:7]}; u16.use_rs1 = 1'b1; u16.rd = rdp;
        u16.rd_we = 1'b1; u16.use_imm = 1'b1; u16.mem_size = MEM_W;
        u16.imm = {25'd0, c[5], c[12:10], c[6], 2'b00};
      end
      5'b00_110: begin // C.SW
        u16.is_store = 1'b1; u16.rs1 = {2'b01, c[9:7]}; u16.use_rs1 = 1'b1; u16.rs2 = rs2p;
        u16.use_rs2 = 1'b1; u16.use_imm = 1'b1; u16.mem_size = MEM_W;
        u16.imm = {25'd0, c[5], c[12:10], c[6], 2'b00};
      end
      // quadrant 1
      5'b01_000: begin // C.ADDI / C.NOP
        u16.rs1 = rfull; u16.use_rs1 = 1'b1; u16.rd = rfull; u16.rd_we = 1'b1; u16.use_imm = 1'b1;
        u16.imm = {{27{c[12]}}, c[6:2]};
      end
      5'b01_001, 5'b01_101: begin // C.JAL, C.J
        u16.br = BR_JAL; u16.src1 = SRC1_PC; u16.rd = c[15] ? 5'd0 : 5'd1; u16.rd_we = !c[15];
        u16.imm = {{21{c[12]}}, c[8], c[10:9], c[6], c[7], c[2], c[11], c[5:3], 1'b0};
      end
      5'b01_010: begin // C.LI
        u16.src1 = SRC1_ZERO; u16.rd = rfull; u16.rd_we = 1'b1; u16.use_imm = 1'b1;
        u16.imm = {{27{c[12]}}, c[6:2]};
      end
      5'b01_011: begin
        if (rfull == 5'd2) begin // C.ADDI16SP
          u16.rs1 = 5'd2; u16.use_rs1 = 1'b1; u16.rd = 5'd2; u16.rd_we = 1'b1; u16.use_imm = 1'b1;
          u16.imm = {{23{c[12]}}, c[4:3], c[5], c[2], c[6], 4'b0000};
        end else begin // C.LUI
          u16.alu_op = ALU_PASSB; u16.rd = rfull; u16.rd_we = 1'b1; u16.use_imm = 1'b1;
          u16.imm = {{15{c[12]}}, c[6:2], 12'd0};
        end
      end
      5'b01_100: begin // C.SRLI, C.SRAI, C.ANDI, C.SUB/XOR/OR/AND
        u16.rs1 = {2'b01, c[9:7]}; u16.use_rs1 = 1'b1; u16.rd = {2'b01, c[9:7]}; u16.rd_we = 1'b1;
        unique case (c[11:10])
          2'b00: begin u16.alu_op = ALU_SRL; u16.use_imm = 1'b1; u16.imm = {27'd0, c[6:2]}; end
          2'b01: begin u16.alu_op = ALU_SRA; u16.use_imm = 1'b1; u16.imm = {27'd0, c[6:2]}; end
          2'b10: begin u16.alu_op = ALU_AND; u16.use_imm = 1'b1; u16.imm = {{27{c[12]}}, c[6:2]}; end
          default: begin
            u16.rs2 = rs2p; u16.use_rs2 = 1'b1;
            unique case (c[6:5])
              2'b00: u16.alu_op = ALU_SUB;
              2'b01: u16.alu_op = ALU_XOR;
              2'b10: u16.alu_op = ALU_OR;
              default: u16.alu_op = ALU_AND;
            endcase
          end
        endcase
      end
      5'b01_110, 5'b01_111: begin // C.BEQZ, C.BNEZ
        u16.br = BR_COND; u16.br_cond = c[13] ? F3_BNE : F3_BEQ; u16.src1 = SRC1_PC;
        u16.rs1 = {2'b01, c[9:7]}; u16.use_rs1 = 1'b1; u16.rs2 = 5'd0; u16.use_rs2 = 1'b1;
        u16.imm = {{24{c[12]}}, c[6:5], c[2], c[11:10], c[4:3], 1'b0};
      end
      // quadrant 2
      5'b10_000: begin // C.SLLI
        u16.alu_op = ALU_SLL; u16.rs1 = rfull; u16.use_rs1 = 1'b1; u16.rd = rfull; u16.rd_we = 1'b1;
        u16.use_imm = 1'b1; u16.imm = {27'd0, c[6:2]};
      end
      5'b10_010: begin // C.LWSP
        if (rfull != 5'd0) begin
          u16.is_load = 1'b1; u16.rs1 = 5'd2; u16.use_rs1 = 1'b1; u16.rd = rfull; u16.rd_we = 1'b1;
          u16.use_imm = 1'b1; u16.mem_size = MEM_W;
          u16.imm = {24'd0, c[3:2], c[12], c[6:4], 2'b00};
        end
      end
      5'b10_100: begin
        if (!c[12]) begin
          if (r2full == 5'd0) begin // C.JR
            if (rfull != 5'd0) begin
              u16.br = BR_JALR; u16.rs1 = rfull; u16.use_rs1 = 1'b1; u16.rd = 5'd0;
            end
          end else begin // C.MV
            u16.src1 = SRC1_ZERO; u16.rs2 = r2full; u16.use_rs2 = 1'b1; u16.rd = rfull; u16.rd_we = 1'b1;
          end
        end else begin
          if (r2full == 5'd0) begin
            if (rfull != 5'd0) begin // C.JALR (C.EBREAK otherwise: no-op)
              u16.br = BR_JALR; u16.rs1 = rfull; u16.use_rs1 = 1'b1; u16.rd = 5'd1; u16.rd_we = 1'b1;
            end
          end else begin // C.ADD
            u16.rs1 = rfull; u16.use_rs1 = 1'b1; u16.rs2 = r2full; u16.use_rs2 = 1'b1;
            u16.rd = rfull; u16.rd_we = 1'b1;
          end
        end
      end
      5'b10_110: begin // C.SWSP
        u16.is_store = 1'b1; u16.rs1 = 5'd2; u16.use_rs1 = 1'b1; u16.rs2 = r2full; u16.use_rs2 = 1'b1;
        u16.use_imm = 1'b1; u16.mem_size = MEM_W; u16.imm = {24'd0, c[8:7], c[12:9], 2'b00};
      end
      default: ; // floating-point and reserved encodings: no-op
    endcase
    if (u16.rd == 5'd0) u16.rd_we = 1'b0;
  end

  assign uop   = comp ? u16 : u32;
  assign imm_2 = uop.imm + 32'd2;

endmodule
