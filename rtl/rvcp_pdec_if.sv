// rvcp_pdec_if: IF-stage parallel decoder (ParallelDecoderIF).
//
// Extracts, straight from the fetched instruction word, the register
// numbers the ID stage will read, the destination register and whether the
// instruction is a load. A 32-bit decode and a 16-bit (RV32C) decode run side
// by side and the Comp bit (inst[1:0] != 2'b11) picks one, so no
// decompressor lies on the path from the instruction memory to the load-use
// check; that arrangement is the paper's. The output record (if_dec_t) is
// registered into IF/ID and used for the register-file read in ID and by the
// load-use check; its fields are this design's choice.
//
// Purely combinational.
module rvcp_pdec_if
  import rvcp_pkg::*;
(
  input  word_t   inst,
  output if_dec_t dec
);

  if_dec_t d32, d16;

  always_comb begin
    logic [6:0] opc;
    opc = inst[6:0];
    d32 = '0;
    d32.rs1 = inst[19:15];
    d32.rs2 = inst[24:20];
    d32.rd  = inst[11:7];
    unique case (opc)
      7'b0110111, 7'b0010111, 7'b1101111: d32.rd_we = 1'b1;                       // LUI AUIPC JAL
      7'b1100111, 7'b0010011:             begin d32.use_rs1 = 1'b1; d32.rd_we = 1'b1; end // JALR OP-IMM
      7'b1100011, 7'b0100011:             begin d32.use_rs1 = 1'b1; d32.use_rs2 = 1'b1; end // BRANCH STORE
      7'b0000011:                         begin d32.use_rs1 = 1'b1; d32.rd_we = 1'b1; d32.is_load = 1'b1; end
      7'b0110011:                         begin d32.use_rs1 = 1'b1; d32.use_rs2 = 1'b1; d32.rd_we = 1'b1; end
      default: ;
    endcase
  end

  always_comb begin
    logic [15:0] c;
    c = inst[15:0];
    d16 = '0;
    unique case ({c[1:0], c[15:13]})
      5'b00_000: begin d16.rs1 = 5'd2; d16.use_rs1 = 1'b1; d16.rd = {2'b01, c[4:2]}; d16.rd_we = 1'b1; end
      5'b00_010: begin d16.rs1 = {2'b01, c[9:7]}; d16.use_rs1 = 1'b1; d16.rd = {2'b01, c[4:2]};
                       d16.rd_we = 1'b1; d16.is_load = 1'b1; end
      5'b00_110: begin d16.rs1 = {2'b01, c[9:7]}; d16.use_rs1 = 1'b1; d16.rs2 = {2'b01, c[4:2]}; d16.use_rs2 = 1'b1; end
      5'b01_000, 5'b10_000: begin d16.rs1 = c[11:7]; d16.use_rs1 = 1'b1; d16.rd = c[11:7]; d16.rd_we = 1'b1; end
      5'b01_001: begin d16.rd = 5'd1; d16.rd_we = 1'b1; end
      5'b01_010: begin d16.rd = c[11:7]; d16.rd_we = 1'b1; end
      5'b01_011: begin d16.rd = c[11:7]; d16.rd_we = 1'b1;
                       if (c[11:7] == 5'd2) begin d16.rs1 = 5'd2; d16.use_rs1 = 1'b1; end end
      5'b01_100: begin d16.rs1 = {2'b01, c[9:7]}; d16.use_rs1 = 1'b1; d16.rd = {2'b01, c[9:7]}; d16.rd_we = 1'b1;
                       if (c[11:10] == 2'b11) begin d16.rs2 = {2'b01, c[4:2]}; d16.use_rs2 = 1'b1; end end
      5'b01_110, 5'b01_111: begin d16.rs1 = {2'b01, c[9:7]}; d16.use_rs1 = 1'b1; end
      5'b10_010: begin d16.rs1 = 5'd2; d16.use_rs1 = 1'b1; d16.rd = c[11:7]; d16.rd_we = 1'b1; d16.is_load = 1'b1; end
      5'b10_100: begin
        if (c[6:2] == 5'd0) begin            // C.JR / C.JALR / C.EBREAK
          d16.rs1 = c[11:7]; d16.use_rs1 = 1'b1;
          if (c[12]) begin d16.rd = 5'd1; d16.rd_we = 1'b1; end
        end else begin                       // C.MV / C.ADD
          d16.rs2 = c[6:2]; d16.use_rs2 = 1'b1; d16.rd = c[11:7]; d16.rd_we = 1'b1;
          if (c[12]) begin d16.rs1 = c[11:7]; d16.use_rs1 = 1'b1; end
        end
      end
      5'b10_110: begin d16.rs1 = 5'd2; d16.use_rs1 = 1'b1; d16.rs2 = c[6:2]; d16.use_rs2 = 1'b1; end
      default: ;
    endcase
  end

  always_comb begin
    dec = is_comp(inst[1:0]) ? d16 : d32;
    if (!dec.use_rs1) dec.rs1 = 5'd0;
    if (!dec.use_rs2) dec.rs2 = 5'd0;
    if (dec.rd == 5'd0) begin dec.rd_we = 1'b0; dec.is_load = 1'b0; end
  end

endmodule
