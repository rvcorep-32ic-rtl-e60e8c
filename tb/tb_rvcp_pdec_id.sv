// tb_rvcp_pdec_id: two copies of the decoder. Random 16-bit instructions go
// into one copy with comp = 1 and their reference expansion into the other
// with comp = 0; the two micro-code words must mean the same (x0 sources
// and shift-immediate upper bits are normalised away). Directed 32-bit
// instructions check each immediate format, IMM_2 = IMM + 2, the ALU
// operation of every OP/OP-IMM encoding and the load/store sizes.
module tb_rvcp_pdec_id;
  import rvcp_pkg::*;
  import rvcp_tb_pkg::*;
  word_t i16, i32, imm2a, imm2b; uop_t ua, ub;
  int checks = 0, failures = 0;
  rvcp_pdec_id dut16 (.inst(i16), .comp(1'b1), .uop(ua), .imm_2(imm2a));
  rvcp_pdec_id dut32 (.inst(i32), .comp(1'b0), .uop(ub), .imm_2(imm2b));

  function automatic uop_t norm(uop_t u);
    if (u.src1 == SRC1_RS1 && (!u.use_rs1 || u.rs1 == 0)) u.src1 = SRC1_ZERO;
    u.use_rs1 = u.use_rs1 && u.rs1 != 0; if (!u.use_rs1) u.rs1 = 0;
    u.use_rs2 = u.use_rs2 && u.rs2 != 0; if (!u.use_rs2) u.rs2 = 0;
    if (!u.rd_we) u.rd = 0;
    if (u.alu_op inside {ALU_SLL, ALU_SRL, ALU_SRA} && u.use_imm) u.imm[31:5] = 0;
    if (!u.is_load && !u.is_store) begin u.mem_size = MEM_W; u.mem_uns = 0; end
    return u;
  endfunction

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", s); end
  endtask

  initial begin
    #1_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int n16 = 0;
    // 16-bit against expansion
    for (int n = 0; n < 30000; n++) begin
      logic [15:0] c; word_t e;
      c = 16'($urandom);
      if (c[1:0] == 2'b11) continue;
      e = expand16(c);
      if (e == 0 || e == 32'h0010_0073) continue;
      i16 = {16'd0, c}; i32 = e; #1;
      n16++;
      chk(norm(ua) == norm(ub), $sformatf("c=%h e=%h\n  16: %p\n  32: %p", c, e, norm(ua), norm(ub)));
      chk(imm2a == ua.imm + 2, "imm_2 (16-bit)");
    end
    chk(n16 > 10000, "too few 16-bit instructions");
    // 32-bit immediates
    for (int n = 0; n < 3000; n++) begin
      int imm; word_t x;
      imm = int'($signed(12'($urandom)));
      i32 = enc_i(imm, 5, 0, 6, 7'h13); #1;
      chk(ub.imm == word_t'(imm) && imm2b == word_t'(imm + 2) && ub.alu_op == ALU_ADD && ub.use_imm, "I-type");
      i32 = enc_s(imm, 7, 5, 2, 7'h23); #1;
      chk(ub.imm == word_t'(imm) && ub.is_store && ub.mem_size == MEM_W && !ub.rd_we, "S-type");
      imm = int'($signed(13'($urandom))) & ~1;
      i32 = enc_b(imm, 7, 5, 6); #1;
      chk(ub.imm == word_t'(imm) && ub.br == BR_COND && ub.br_cond == 3'd6 && imm2b == word_t'(imm + 2), "B-type");
      imm = int'($signed(21'($urandom))) & ~1;
      i32 = enc_j(imm, 1); #1;
      chk(ub.imm == word_t'(imm) && ub.br == BR_JAL && ub.rd_we && ub.rd == 1, "J-type");
      x = $urandom;
      i32 = enc_u(int'(x[31:12]), 9, 7'h37); #1;
      chk(ub.imm == {x[31:12], 12'd0} && ub.alu_op == ALU_PASSB, "U-type");
    end
    // ALU operations
    begin
      alu_op_e r_ops[8] = '{ALU_ADD, ALU_SLL, ALU_SLT, ALU_SLTU, ALU_XOR, ALU_SRL, ALU_OR, ALU_AND};
      for (int f3 = 0; f3 < 8; f3++) begin
        i32 = enc_r(0, 3, 4, f3, 5, 7'h33); #1;
        chk(ub.alu_op == r_ops[f3] && !ub.use_imm && ub.use_rs2, $sformatf("OP f3=%0d", f3));
        i32 = enc_i(f3 == 1 || f3 == 5 ? 3 : 100, 4, f3, 5, 7'h13); #1;
        chk(ub.alu_op == r_ops[f3] && ub.use_imm, $sformatf("OP-IMM f3=%0d", f3));
      end
      i32 = enc_r(7'h20, 3, 4, 0, 5, 7'h33); #1; chk(ub.alu_op == ALU_SUB, "SUB");
      i32 = enc_r(7'h20, 3, 4, 5, 5, 7'h33); #1; chk(ub.alu_op == ALU_SRA, "SRA");
      i32 = enc_r(7'h20, 3, 4, 5, 5, 7'h13); #1; chk(ub.alu_op == ALU_SRA, "SRAI");
      for (int f3 = 0; f3 < 6; f3++) begin
        if (f3 == 3) continue;
        i32 = enc_i(4, 2, f3, 10, 7'h03); #1;
        chk(ub.is_load && ub.mem_size == mem_size_e'(f3 & 3) && ub.mem_uns == (f3 >= 4), $sformatf("load f3=%0d", f3));
      end
      i32 = enc_i(8, 5, 0, 1, 7'h67); #1;
      chk(ub.br == BR_JALR && ub.rd == 1 && ub.rd_we && ub.imm == 8, "JALR");
      i32 = enc_u(5, 3, 7'h17); #1;
      chk(ub.src1 == SRC1_PC && ub.imm == 32'h5000 && ub.rd_we, "AUIPC");
      i32 = 32'h0000_0073; #1;
      chk(!ub.rd_we && ub.br == BR_NONE && !ub.is_store, "ECALL as no-op");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
