// tb_rvcp_truepc: random branch PCs, Comp bits, bases, immediates and
// directions. One clock after the EX inputs, TruePC must be the taken
// target (base + IMM, bit 0 cleared for JALR) or the fall-through
// (PC + 2 or 4), and TruePC_2 must be exactly TruePC + 2.
module tb_rvcp_truepc;
  import rvcp_pkg::*;
  logic clk = 0, comp, jalr, taken, ma_taken;
  word_t pc, base, imm, imm_2, below_pc, taken_pc_ex, ma_taken_pc, true_pc, true_pc_2;
  int checks = 0, failures = 0;
  rvcp_truepc dut (.clk, .en(1'b1), .ex_pc(pc), .ex_comp(comp), .ex_jalr(jalr), .ex_base(base),
                   .ex_imm(imm), .ex_imm_2(imm_2), .ex_taken(taken), .below_pc, .taken_pc_ex,
                   .ma_taken, .ma_taken_pc, .true_pc, .true_pc_2);
  always #5 clk = ~clk;
  initial begin
    #5_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int n = 0; n < 5000; n++) begin
      word_t exp, expb;
      @(negedge clk);
      pc = $urandom & ~32'd1; comp = 1'($urandom); jalr = 1'($urandom); taken = 1'($urandom);
      base = jalr ? $urandom : pc; imm = $urandom_range(0, 1) ? $urandom : 32'($signed(12'($urandom)));
      imm_2 = imm + 2;
      #1;
      expb = pc + (comp ? 2 : 4);
      checks++; if (below_pc !== expb) failures++;
      exp = taken ? ((base + imm) & (jalr ? ~32'd1 : ~32'd0)) : expb;
      @(posedge clk); #1;
      checks += 3;
      if (true_pc !== exp) begin failures++; if (failures < 10) $display("FAIL true_pc %h exp %h", true_pc, exp); end
      if (true_pc_2 !== exp + 2) begin failures++; if (failures < 10) $display("FAIL true_pc_2 %h exp %h", true_pc_2, exp + 2); end
      if (ma_taken !== taken) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
