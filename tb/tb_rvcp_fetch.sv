// tb_rvcp_fetch: the fetch unit with a synchronous-read 16-bit memory model
// of random contents. Each cycle a random mix of branch miss, load-use stall
// and predicted-taken inputs is applied. A reference PC, advanced here by
// the priority miss > stall > predicted > +2/+4, must match PC; PC_2 must be
// PC + 2; the instruction word must be the two entries at PC and PC + 2
// concatenated, so every 32-bit instruction, aligned or not, arrives in one
// cycle; NextPC_2 must always be NextPC + 2.
module tb_rvcp_fetch;
  import rvcp_pkg::*;
  logic clk = 0, rst = 1, miss = 0, stall = 0, pt = 0, comp, valid;
  word_t true_pc = 0, pred_pc = 0, next_pc, next_pc_2, pc, pc_2, inst;
  logic [15:0] q_a, q_b;
  logic [15:0] mem [1024];
  int checks = 0, failures = 0, n_straddle = 0;
  rvcp_fetch dut (.clk, .rst, .miss, .true_pc, .true_pc_2(true_pc + 32'd2), .stall, .pred_taken(pt),
                  .pred_pc, .pred_pc_2(pred_pc + 32'd2), .imem_q_a(q_a), .imem_q_b(q_b),
                  .next_pc, .next_pc_2, .pc, .pc_2, .inst, .comp, .valid);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    q_a <= mem[next_pc[10:1]];
    q_b <= mem[next_pc_2[10:1]];
  end
  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL %s", s); end
  endtask
  initial begin
    #5_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    word_t ref_pc;
    foreach (mem[k]) mem[k] = 16'($urandom);
    repeat (2) @(negedge clk);
    rst = 0; miss = 1; true_pc = 32'h10;      // first fetch through the TruePC input
    ref_pc = 32'h10;
    @(negedge clk);
    for (int n = 0; n < 5000; n++) begin
      logic [15:0] lo;
      chk(valid, "valid after the first fetch");
      chk(pc == ref_pc && pc_2 == ref_pc + 2, $sformatf("pc %h pc_2 %h expected %h", pc, pc_2, ref_pc));
      chk(inst == {mem[10'((ref_pc >> 1) + 1)], mem[10'(ref_pc >> 1)]}, "instruction word");
      lo = mem[10'(ref_pc >> 1)];
      chk(comp == (lo[1:0] != 2'b11), "comp");
      if (!comp && pc[1]) n_straddle++;
      miss = $urandom_range(0, 9) == 0; stall = $urandom_range(0, 5) == 0; pt = $urandom_range(0, 5) == 0;
      true_pc = {20'd0, 11'($urandom_range(0, 2047) & ~1), 1'b0};
      pred_pc = {20'd0, 11'($urandom_range(0, 2047) & ~1), 1'b0};
      #1;
      chk(next_pc_2 == next_pc + 2, "NextPC_2 = NextPC + 2");
      if (miss)       ref_pc = true_pc;
      else if (stall) ref_pc = ref_pc;
      else if (pt)    ref_pc = pred_pc;
      else            ref_pc = ref_pc + ((lo[1:0] != 2'b11) ? 2 : 4);
      chk(next_pc == ref_pc, "NextPC selection");
      @(negedge clk);
    end
    chk(n_straddle > 100, "straddling 32-bit instructions were seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
