// tb_rvcp_core: the pipeline alone, with instruction and data memories
// modelled here (synchronous read, as the block RAMs) and a deliberately
// small predictor (16 BTB and 64 PHT entries) so that table entries alias
// and wrong predictions of every kind occur: wrong direction, wrong target,
// and predictions for instructions that are not branches. Random RV32IC
// programs run to completion and every retirement is compared with the
// instruction-set model in lock step.
module tb_rvcp_core;
  import rvcp_pkg::*;
  import rvcp_tb_pkg::*;

  logic clk = 0, rst = 1;
  word_t imem_addr_a, imem_addr_b, dmem_addr, dmem_wdata, dmem_rdata;
  logic [15:0] imem_q_a, imem_q_b;
  logic [3:0] dmem_we;
  retire_t retire; events_t events;

  rvcp_core #(.BTB_ENTRIES(16), .PHT_ENTRIES(64)) dut (.*);

  logic [15:0] im [8192];
  word_t       dm [4096];
  always_ff @(posedge clk) begin
    imem_q_a   <= im[imem_addr_a[13:1]];
    imem_q_b   <= im[imem_addr_b[13:1]];
    dmem_rdata <= dm[dmem_addr[13:2]];
    for (int b = 0; b < 4; b++) if (dmem_we[b]) dm[dmem_addr[13:2]][8*b +: 8] <= dmem_wdata[8*b +: 8];
  end

  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_miss = 0, n_pred = 0, n_blk = 0;
  always @(posedge clk) if (!rst) begin
    n_miss += events.branch_miss; n_pred += events.pred_taken; n_blk += events.bp_write_block;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    #20_000_000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    rv_progen g; rv_iss iss; iss_rec_t e;
    foreach (im[k]) im[k] = 16'h0001;
    foreach (dm[k]) dm[k] = '0;
    repeat (2) @(negedge clk);
    for (int p = 0; p < 6; p++) begin
      int c, n;
      n = 0;
      g = new(); g.build(80 + 30 * p);
      iss = new();
      rst = 1;
      foreach (im[k]) im[k] = 16'h0001;
      foreach (g.hw[k]) begin im[k] = g.hw[k]; iss.imem[k] = g.hw[k]; end
      for (int k = 0; k < 64; k++) begin
        word_t v;
        v = $urandom;
        dm[(g.data_base >> 2) + k] = v; iss.dmem[int'((g.data_base >> 2) + k)] = v;
      end
      iss.pc = 0;
      repeat (2) @(negedge clk);
      rst = 0;
      for (c = 0; c < 200000; c++) begin
        @(posedge clk); #1;
        if (retire.valid) begin
          e = iss.step(); n++;
          check(retire.pc == e.pc && retire.inst == e.inst,
                $sformatf("pc/inst %h/%h expected %h/%h", retire.pc, retire.inst, e.pc, e.inst));
          check(retire.rd_we == e.rd_we && (!e.rd_we || (retire.rd == reg_t'(e.rd) && retire.rd_val == e.rd_val)),
                $sformatf("pc %h write x%0d=%h expected x%0d=%h", e.pc, retire.rd, retire.rd_val, e.rd, e.rd_val));
          if (e.st_be != 0 || retire.st_be != 0)
            check(retire.st_be == e.st_be && retire.st_addr == e.st_addr,
                  $sformatf("pc %h store %b@%h expected %b@%h", e.pc, retire.st_be, retire.st_addr, e.st_be, e.st_addr));
          if (retire.pc == g.halt_pc) break;
        end
      end
      check(c < 200000, "program did not reach its halt instruction");
      // data memory contents must equal the model's
      for (int k = 0; k < 64; k++)
        check(dm[(g.data_base >> 2) + k] == iss.dmem[int'((g.data_base >> 2) + k)], "data memory contents");
      $display("program %0d: %0d retired in %0d cycles", p, n, c);
      @(negedge clk);
    end
    check(n_miss > 0 && n_pred > 0 && n_blk > 0, "misses, predictions and blocked writes occurred");
    $display("misses %0d, predicted-taken %0d, blocked writes %0d", n_miss, n_pred, n_blk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
