// tb_rvcp_top: end-to-end test of RVCoreP-32IC at its default size.
//
// Part 1, directed timing: small hand-assembled programs whose cycle counts
// are known in advance.
//   - A loop whose four 32-bit instructions all start at addresses that are
//     2 mod 4 (every one straddles a 32-bit word): once the predictor has
//     learned the loop branch the loop must retire one instruction per clock,
//     i.e. neither the misaligned fetch nor the taken branch costs a cycle.
//   - The loop exit is mispredicted: the next instruction must retire four
//     clocks after the branch (three squashed slots).
//   - A load followed by a user of its result: exactly one bubble.
// Part 2, random programs: several generated RV32IC programs (loops, calls,
// forward branches of both lengths, loads/stores of every size, load-use
// pairs, 16/32-bit mixes) run to completion; every retired instruction is
// compared with the instruction-set model in lock step (PC, instruction,
// register write, store).
// Every pipeline mechanism reported on the events port must occur at least
// once over the run. Memories, BTB and PHT are used at their default sizes.
module tb_rvcp_top;
  import rvcp_pkg::*;
  import rvcp_tb_pkg::*;

  localparam int unsigned IAW = 14;   // $clog2(32768 / 2) for the default IMEM

  logic           clk = 1'b0;
  logic           rst = 1'b1;
  logic           imem_init_we = 1'b0;
  logic [IAW-1:0] imem_init_addr = '0;
  logic [15:0]    imem_init_data = '0;
  logic           dmem_init_we = 1'b0;
  word_t          dmem_init_addr = '0;
  word_t          dmem_init_data = '0;
  retire_t        retire;
  events_t        events;

  rvcp_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // event counters
  int unsigned n_luse, n_miss, n_pred, n_bpw, n_bpblk, n_fma, n_fwb, n_fid, n_strad, n_comp;
  always @(posedge clk) if (!rst) begin
    n_luse  += events.load_use_stall;
    n_miss  += events.branch_miss;
    n_pred  += events.pred_taken;
    n_bpw   += events.bp_write;
    n_bpblk += events.bp_write_block;
    n_fma   += events.fwd_ma;
    n_fwb   += events.fwd_wb;
    n_fid   += events.fwd_id;
    n_strad += events.fetch_straddle;
    n_comp  += events.retire_comp;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // load a program and data into the DUT (core held in reset) and the model
  task automatic load(rv_progen g, rv_iss iss, int unsigned dwords);
    rst = 1'b1;
    foreach (g.hw[k]) begin
      @(negedge clk);
      imem_init_we = 1'b1; imem_init_addr = IAW'(k); imem_init_data = g.hw[k];
      iss.imem[k] = g.hw[k];
    end
    for (int k = 0; k < int'(dwords); k++) begin
      word_t v;
      v = $urandom;
      @(negedge clk);
      imem_init_we = 1'b0;
      dmem_init_we = 1'b1; dmem_init_addr = g.data_base + 4 * k; dmem_init_data = v;
      iss.dmem[int'((g.data_base >> 2) + k)] = v;
    end
    @(negedge clk);
    imem_init_we = 1'b0; dmem_init_we = 1'b0;
    iss.pc = 0;
  endtask

  // run until the halt instruction retires; compare each retirement
  task automatic run(rv_progen g, rv_iss iss, ref longint retire_cycle[$], ref word_t retire_pc[$],
                     input int max_cycles, output int n_ret);
    iss_rec_t e;
    int c;
    n_ret = 0;
    retire_cycle.delete(); retire_pc.delete();
    @(negedge clk); rst = 1'b0;
    for (c = 0; c < max_cycles; c++) begin
      @(posedge clk); #1;
      if (retire.valid) begin
        e = iss.step();
        n_ret++;
        retire_cycle.push_back(cycle);
        retire_pc.push_back(retire.pc);
        check(retire.pc == e.pc && retire.inst == e.inst,
              $sformatf("pc/inst %h/%h expected %h/%h", retire.pc, retire.inst, e.pc, e.inst));
        check(retire.rd_we == e.rd_we && (!e.rd_we || (retire.rd == reg_t'(e.rd) && retire.rd_val == e.rd_val)),
              $sformatf("pc %h write x%0d=%h (%0b) expected x%0d=%h (%0b)", e.pc, retire.rd,
                        retire.rd_val, retire.rd_we, e.rd, e.rd_val, e.rd_we));
        if (e.st_be != 0 || retire.st_be != 0)
          check(retire.st_be == e.st_be && retire.st_addr == e.st_addr &&
                (retire.st_data & {{8{e.st_be[3]}}, {8{e.st_be[2]}}, {8{e.st_be[1]}}, {8{e.st_be[0]}}}) ==
                (e.st_data & {{8{e.st_be[3]}}, {8{e.st_be[2]}}, {8{e.st_be[1]}}, {8{e.st_be[0]}}}),
                $sformatf("pc %h store %b@%h=%h expected %b@%h=%h", e.pc, retire.st_be, retire.st_addr,
                          retire.st_data, e.st_be, e.st_addr, e.st_data));
        if (retire.pc == g.halt_pc) break;
      end
    end
    check(c < max_cycles, "program did not reach its halt instruction");
    @(negedge clk); rst = 1'b1;
    repeat (2) @(negedge clk);
  endtask

  longint rc[$];
  word_t  rp[$];

  initial begin
    rv_progen g;
    rv_iss    iss;
    int       n, loop_pc, br_pc, lw_pc;
    longint   total_cycles = 0, total_ret = 0;

    repeat (3) @(negedge clk);

    // ---------------- directed 1: straddling loop, prediction, miss penalty
    g = new();
    g.hw.delete();
    g.e32(enc_i(40, 0, 0, 9, 7'h13));          // 0x00 addi x9, x0, 40
    g.e16(c_addi(10, 0));                      // 0x04 c.nop-like (x10 += 0)
    loop_pc = g.pc();                          // 0x06
    g.e32(enc_i(1, 10, 0, 10, 7'h13));         // 0x06 addi x10, x10, 1
    g.e32(enc_i(2, 11, 0, 11, 7'h13));         // 0x0a addi x11, x11, 2
    g.e32(enc_i(-1, 9, 0, 9, 7'h13));          // 0x0e addi x9, x9, -1
    br_pc = g.pc();
    g.e32(enc_b(loop_pc - br_pc, 0, 9, 1));    // 0x12 bne x9, x0, loop
    // a load followed by its user
    g.e32(enc_u(0, 2, 7'h37));                 // lui x2, 0
    g.e32(enc_i(g.data_base, 0, 0, 2, 7'h13)); // addi x2, x0, base
    lw_pc = g.pc();
    g.e32(enc_i(8, 2, 2, 12, 7'h03));          // lw x12, 8(x2)
    g.e32(enc_r(0, 12, 12, 0, 13, 7'h33));     // add x13, x12, x12
    g.halt_pc = g.pc();
    g.e16(c_jal_j(1, 0));
    g.e16(16'h0001); g.e16(16'h0001);
    iss = new();
    load(g, iss, 16);
    run(g, iss, rc, rp, 2000, n);
    begin
      int idx_first, idx_last, bubbles, i_br, i_lw;
      // retirements of the loop's 25th..38th iterations (history settled): 4 instructions each
      idx_first = 2 + 4 * 24;
      idx_last  = 2 + 4 * 38 - 1;
      bubbles = int'(rc[idx_last] - rc[idx_first]) - (idx_last - idx_first);
      check(bubbles == 0, $sformatf("trained straddling loop lost %0d cycles", bubbles));
      // final loop branch (not taken, predicted taken) -> next retire 4 cycles later
      i_br = 2 + 4 * 40 - 1;
      check(rp[i_br] == word_t'(br_pc) && rc[i_br + 1] - rc[i_br] == 4,
            $sformatf("miss penalty: %0d cycles between branch and successor", rc[i_br + 1] - rc[i_br]));
      i_lw = i_br + 3;
      check(rp[i_lw] == word_t'(lw_pc) && rc[i_lw + 1] - rc[i_lw] == 2,
            $sformatf("load-use: %0d cycles between load and user", rc[i_lw + 1] - rc[i_lw]));
      $display("directed: loop of 4 straddling 32-bit instructions, %0d bubbles over 14 trained iterations", bubbles);
    end

    // ---------------- random programs, lock-step against the model
    for (int p = 0; p < 8; p++) begin
      longint c0;
      g = new();
      g.build(60 + 20 * p);
      iss = new();
      load(g, iss, 64);
      c0 = cycle;
      run(g, iss, rc, rp, 200000, n);
      total_cycles += rc[$] - c0;
      total_ret += n;
      $display("program %0d: %0d halfwords (%0d x 16-bit, %0d x 32-bit), %0d retired in %0d cycles",
               p, g.hw.size(), g.n_comp, g.n_32, n, rc[$] - c0);
    end
    $display("random programs: IPC %0.3f", real'(total_ret) / real'(total_cycles));

    $display("events: load-use %0d, miss %0d, predicted-taken %0d, bp-write %0d, bp-write-blocked %0d,",
             n_luse, n_miss, n_pred, n_bpw, n_bpblk);
    $display("        fwd-MA %0d, fwd-WB %0d, bypass-ID %0d, straddling fetch %0d, 16-bit retired %0d",
             n_fma, n_fwb, n_fid, n_strad, n_comp);
    check(n_luse  > 0, "no load-use stall happened");
    check(n_miss  > 0, "no branch miss happened");
    check(n_pred  > 0, "no predicted-taken fetch happened");
    check(n_bpw   > 0, "no predictor write happened");
    check(n_bpblk > 0, "no blocked predictor write happened");
    check(n_fma   > 0, "no MA forwarding happened");
    check(n_fwb   > 0, "no WB forwarding happened");
    check(n_fid   > 0, "no ID bypass happened");
    check(n_strad > 0, "no straddling 32-bit fetch happened");
    check(n_comp  > 0, "no 16-bit instruction retired");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
