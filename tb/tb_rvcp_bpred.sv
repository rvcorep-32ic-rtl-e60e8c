// tb_rvcp_bpred: directed tests of the two-cycle gshare/BTB lookup.
//  - Empty tables predict nothing.
//  - After one taken update for the branch that follows address P, fetching
//    P and then the branch gives a prediction in the branch's IF cycle,
//    PredPC = target and PredPC_2 = target + 2.
//  - The counter moves toward the real direction and saturates.
//  - The history register is part of the PHT index and is shifted on a hit.
//  - No prediction right after a predicted-taken instruction or a redirect.
//  - A non-branch update clears the BTB entry; adv = 0 holds the outputs.
// Then a random phase drives adv, redirect, restore, if_valid, fetch
// addresses from a small pool and table updates at random, and compares
// every output each cycle with a cycle-level model of the tables, the
// two-cycle lookup, the history and the prediction-valid rule, written here
// from the description above.
module tb_rvcp_bpred;
  import rvcp_pkg::*;
  logic clk = 0, rst = 1, adv = 1, redirect = 0, if_valid = 1, restore = 0;
  word_t next_pc = 0, pred_pc, pred_pc_2;
  logic pred_taken; pred_t info; bp_upd_t upd; bhr_t restore_bhr = 0;
  int checks = 0, failures = 0;
  localparam word_t P = 32'h0000_0320, T = 32'h0000_1234, P2 = 32'h0000_0a46, T2 = 32'h0000_0102;

  rvcp_bpred dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (pred %0b pc %h pc_2 %h info %p)", s, pred_taken, pred_pc, pred_pc_2, info); end
  endtask

  task automatic update(word_t prev, word_t tgt, bit is_br, bit taken, logic [1:0] cnt, bhr_t h);
    upd = '{we: 1'b1, is_br: is_br, taken: taken, prev_pc: prev, target: tgt, cnt: cnt, bhr_idx: h};
    next_pc = 32'h0000_0700;
    @(negedge clk);
    upd = '0;
  endtask

  // fetch 0x7f0 (history set to h), then p, then p + 4: the p + 4 cycle is sampled
  task automatic lookup(word_t p, bhr_t h);
    restore = 1; restore_bhr = h; next_pc = 32'h0000_07f0;
    @(negedge clk);
    restore = 0; next_pc = p;
    @(negedge clk);
    next_pc = p + 4;
    @(negedge clk);
  endtask

  initial begin
    #1_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    upd = '0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int k = 0; k < 20; k++) begin
      next_pc = 32'h200 + 4 * k;
      @(negedge clk);
      chk(!pred_taken, "empty tables predict nothing");
    end
    // taken branch after P, counter 01 -> 10
    update(P, T, 1, 1, 2'b01, '0);
    lookup(P, '0);
    chk(pred_taken && pred_pc == T && pred_pc_2 == T + 2 && info.cnt == 2'b10, "trained prediction");
    chk(info.taken == 1'b1 && info.target == T && info.bhr_idx == 0 && info.bhr_cur == 0, "info record");
    // adv = 0 holds everything
    adv = 0; next_pc = 32'h0000_0444;
    repeat (2) @(negedge clk);
    chk(pred_taken && pred_pc == T, "outputs held while adv = 0");
    adv = 1;
    // follow the prediction: the history takes a 1, the next lookup is suppressed
    next_pc = T;
    @(negedge clk);
    chk(info.bhr_cur == bhr_t'(1), "history shifted on a hit");
    chk(!pred_taken, "no prediction after a predicted-taken instruction");
    // a different history gives a different PHT entry
    lookup(P, bhr_t'(5));
    chk(!pred_taken && info.cnt == 2'b01 && info.bhr_idx == bhr_t'(5), "history selects another counter");
    update(P, T, 1, 1, 2'b01, bhr_t'(5));
    lookup(P, bhr_t'(5));
    chk(pred_taken && info.cnt == 2'b10, "counter trained under history 5");
    // redirect suppresses the lookup for the instruction it brings in
    restore = 1; restore_bhr = 0; next_pc = 32'h0000_07f0;
    @(negedge clk);
    restore = 0; next_pc = P;
    @(negedge clk);
    redirect = 1; next_pc = P + 4;
    @(negedge clk);
    redirect = 0;
    chk(!pred_taken && pred_pc == T, "no prediction after a redirect");
    // counter: 10 -> not taken -> 01, saturation at both ends
    update(P, T, 1, 0, 2'b10, '0);
    lookup(P, '0);
    chk(!pred_taken && info.cnt == 2'b01, "counter decremented");
    update(P, T, 1, 1, 2'b11, '0);
    lookup(P, '0);
    chk(pred_taken && info.cnt == 2'b11, "counter saturates at 11");
    update(P, T, 1, 0, 2'b00, '0);
    lookup(P, '0);
    chk(!pred_taken && info.cnt == 2'b00, "counter saturates at 00");
    // second entry; then clear it with a non-branch update
    update(P2, T2, 1, 1, 2'b10, '0);
    lookup(P2, '0);
    chk(pred_taken && pred_pc == T2 && pred_pc_2 == T2 + 2, "second entry");
    update(P2, T2, 0, 0, 2'b11, '0);
    lookup(P2, '0);
    chk(!pred_taken, "BTB entry cleared by a non-branch");
    // if_valid = 0 gives no prediction
    update(P2, T2, 1, 1, 2'b10, '0);
    restore = 1; restore_bhr = 0; next_pc = 32'h0000_07f0;
    @(negedge clk);
    restore = 0; next_pc = P2;
    @(negedge clk);
    next_pc = P2 + 4;
    @(negedge clk);
    if_valid = 0; #1;
    chk(!pred_taken, "no prediction for an invalid fetch");
    if_valid = 1; #1;
    chk(pred_taken, "prediction back with if_valid");
    random_phase();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- model
  logic [32:0] m_btb [512];     // {valid, target}
  logic [1:0]  m_pht [8192];
  logic [32:0] m_q, m_ent;
  word_t       m_prepc;
  logic [1:0]  m_cnt;
  bhr_t        m_bhr, m_bhr_idx;
  logic        m_pv;

  function automatic word_t pool_addr();
    return 32'h1000 + 2 * $urandom_range(0, 15);
  endfunction

  task automatic random_phase();
    int n_pred = 0;
    // bring the DUT and the model to the same state: reset, empty tables
    for (int k = 0; k < 512; k++) m_btb[k] = '0;
    for (int k = 0; k < 8192; k++) m_pht[k] = 2'b01;
    // clear every BTB entry and every reachable PHT entry in the DUT
    for (int k = 0; k < 512; k++) begin
      upd = '{we: 1'b1, is_br: 1'b0, taken: 1'b0, prev_pc: 32'(2 * k), target: '0, cnt: 2'b00, bhr_idx: '0};
      @(negedge clk);
    end
    upd = '0;
    rst = 1; adv = 1; redirect = 0; restore = 0; if_valid = 1;
    for (int k = 0; k < 4; k++) begin next_pc = pool_addr(); @(negedge clk); end
    // PHT entries touched below start at 01 in the model; set them in the DUT
    for (int h = 0; h < 8192; h++) begin
      upd = '{we: 1'b1, is_br: 1'b1, taken: 1'b1, prev_pc: 32'h1000, target: '0, cnt: 2'b00, bhr_idx: bhr_t'(h)};
      @(negedge clk);
    end
    for (int k = 0; k < 512; k++) begin
      upd = '{we: 1'b1, is_br: 1'b0, taken: 1'b0, prev_pc: 32'(2 * k), target: '0, cnt: 2'b00, bhr_idx: '0};
      @(negedge clk);
    end
    upd = '0;
    // the pool addresses 0x1000..0x101e index PHT rows 0x800..0x80f; with any
    // history the row is (0x800..0x80f) ^ h, i.e. all rows 0..8191 were set
    // to 01 above (the update wrote cnt 00 + taken = 01)
    for (int k = 0; k < 3; k++) begin next_pc = pool_addr(); @(negedge clk); end
    // model state after reset with adv = 1 for several cycles
    m_q = m_btb[next_pc[9:1]]; m_ent = '0; m_prepc = next_pc; m_cnt = 2'b01;
    m_bhr = '0; m_bhr_idx = '0; m_pv = 1'b0;
    rst = 0;
    // two plain cycles with no valid entries so that the model's registers
    // equal the DUT's regardless of the warm-up history
    for (int k = 0; k < 2; k++) begin
      logic [32:0] q_n; word_t p_n; logic [1:0] c_n;
      next_pc = pool_addr();
      @(posedge clk);
      q_n = m_btb[next_pc[9:1]]; c_n = m_pht[13'(m_prepc[13:1]) ^ m_bhr];
      m_ent = m_q; m_q = q_n; m_cnt = c_n; m_bhr_idx = m_bhr; m_prepc = next_pc;
      m_pv = 1'b1;
      @(negedge clk);
    end
    for (int n = 0; n < 20000; n++) begin
      logic hit, pt;
      logic [32:0] q_n; logic [1:0] c_n;
      adv = $urandom_range(0, 9) != 0;
      redirect = $urandom_range(0, 9) == 0;
      restore = $urandom_range(0, 19) == 0;
      restore_bhr = bhr_t'($urandom_range(0, 3));
      if_valid = $urandom_range(0, 19) != 0;
      next_pc = pool_addr();
      if ($urandom_range(0, 2) == 0)
        upd = '{we: 1'b1, is_br: $urandom_range(0, 5) != 0, taken: 1'($urandom), prev_pc: pool_addr(),
                target: {16'd0, 15'($urandom), 1'b0}, cnt: 2'($urandom), bhr_idx: bhr_t'($urandom_range(0, 3))};
      else upd = '0;
      #1;
      hit = m_pv && if_valid && m_ent[32];
      pt = hit && m_cnt[1];
      n_pred += pt;
      chk(pred_taken == pt && pred_pc == m_ent[31:0] && pred_pc_2 == m_ent[31:0] + 2 &&
          info.cnt == m_cnt && info.bhr_idx == m_bhr_idx && info.bhr_cur == m_bhr,
          $sformatf("random cycle %0d: expected pred %0b pc %h cnt %b bhr %h", n, pt, m_ent[31:0], m_cnt, m_bhr));
      @(posedge clk);
      // reads see the tables before this edge's writes
      q_n = m_btb[next_pc[9:1]];
      c_n = m_pht[13'(m_prepc[13:1]) ^ m_bhr];
      if (adv) begin
        m_ent = m_q; m_q = q_n; m_cnt = c_n; m_bhr_idx = m_bhr; m_prepc = next_pc;
      end
      if (restore) begin m_bhr = restore_bhr; m_pv = 1'b0; end
      else if (redirect) m_pv = 1'b0;
      else if (adv) begin
        if (hit) m_bhr = {m_bhr[BHR_W-2:0], pt};
        m_pv = !pt;
      end
      if (upd.we) begin
        int i;
        i = int'(13'(upd.prev_pc[13:1]) ^ upd.bhr_idx);
        if (upd.is_br) begin
          if (upd.taken) m_pht[i] = upd.cnt == 2'b11 ? 2'b11 : upd.cnt + 2'd1;
          else           m_pht[i] = upd.cnt == 2'b00 ? 2'b00 : upd.cnt - 2'd1;
          if (upd.taken) m_btb[upd.prev_pc[9:1]] = {1'b1, upd.target[31:1], 1'b0};
        end else m_btb[upd.prev_pc[9:1]] = '0;
      end
      @(negedge clk);
    end
    chk(n_pred > 500, $sformatf("random phase made only %0d predictions", n_pred));
  endtask
endmodule
