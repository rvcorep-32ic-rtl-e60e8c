// rvcp_bpred: pipelined gshare branch predictor with BTB.
//
// Both tables are block RAMs with a registered read, and the BTB output is
// registered once more (PredPC) before it reaches the NextPC multiplexer, so
// a lookup takes two cycles. To predict the instruction in IF without a
// penalty cycle the lookup is started one instruction early: the tables are
// indexed with the address of the instruction fetched before it, which is
// the previous instruction in memory whenever the fetch ran sequentially.
//
//   cycle k-1: NextPC = address of I(k)            -> BTB read starts
//              PrePC  = address of I(k-1); PrePC ^ BHR -> PHT read starts
//   cycle k:   PredPC = BTB[I(k-1)], PredPC_2 = PredPC + 2 (adder right
//              after the BTB), PHT counter for I(k-1) ^ BHR
//              -> pred_taken for I(k) = BTB entry valid & counter[1]
//
// The paper gives this structure (BHR, PrePC, XOR, PHT, BTB, PredPC,
// PredPC_2, the 'comb' that forms the decision and the 'join' that shifts
// the prediction into the BHR, 512 BTB and 8,192 PHT entries in 4 KB of
// block RAM). The following are this design's choices: 2-bit counters
// starting weakly not-taken; a 13-bit history; BTB entries without a tag,
// holding target[31:1] with bit 0 used as the valid flag so that
// 512 x 32 bits plus 8,192 x 2 bits make the paper's 4 KB; no prediction for
// the first instruction after a redirect or after a predicted-taken
// instruction (the previous fetched instruction is then not its memory
// predecessor); the BHR is shifted speculatively when the BTB entry is valid
// and repaired from the copy carried with the instruction on a miss.
//
// Interface: adv is high when IF moves on (registers hold otherwise),
// redirect when NextPC comes from the MA stage. pred_* and info describe
// the IF instruction of the current cycle. upd (from MA) writes the tables
// on the clock edge: the PHT with the counter carried from prediction time,
// moved toward the real direction, and the BTB with the target of a taken
// branch or jump, or an invalid entry for a non-branch that was predicted
// taken. Table contents start from initial values, as block RAM does.
module rvcp_bpred
  import rvcp_pkg::*;
#(
  parameter int unsigned BTB_ENTRIES = 512,
  parameter int unsigned PHT_ENTRIES = 8192,
  localparam int unsigned BTB_AW = $clog2(BTB_ENTRIES),
  localparam int unsigned PHT_AW = $clog2(PHT_ENTRIES)
) (
  input  logic    clk,
  input  logic    rst,
  input  logic    adv,
  input  logic    redirect,
  input  word_t   next_pc,
  input  logic    if_valid,
  output logic    pred_taken,
  output word_t   pred_pc,
  output word_t   pred_pc_2,
  output pred_t   info,
  input  bp_upd_t upd,
  input  logic    restore,
  input  bhr_t    restore_bhr
);
  logic [31:0] btb [BTB_ENTRIES];
  logic [1:0]  pht [PHT_ENTRIES];

  initial begin
    for (int i = 0; i < BTB_ENTRIES; i++) btb[i] = '0;
    for (int i = 0; i < PHT_ENTRIES; i++) pht[i] = 2'b01;
  end

  function automatic logic [PHT_AW-1:0] pht_index(word_t a, bhr_t h);
    return PHT_AW'(a[PHT_AW:1]) ^ PHT_AW'(h);
  endfunction

  logic [31:0] btb_q;           // BTB read data (registered read)
  word_t       pred_pc_r, pred_pc_2_r;
  word_t       prepc;
  logic [1:0]  pht_q;           // PHT read data (registered read)
  bhr_t        bhr, bhr_idx_r;
  logic        pv;              // lookup for the IF instruction is usable
  logic        btb_hit;

  // lookup pipeline
  always_ff @(posedge clk) begin
    if (adv) begin
      btb_q       <= btb[next_pc[BTB_AW:1]];
      pred_pc_r   <= {btb_q[31:1], 1'b0};
      pred_pc_2_r <= {btb_q[31:1], 1'b0} + 32'd2;
      prepc       <= next_pc;
      pht_q       <= pht[pht_index(prepc, bhr)];
      bhr_idx_r   <= bhr;
    end
  end

  // pred_pc_r[0] is always 0; the valid flag is kept in its own register.
  logic btb_v_r;
  always_ff @(posedge clk) if (adv) btb_v_r <= btb_q[0];

  assign btb_hit    = pv && if_valid && btb_v_r;
  assign pred_taken = btb_hit && pht_q[1];
  assign pred_pc    = pred_pc_r;
  assign pred_pc_2  = pred_pc_2_r;

  always_comb begin
    info.taken   = pred_taken;
    info.target  = pred_pc_r;
    info.cnt     = pht_q;
    info.bhr_idx = bhr_idx_r;
    info.bhr_cur = bhr;
  end

  // history and prediction-valid flag
  always_ff @(posedge clk) begin
    if (rst) begin
      bhr <= '0;
      pv  <= 1'b0;
    end else if (restore) begin
      bhr <= restore_bhr;
      pv  <= 1'b0;
    end else if (redirect) begin
      pv  <= 1'b0;
    end else if (adv) begin
      if (btb_hit) bhr <= {bhr[BHR_W-2:0], pht_q[1]};
      pv <= !pred_taken;
    end
  end

  // table update from MA
  always_ff @(posedge clk) begin
    if (upd.we) begin
      if (upd.is_br) begin
        unique case ({upd.taken, upd.cnt})
          3'b1_11: pht[pht_index(upd.prev_pc, upd.bhr_idx)] <= 2'b11;
          3'b0_00: pht[pht_index(upd.prev_pc, upd.bhr_idx)] <= 2'b00;
          default: pht[pht_index(upd.prev_pc, upd.bhr_idx)] <=
                     upd.taken ? upd.cnt + 2'd1 : upd.cnt - 2'd1;
        endcase
      end
      if (upd.is_br && upd.taken)
        btb[upd.prev_pc[BTB_AW:1]] <= {upd.target[31:1], 1'b1};
      else if (!upd.is_br)
        btb[upd.prev_pc[BTB_AW:1]] <= '0;
    end
  end
endmodule
