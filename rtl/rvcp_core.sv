// rvcp_core: RVCoreP-32IC pipeline (RV32IC, stages PreIF to WB, without memories).
//
// Stages: PreIF (NextPC selection; instruction memory, BTB and PHT reads
// start), IF (instruction available, branch prediction applied, IF-stage
// decode and load-use check), ID (micro-code decode, IMM_2, register read),
// EX (ALU, branch condition, target adders, data-memory address and store),
// MA (load data, branch-miss decision, TruePC/TruePC_2), WB (register write).
//
// Hazards:
//   - Operands are forwarded into EX from the EX/MA register (MA) and the
//     MA/WB register (WB), and the WB value is bypassed into the ID-stage
//     operand mux, so back-to-back ALU dependences do not stall.
//   - A load followed directly by a user of its result is caught between IF
//     and ID; IF is held one cycle and a bubble enters ID. The user then
//     reaches EX when the load is in WB.
//   - Branches and jumps are resolved in EX and the miss is acted on from
//     the EX/MA register: the IF, ID and EX instructions are squashed and the
//     fetch restarts at TruePC/TruePC_2 (three-cycle penalty).
// Predictor training (MA): the table index is the address of the
// instruction before the branch in memory, found from the branch's PC and
// the Comp bit of the instruction that preceded it through MA (minus 2 or
// 4). When that instruction changed the control flow (it was a taken branch
// or jump), it is not the branch's memory predecessor and the write is
// suppressed. Using the preceding instruction's Comp bit and suppressing
// the write follow the paper; keying the suppression on the actual rather
// than the predicted direction is this design's.
//
// Interface: imem_addr_* are NextPC/NextPC_2 (byte addresses), imem_q_* the
// entries read one cycle later. dmem_* is the data-memory port (address,
// byte enables and lane-aligned data in EX, read data in MA). retire reports
// each instruction leaving WB, events pulses per mechanism. rst is
// synchronous and active high; the first instruction is fetched from
// RESET_PC. Two sub-module outputs are left open: the fetch unit's PC_2
// (it only addresses the memory, through NextPC_2) and the truepc block's
// EX-stage TakenPC (the miss decision uses the registered copy in MA).
module rvcp_core
  import rvcp_pkg::*;
#(
  parameter word_t       RESET_PC    = 32'h0000_0000,
  parameter int unsigned BTB_ENTRIES = 512,
  parameter int unsigned PHT_ENTRIES = 8192
) (
  input  logic        clk,
  input  logic        rst,
  output word_t       imem_addr_a,
  output word_t       imem_addr_b,
  input  logic [15:0] imem_q_a,
  input  logic [15:0] imem_q_b,
  output word_t       dmem_addr,
  output logic [3:0]  dmem_we,
  output word_t       dmem_wdata,
  input  word_t       dmem_rdata,
  output retire_t     retire,
  output events_t     events
);

  // ------------------------------------------------------------ registers
  typedef struct packed {
    logic    valid;
    word_t   pc;
    word_t   inst;
    logic    comp;
    if_dec_t dec;
    pred_t   pred;
  } if_id_t;

  typedef struct packed {
    logic    valid;
    word_t   pc;
    word_t   inst;
    logic    comp;
    uop_t    uop;
    word_t   imm_2;
    word_t   rv1;
    word_t   rv2;
    word_t   op2;     // ID operand mux: IMM or rs2
    pred_t   pred;
  } id_ex_t;

  typedef struct packed {
    logic       valid;
    word_t      pc;
    word_t      inst;
    logic       comp;
    reg_t       rd;
    logic       rd_we;
    logic       is_load;
    mem_size_e  mem_size;
    logic       mem_uns;
    logic [1:0] addr_lo;
    word_t      result;   // arithmetic result, or the link address of a jump
    logic       is_br;
    pred_t      pred;
    logic [3:0] st_be;
    word_t      st_addr;
    word_t      st_data;
  } ex_ma_t;

  typedef struct packed {
    logic    valid;
    word_t   pc;
    word_t   inst;
    logic    comp;
    reg_t    rd;
    logic    rd_we;
    word_t   val;
    logic [3:0] st_be;
    word_t   st_addr;
    word_t   st_data;
  } ma_wb_t;

  if_id_t if_id;
  id_ex_t id_ex;
  ex_ma_t ex_ma;
  ma_wb_t ma_wb;

  logic  boot;
  logic  ma_miss, redirect, stall, adv;
  word_t true_pc, true_pc_2, redir_pc, redir_pc_2;

  always_ff @(posedge clk) boot <= rst;

  // ------------------------------------------------------------ IF
  word_t   if_pc, if_inst, next_pc, next_pc_2;
  logic    if_comp, if_valid;
  if_dec_t if_dec;
  logic    pred_taken;
  word_t   pred_pc, pred_pc_2;
  pred_t   pred_info;
  bp_upd_t bp_upd;
  logic    bp_restore;
  bhr_t    bp_restore_bhr;

  assign redirect   = ma_miss || boot;
  assign redir_pc   = boot ? RESET_PC : true_pc;
  assign redir_pc_2 = boot ? RESET_PC + 32'd2 : true_pc_2;
  assign adv        = redirect || !stall;

  rvcp_fetch u_fetch (
    .clk, .rst,
    .miss      (redirect),
    .true_pc   (redir_pc),
    .true_pc_2 (redir_pc_2),
    .stall,
    .pred_taken,
    .pred_pc,
    .pred_pc_2,
    .imem_q_a,
    .imem_q_b,
    .next_pc,
    .next_pc_2,
    .pc        (if_pc),
    .pc_2      (),          // PC_2 only feeds the fetch unit itself
    .inst      (if_inst),
    .comp      (if_comp),
    .valid     (if_valid)
  );

  assign imem_addr_a = next_pc;
  assign imem_addr_b = next_pc_2;

  rvcp_bpred #(.BTB_ENTRIES(BTB_ENTRIES), .PHT_ENTRIES(PHT_ENTRIES)) u_bpred (
    .clk, .rst, .adv, .redirect,
    .next_pc,
    .if_valid,
    .pred_taken,
    .pred_pc,
    .pred_pc_2,
    .info        (pred_info),
    .upd         (bp_upd),
    .restore     (bp_restore),
    .restore_bhr (bp_restore_bhr)
  );

  rvcp_pdec_if u_pdec_if (.inst(if_inst), .dec(if_dec));

  rvcp_loaduse u_loaduse (
    .if_valid,
    .if_dec,
    .id_valid   (if_id.valid),
    .id_is_load (if_id.dec.is_load),
    .id_rd      (if_id.dec.rd),
    .stall
  );

  always_ff @(posedge clk) begin
    if (rst || redirect || stall) begin
      if_id.valid <= 1'b0;
    end else begin
      if_id.valid <= if_valid;
    end
    if (!stall || redirect) begin
      if_id.pc   <= if_pc;
      if_id.inst <= if_comp ? {16'd0, if_inst[15:0]} : if_inst;
      if_id.comp <= if_comp;
      if_id.dec  <= if_dec;
      if_id.pred <= pred_info;
    end
  end

  // ------------------------------------------------------------ ID
  uop_t  id_uop;
  word_t id_imm_2, rf_rd1, rf_rd2, id_rv1, id_rv2;
  logic  wb_we;
  logic  id_byp1, id_byp2;

  rvcp_pdec_id u_pdec_id (.inst(if_id.inst), .comp(if_id.comp), .uop(id_uop), .imm_2(id_imm_2));

  assign wb_we = ma_wb.valid && ma_wb.rd_we;

  rvcp_regfile u_regfile (
    .clk,
    .rs1 (if_id.dec.rs1),
    .rs2 (if_id.dec.rs2),
    .rd1 (rf_rd1),
    .rd2 (rf_rd2),
    .we  (wb_we),
    .rd  (ma_wb.rd),
    .wd  (ma_wb.val)
  );

  assign id_byp1 = wb_we && ma_wb.rd == if_id.dec.rs1 && if_id.dec.rs1 != 5'd0;
  assign id_byp2 = wb_we && ma_wb.rd == if_id.dec.rs2 && if_id.dec.rs2 != 5'd0;
  assign id_rv1  = id_byp1 ? ma_wb.val : rf_rd1;
  assign id_rv2  = id_byp2 ? ma_wb.val : rf_rd2;

  always_ff @(posedge clk) begin
    id_ex.valid <= !rst && !redirect && if_id.valid;
    id_ex.pc    <= if_id.pc;
    id_ex.inst  <= if_id.inst;
    id_ex.comp  <= if_id.comp;
    id_ex.uop   <= id_uop;
    id_ex.imm_2 <= id_imm_2;
    id_ex.rv1   <= id_rv1;
    id_ex.rv2   <= id_rv2;
    id_ex.op2   <= id_uop.use_imm ? id_uop.imm : id_rv2;
    id_ex.pred  <= if_id.pred;
  end

  // ------------------------------------------------------------ EX
  word_t f1, f2, alu_a, alu_b, alu_y, below_pc, ex_result, mem_addr;
  logic  br_true, ex_taken, fwd_ma1, fwd_ma2, fwd_wb1, fwd_wb2;
  logic  ma_fwd_ok, ma_taken;
  word_t ma_taken_pc;
  logic [3:0] st_be;
  word_t st_data;
  uop_t  u;

  assign u = id_ex.uop;
  assign ma_fwd_ok = ex_ma.valid && ex_ma.rd_we && !ex_ma.is_load;

  assign fwd_ma1 = ma_fwd_ok && ex_ma.rd == u.rs1 && u.use_rs1;
  assign fwd_ma2 = ma_fwd_ok && ex_ma.rd == u.rs2 && u.use_rs2;
  assign fwd_wb1 = !fwd_ma1 && wb_we && ma_wb.rd == u.rs1 && u.use_rs1;
  assign fwd_wb2 = !fwd_ma2 && wb_we && ma_wb.rd == u.rs2 && u.use_rs2;

  assign f1 = fwd_ma1 ? ex_ma.result : fwd_wb1 ? ma_wb.val : id_ex.rv1;
  assign f2 = fwd_ma2 ? ex_ma.result : fwd_wb2 ? ma_wb.val : id_ex.rv2;

  always_comb begin
    unique case (u.src1)
      SRC1_PC:   alu_a = id_ex.pc;
      SRC1_ZERO: alu_a = '0;
      default:   alu_a = f1;
    endcase
  end
  assign alu_b = u.use_imm ? id_ex.op2 : f2;

  rvcp_alu u_alu (
    .op (u.alu_op), .a (alu_a), .b (alu_b), .y (alu_y),
    .br_cond (u.br_cond), .br_a (f1), .br_b (f2), .br_true
  );

  assign ex_taken = (u.br == BR_JAL) || (u.br == BR_JALR) || (u.br == BR_COND && br_true);

  rvcp_truepc u_truepc (
    .clk,
    .en          (1'b1),
    .ex_pc       (id_ex.pc),
    .ex_comp     (id_ex.comp),
    .ex_jalr     (u.br == BR_JALR),
    .ex_base     (u.br == BR_JALR ? f1 : id_ex.pc),
    .ex_imm      (u.imm),
    .ex_imm_2    (id_ex.imm_2),
    .ex_taken    (id_ex.valid && ex_taken),
    .below_pc,
    .taken_pc_ex (),
    .ma_taken,
    .ma_taken_pc,
    .true_pc,
    .true_pc_2
  );

  assign ex_result = (u.br == BR_JAL || u.br == BR_JALR) ? below_pc : alu_y;

  // data-memory address adder and store lanes
  assign mem_addr = f1 + u.imm;
  always_comb begin
    unique case (u.mem_size)
      MEM_B:   begin st_be = 4'b0001 << mem_addr[1:0];          st_data = {4{f2[7:0]}};  end
      MEM_H:   begin st_be = 4'b0011 << {mem_addr[1], 1'b0};    st_data = {2{f2[15:0]}}; end
      default: begin st_be = 4'b1111;                           st_data = f2;            end
    endcase
    if (!(id_ex.valid && u.is_store && !ma_miss)) st_be = 4'b0000;
  end

  assign dmem_addr  = mem_addr;
  assign dmem_we    = st_be;
  assign dmem_wdata = st_data;

  always_ff @(posedge clk) begin
    ex_ma.valid    <= !rst && !ma_miss && id_ex.valid;
    ex_ma.pc       <= id_ex.pc;
    ex_ma.inst     <= id_ex.inst;
    ex_ma.comp     <= id_ex.comp;
    ex_ma.rd       <= u.rd;
    ex_ma.rd_we    <= u.rd_we;
    ex_ma.is_load  <= u.is_load;
    ex_ma.mem_size <= u.mem_size;
    ex_ma.mem_uns  <= u.mem_uns;
    ex_ma.addr_lo  <= mem_addr[1:0];
    ex_ma.result   <= ex_result;
    ex_ma.is_br    <= u.br != BR_NONE;
    ex_ma.pred     <= id_ex.pred;
    ex_ma.st_be    <= st_be;
    ex_ma.st_addr  <= {mem_addr[31:2], 2'b00};
    ex_ma.st_data  <= st_data;
  end

  // ------------------------------------------------------------ MA
  word_t ld_val;
  logic  prev_valid, prev_comp, prev_jump;
  logic  bp_cand;

  rvcp_load_align u_load_align (
    .rdata (dmem_rdata), .addr_lo (ex_ma.addr_lo), .size (ex_ma.mem_size),
    .uns (ex_ma.mem_uns), .value (ld_val)
  );

  assign ma_miss = ex_ma.valid &&
                   ((ma_taken != ex_ma.pred.taken) ||
                    (ma_taken && ma_taken_pc != ex_ma.pred.target));

  // previous instruction through MA, for the predictor's write index
  always_ff @(posedge clk) begin
    if (rst) begin
      prev_valid <= 1'b0;
      prev_comp  <= 1'b0;
      prev_jump  <= 1'b0;
    end else if (ex_ma.valid) begin
      prev_valid <= 1'b1;
      prev_comp  <= ex_ma.comp;
      prev_jump  <= ma_taken;
    end
  end

  assign bp_cand = ex_ma.valid && (ex_ma.is_br || ex_ma.pred.taken) && prev_valid;

  always_comb begin
    bp_upd.we      = bp_cand && !prev_jump;
    bp_upd.is_br   = ex_ma.is_br;
    bp_upd.taken   = ma_taken;
    bp_upd.prev_pc = ex_ma.pc - (prev_comp ? 32'd2 : 32'd4);
    bp_upd.target  = ma_taken_pc;
    bp_upd.cnt     = ex_ma.pred.cnt;
    bp_upd.bhr_idx = ex_ma.pred.bhr_idx;
  end

  assign bp_restore     = ma_miss;
  assign bp_restore_bhr = ex_ma.is_br ? {ex_ma.pred.bhr_cur[BHR_W-2:0], ma_taken}
                                      : ex_ma.pred.bhr_cur;

  always_ff @(posedge clk) begin
    ma_wb.valid   <= !rst && ex_ma.valid;
    ma_wb.pc      <= ex_ma.pc;
    ma_wb.inst    <= ex_ma.inst;
    ma_wb.comp    <= ex_ma.comp;
    ma_wb.rd      <= ex_ma.rd;
    ma_wb.rd_we   <= ex_ma.rd_we;
    ma_wb.val     <= ex_ma.is_load ? ld_val : ex_ma.result;
    ma_wb.st_be   <= ex_ma.st_be;
    ma_wb.st_addr <= ex_ma.st_addr;
    ma_wb.st_data <= ex_ma.st_data;
  end

  // ------------------------------------------------------------ WB / trace
  always_comb begin
    retire.valid   = ma_wb.valid;
    retire.pc      = ma_wb.pc;
    retire.inst    = ma_wb.inst;
    retire.rd_we   = ma_wb.rd_we;
    retire.rd      = ma_wb.rd;
    retire.rd_val  = ma_wb.val;
    retire.st_be   = ma_wb.st_be;
    retire.st_addr = ma_wb.st_addr;
    retire.st_data = ma_wb.st_data;
  end

  always_comb begin
    events.load_use_stall = stall && !redirect;
    events.branch_miss    = ma_miss;
    events.pred_taken     = pred_taken && !redirect && !stall;
    events.bp_write       = bp_upd.we;
    events.bp_write_block = bp_cand && prev_jump;
    events.fwd_ma         = id_ex.valid && (fwd_ma1 || fwd_ma2);
    events.fwd_wb         = id_ex.valid && (fwd_wb1 || fwd_wb2);
    events.fwd_id         = if_id.valid && (id_byp1 || id_byp2);
    events.fetch_straddle = if_valid && !if_comp && if_pc[1] && !redirect && !stall;
    events.retire_comp    = ma_wb.valid && ma_wb.comp;
  end

  // A load in MA never has to forward to EX: the load-use stall prevents it.
  a_no_load_fwd: assert property (@(posedge clk) disable iff (rst)
    !(id_ex.valid && ex_ma.valid && ex_ma.is_load && ex_ma.rd_we &&
      ((u.use_rs1 && u.rs1 == ex_ma.rd) || (u.use_rs2 && u.rs2 == ex_ma.rd))));

endmodule
