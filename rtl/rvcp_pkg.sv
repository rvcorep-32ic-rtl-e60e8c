// rvcp_pkg: types and constants shared by the RVCoreP-32IC pipeline.
//
// The core executes RV32IC. Both decoders (the IF-stage register decoder and
// the ID-stage micro-code decoder) read 32-bit and 16-bit instructions
// directly, so the package holds the micro-code word (uop_t) that the ID
// decoder produces for either length, the small IF-stage decode record, the
// branch-prediction snapshot that travels with every instruction, and the
// retire trace and event records the core exports. The field layout of all
// records is this design's own choice; the paper names the signals (Comp,
// IMM, IMM_2, BranchTaken, PredPC ...) but prints no encodings.
package rvcp_pkg;

  typedef logic [31:0] word_t;
  typedef logic [4:0]  reg_t;

  typedef enum logic [3:0] {
    ALU_ADD, ALU_SUB, ALU_SLL, ALU_SLT, ALU_SLTU, ALU_XOR,
    ALU_SRL, ALU_SRA, ALU_OR, ALU_AND, ALU_PASSB
  } alu_op_e;

  typedef enum logic [1:0] {SRC1_RS1, SRC1_PC, SRC1_ZERO} src1_e;

  typedef enum logic [1:0] {BR_NONE, BR_COND, BR_JAL, BR_JALR} br_e;

  typedef enum logic [1:0] {MEM_B = 2'd0, MEM_H = 2'd1, MEM_W = 2'd2} mem_size_e;

  // Branch conditions use the RV32I funct3 encoding.
  localparam logic [2:0] F3_BEQ = 3'b000, F3_BNE = 3'b001, F3_BLT = 3'b100,
                         F3_BGE = 3'b101, F3_BLTU = 3'b110, F3_BGEU = 3'b111;

  // Micro code produced by the ID-stage decoder.
  typedef struct packed {
    alu_op_e   alu_op;
    src1_e     src1;      // first ALU operand
    logic      use_imm;   // second ALU operand is IMM instead of rs2
    logic      use_rs1;
    logic      use_rs2;
    reg_t      rs1;
    reg_t      rs2;
    reg_t      rd;
    logic      rd_we;     // writes rd (never set for rd = x0)
    logic      is_load;
    logic      is_store;
    mem_size_e mem_size;
    logic      mem_uns;   // zero-extending load
    br_e       br;
    logic [2:0] br_cond;
    word_t     imm;
  } uop_t;

  // Result of the IF-stage decoder: what the load-use check and the
  // register-file read in ID need.
  typedef struct packed {
    reg_t rs1;
    reg_t rs2;
    reg_t rd;
    logic use_rs1;
    logic use_rs2;
    logic rd_we;
    logic is_load;
  } if_dec_t;

  // Branch-prediction snapshot taken in IF and carried to MA.
  localparam int BHR_W = 13;
  typedef logic [BHR_W-1:0] bhr_t;
  typedef struct packed {
    logic       taken;     // fetch followed PredPC
    word_t      target;    // PredPC used
    logic [1:0] cnt;       // PHT counter read for this instruction
    bhr_t       bhr_idx;   // history that formed the PHT lookup index
    bhr_t       bhr_cur;   // speculative history before this instruction
  } pred_t;

  // Update request from MA to the predictor.
  typedef struct packed {
    logic       we;        // write PHT/BTB
    logic       is_br;     // instruction is a branch or jump
    logic       taken;     // actual direction
    word_t      prev_pc;   // address of the previous instruction in memory
    word_t      target;    // actual target
    logic [1:0] cnt;
    bhr_t       bhr_idx;
  } bp_upd_t;

  // Committed instruction, one per cycle at most (WB stage).
  typedef struct packed {
    logic       valid;
    word_t      pc;
    word_t      inst;      // 16-bit instructions in bits 15:0, upper half 0
    logic       rd_we;
    reg_t       rd;
    word_t      rd_val;
    logic [3:0] st_be;     // byte enables of a store (0: no store)
    word_t      st_addr;   // word-aligned store address
    word_t      st_data;   // store data, already shifted to its lanes
  } retire_t;

  // One-cycle pulses of the pipeline's mechanisms.
  typedef struct packed {
    logic load_use_stall;  // IF held for a load-use dependence
    logic branch_miss;     // MA redirected the fetch
    logic pred_taken;      // IF followed PredPC
    logic bp_write;        // PHT/BTB written
    logic bp_write_block;  // write suppressed: previous instruction redirected
    logic fwd_ma;          // EX operand taken from MA
    logic fwd_wb;          // EX operand taken from WB
    logic fwd_id;          // ID operand bypassed from WB
    logic fetch_straddle;  // 32-bit instruction at PC[1]=1 fetched in one cycle
    logic retire_comp;     // a 16-bit instruction retired
  } events_t;

  function automatic logic is_comp(input logic [1:0] lo);
    return lo != 2'b11;
  endfunction

endpackage
