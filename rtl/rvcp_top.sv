// rvcp_top: RVCoreP-32IC, an RV32IC soft processor for FPGAs.
//
// The pipeline (rvcp_core) with its two block memories: the 16-bit wide
// dual-port instruction memory that lets the fetch unit read the halfwords at
// PC and PC+2 in the same cycle, and the 32-bit data memory. Instruction and
// data memory are separate (Harvard); both are 32 KB by default, the size of
// the paper's Dhrystone/CoreMark configuration.
//
// Interface: hold rst high while loading a program through imem_init_*
// (one 16-bit entry per clock, entry index = byte address / 2) and, if
// needed, initial data through dmem_init_* (one word per clock); after rst
// falls the core fetches from RESET_PC. retire describes every instruction as
// it leaves the WB stage, events pulses for the pipeline's mechanisms. The
// loading ports and the two output records are this design's additions.
module rvcp_top
  import rvcp_pkg::*;
#(
  parameter word_t       RESET_PC    = 32'h0000_0000,
  parameter int unsigned IMEM_BYTES  = 32768,
  parameter int unsigned DMEM_BYTES  = 32768,
  parameter int unsigned BTB_ENTRIES = 512,
  parameter int unsigned PHT_ENTRIES = 8192,
  localparam int unsigned IAW = $clog2(IMEM_BYTES / 2)
) (
  input  logic           clk,
  input  logic           rst,
  input  logic           imem_init_we,
  input  logic [IAW-1:0] imem_init_addr,
  input  logic [15:0]    imem_init_data,
  input  logic           dmem_init_we,
  input  word_t          dmem_init_addr,
  input  word_t          dmem_init_data,
  output retire_t        retire,
  output events_t        events
);
  word_t       imem_addr_a, imem_addr_b, dmem_addr, dmem_wdata, dmem_rdata;
  logic [15:0] imem_q_a, imem_q_b;
  logic [3:0]  dmem_we;

  rvcp_core #(
    .RESET_PC    (RESET_PC),
    .BTB_ENTRIES (BTB_ENTRIES),
    .PHT_ENTRIES (PHT_ENTRIES)
  ) u_core (
    .clk, .rst,
    .imem_addr_a, .imem_addr_b, .imem_q_a, .imem_q_b,
    .dmem_addr, .dmem_we, .dmem_wdata, .dmem_rdata,
    .retire, .events
  );

  rvcp_imem #(.IMEM_BYTES(IMEM_BYTES)) u_imem (
    .clk,
    .addr_a    (imem_addr_a[IAW:1]),
    .addr_b    (imem_addr_b[IAW:1]),
    .q_a       (imem_q_a),
    .q_b       (imem_q_b),
    .init_we   (imem_init_we),
    .init_addr (imem_init_addr),
    .init_data (imem_init_data)
  );

  rvcp_dmem #(.DMEM_BYTES(DMEM_BYTES)) u_dmem (
    .clk,
    .addr      (dmem_addr),
    .we        (dmem_we),
    .wdata     (dmem_wdata),
    .rdata     (dmem_rdata),
    .init_we   (dmem_init_we),
    .init_addr (dmem_init_addr),
    .init_data (dmem_init_data)
  );
endmodule
