// rvcp_imem: 16-bit wide dual-port instruction memory.
//
// The instruction memory is one block RAM with 16-bit entries, one entry per
// halfword address. Its two ports are both used for reading: port A reads
// the entry addressed by NextPC and port B the entry addressed by NextPC_2,
// so that in the following cycle the entries at PC and PC+2 are available
// together and any instruction, 16- or 32-bit, aligned or straddling a
// 32-bit boundary, is read in a single cycle. This organisation (16-bit
// entries, both ports of one RAM, no banking) is the paper's central idea.
//
// Timing: synchronous read, data one clock after the address. Addresses are
// entry indices (byte address bit 1 upwards); they wrap at the memory size.
// The init_* port writes one entry per clock and is meant for loading a
// program while the core is held in reset; it is this design's addition
// (on an FPGA the RAM would be initialised by the bitstream).
module rvcp_imem #(
  parameter int unsigned IMEM_BYTES = 32768,
  localparam int unsigned ENTRIES   = IMEM_BYTES / 2,
  localparam int unsigned AW        = $clog2(ENTRIES)
) (
  input  logic          clk,
  input  logic [AW-1:0] addr_a,
  input  logic [AW-1:0] addr_b,
  output logic [15:0]   q_a,
  output logic [15:0]   q_b,
  input  logic          init_we,
  input  logic [AW-1:0] init_addr,
  input  logic [15:0]   init_data
);
  logic [15:0] mem [ENTRIES];

  always_ff @(posedge clk) begin
    if (init_we) mem[init_addr] <= init_data;
  end

  always_ff @(posedge clk) begin
    q_a <= mem[addr_a];
    q_b <= mem[addr_b];
  end
endmodule
