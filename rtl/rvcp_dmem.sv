// rvcp_dmem: 32-bit wide data memory with byte write enables.
//
// A single-port block RAM. The EX stage presents the byte address computed
// by its address adder together with the byte enables and the store data
// already moved to its byte lanes; a store is written on that clock edge and
// a load's word appears on rdata in the next cycle, the MA stage, where it is
// aligned and extended. A read in the same cycle as a write returns the old
// word (read-first); the pipeline never needs both at once. The memory size
// follows the paper's evaluation configurations; the init_* port, used to
// load data while the core is in reset, is this design's addition.
module rvcp_dmem #(
  parameter int unsigned DMEM_BYTES = 32768,
  localparam int unsigned WORDS     = DMEM_BYTES / 4,
  localparam int unsigned AW        = $clog2(WORDS)
) (
  input  logic        clk,
  input  logic [31:0] addr,
  input  logic [3:0]  we,
  input  logic [31:0] wdata,
  output logic [31:0] rdata,
  input  logic        init_we,
  input  logic [31:0] init_addr,
  input  logic [31:0] init_data
);
  logic [31:0] mem [WORDS];
  logic [AW-1:0] waddr;

  assign waddr = AW'(addr >> 2);

  always_ff @(posedge clk) begin
    if (init_we) begin
      mem[AW'(init_addr >> 2)] <= init_data;
    end else begin
      for (int b = 0; b < 4; b++)
        if (we[b]) mem[waddr][b*8 +: 8] <= wdata[b*8 +: 8];
    end
  end

  always_ff @(posedge clk) rdata <= mem[waddr];
endmodule
