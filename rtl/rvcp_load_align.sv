// rvcp_load_align: load alignment and extension (Align/Extend, MA stage).
//
// Takes the 32-bit word read from the data memory, shifts the addressed
// byte or halfword down by the two low address bits and sign- or
// zero-extends it to 32 bits. Misaligned halfword and word accesses are not
// supported (the lanes are taken as addressed); the paper names the block
// only. Combinational.
module rvcp_load_align
  import rvcp_pkg::*;
(
  input  word_t      rdata,
  input  logic [1:0] addr_lo,
  input  mem_size_e  size,
  input  logic       uns,
  output word_t      value
);
  always_comb begin
    word_t sh;
    sh = rdata >> {addr_lo, 3'b000};
    unique case (size)
      MEM_B:   value = uns ? {24'd0, sh[7:0]}  : {{24{sh[7]}}, sh[7:0]};
      MEM_H:   value = uns ? {16'd0, sh[15:0]} : {{16{sh[15]}}, sh[15:0]};
      default: value = rdata;
    endcase
  end
endmodule
