// rvcp_loaduse: load-use hazard check (LoadUse), IF stage.
//
// The instruction in IF is compared, through the IF-stage decoder, with the
// load in ID. If the IF instruction reads the load's destination register,
// stall is raised: the fetch unit keeps PC and PC_2 for one more cycle and
// a bubble enters ID. One bubble suffices because the load's data reaches
// the dependent instruction in EX through the forwarding path from WB.
// Placing the check between IF and ID, which is why the decoder is split
// into an IF and an ID part, follows the paper; the exact compare is this
// design's. Combinational.
module rvcp_loaduse
  import rvcp_pkg::*;
(
  input  logic    if_valid,
  input  if_dec_t if_dec,
  input  logic    id_valid,
  input  logic    id_is_load,
  input  reg_t    id_rd,
  output logic    stall
);
  assign stall = if_valid && id_valid && id_is_load && (id_rd != 5'd0) &&
                 ((if_dec.use_rs1 && if_dec.rs1 == id_rd) ||
                  (if_dec.use_rs2 && if_dec.rs2 == id_rd));
endmodule
