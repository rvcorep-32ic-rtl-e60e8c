// rvcp_cfg_harness: runs random RV32IC programs on one rvcp_top built with
// the given memory sizes and reset address, comparing every retirement with
// the instruction-set model. Code is placed at CODE_BASE (the reset address)
// and data at DATA_BASE, so a caller can put both near the top of a large
// memory to exercise its upper address bits; the other half of each memory
// is filled with different contents to show the top address bit is decoded. Used by tb_rvcp_mem_configs;
// start is a level, done rises when all programs have run, checks and
// failures are running totals.
module rvcp_cfg_harness
  import rvcp_pkg::*;
  import rvcp_tb_pkg::*;
#(
  parameter int unsigned IMEM_BYTES = 32768,
  parameter int unsigned DMEM_BYTES = 32768,
  parameter int unsigned CODE_BASE  = 0,
  parameter int unsigned DATA_BASE  = 32'h400,
  parameter int unsigned N_PROGS    = 3,
  parameter int unsigned MAX_HW     = 1024,     // program size limit, halfwords
  localparam int unsigned IAW = $clog2(IMEM_BYTES / 2)
) (
  input  logic clk,
  input  logic start,
  output logic done,
  output int   checks,
  output int   failures,
  output int   retired
);
  logic           rst = 1'b1;
  logic           imem_init_we = 1'b0;
  logic [IAW-1:0] imem_init_addr = '0;
  logic [15:0]    imem_init_data = '0;
  logic           dmem_init_we = 1'b0;
  word_t          dmem_init_addr = '0;
  word_t          dmem_init_data = '0;
  retire_t        retire;
  events_t        events;

  rvcp_top #(.RESET_PC(CODE_BASE), .IMEM_BYTES(IMEM_BYTES), .DMEM_BYTES(DMEM_BYTES)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL (%0d-byte memories): %s", IMEM_BYTES, what);
    end
  endtask

  initial begin
    rv_progen g; rv_iss iss; iss_rec_t e;
    int c;
    done = 1'b0; checks = 0; failures = 0; retired = 0;
    wait (start);
    for (int p = 0; p < int'(N_PROGS); p++) begin
      int len;
      len = 60;
      do begin
        g = new(DATA_BASE, CODE_BASE);
        g.build(len);
        len = len - 10;
      end while (g.hw.size() > MAX_HW && len > 10);
      iss = new();
      rst = 1'b1;
      foreach (g.hw[k]) begin
        @(negedge clk);
        imem_init_we = 1'b1; imem_init_addr = IAW'((CODE_BASE >> 1) + k); imem_init_data = g.hw[k];
        iss.imem[int'((CODE_BASE >> 1) + k)] = g.hw[k];
      end
      for (int k = 0; k < 64; k++) begin
        word_t v;
        v = $urandom;
        @(negedge clk);
        imem_init_we = 1'b0;
        dmem_init_we = 1'b1; dmem_init_addr = DATA_BASE + 4 * k; dmem_init_data = v;
        iss.dmem[int'((DATA_BASE >> 2) + k)] = v;
      end
      // Fill the halves of both memories that differ from the program's and
      // data's addresses only in the top address bit; a memory that ignored
      // that bit would now hold these words in place of the program/data.
      foreach (g.hw[k]) begin
        @(negedge clk);
        dmem_init_we = 1'b0;
        imem_init_we = 1'b1; imem_init_addr = IAW'(((CODE_BASE ^ (IMEM_BYTES / 2)) >> 1) + k);
        imem_init_data = 16'h0001;
      end
      for (int k = 0; k < 64; k++) begin
        @(negedge clk);
        imem_init_we = 1'b0;
        dmem_init_we = 1'b1; dmem_init_addr = (DATA_BASE ^ (DMEM_BYTES / 2)) + 4 * k;
        dmem_init_data = 32'h5a5a_5a5a;
      end
      @(negedge clk);
      imem_init_we = 1'b0; dmem_init_we = 1'b0;
      iss.pc = CODE_BASE;
      @(negedge clk); rst = 1'b0;
      for (c = 0; c < 100000; c++) begin
        @(posedge clk); #1;
        if (retire.valid) begin
          e = iss.step();
          retired++;
          check(retire.pc == e.pc && retire.inst == e.inst,
                $sformatf("pc/inst %h/%h expected %h/%h", retire.pc, retire.inst, e.pc, e.inst));
          check(retire.rd_we == e.rd_we && (!e.rd_we || (retire.rd == reg_t'(e.rd) && retire.rd_val == e.rd_val)),
                $sformatf("pc %h write x%0d=%h expected x%0d=%h", e.pc, retire.rd, retire.rd_val, e.rd, e.rd_val));
          if (e.st_be != 0 || retire.st_be != 0)
            check(retire.st_be == e.st_be && retire.st_addr == e.st_addr,
                  $sformatf("pc %h store %b@%h expected %b@%h", e.pc, retire.st_be, retire.st_addr, e.st_be, e.st_addr));
          if (retire.pc == g.halt_pc) break;
        end
      end
      check(c < 100000, "program did not reach its halt instruction");
      @(negedge clk); rst = 1'b1;
    end
    done = 1'b1;
  end
endmodule
