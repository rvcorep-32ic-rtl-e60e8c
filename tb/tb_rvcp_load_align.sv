// tb_rvcp_load_align: every size, signedness and byte offset with random
// words; the expected value is built byte by byte here.
module tb_rvcp_load_align;
  import rvcp_pkg::*;
  word_t rdata, value; logic [1:0] lo; mem_size_e size; logic uns;
  int checks = 0, failures = 0;
  rvcp_load_align dut (.rdata, .addr_lo(lo), .size, .uns, .value);
  initial begin
    #1_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int n = 0; n < 5000; n++) begin
      word_t exp; logic [7:0] b0, b1;
      rdata = $urandom; uns = 1'($urandom); size = mem_size_e'($urandom_range(0, 2));
      lo = (size == MEM_W) ? 2'd0 : (size == MEM_H) ? {1'($urandom), 1'b0} : 2'($urandom);
      #1;
      b0 = rdata[8 * lo +: 8];
      b1 = rdata[8 * (lo + 1) +: 8];
      if (size == MEM_B)      exp = uns ? {24'd0, b0} : {{24{b0[7]}}, b0};
      else if (size == MEM_H) exp = uns ? {16'd0, b1, b0} : {{16{b1[7]}}, b1, b0};
      else                    exp = rdata;
      checks++;
      if (value !== exp) begin failures++; if (failures < 10) $display("FAIL %h %0d %0d %0b -> %h exp %h", rdata, lo, size, uns, value, exp); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
