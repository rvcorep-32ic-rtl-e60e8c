// tb_rvcp_regfile: random writes and asynchronous reads against a model
// array; x0 must read zero even after writes to it.
module tb_rvcp_regfile;
  import rvcp_pkg::*;
  logic clk = 0, we; reg_t rs1, rs2, rd; word_t rd1, rd2, wd;
  word_t model[32];
  int checks = 0, failures = 0;
  rvcp_regfile dut (.clk, .rs1, .rs2, .rd1, .rd2, .we, .rd, .wd);
  always #5 clk = ~clk;
  initial begin
    #10_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    foreach (model[i]) model[i] = 0;
    we = 0; rd = 0; wd = 0; rs1 = 0; rs2 = 0;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      rs1 = reg_t'($urandom); rs2 = reg_t'($urandom);
      #1;
      checks += 2;
      if (rd1 !== model[rs1] || rd2 !== model[rs2]) begin
        failures++; if (failures < 10) $display("FAIL read x%0d=%h x%0d=%h", rs1, rd1, rs2, rd2);
      end
      we = 1'($urandom); rd = reg_t'($urandom); wd = $urandom;
      @(posedge clk); #1;
      if (we && rd != 0) model[rd] = wd;
      we = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
