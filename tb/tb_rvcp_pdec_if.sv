// tb_rvcp_pdec_if: random instruction words of both lengths. The expected
// register usage is derived from the RV32I form of each instruction, with
// 16-bit instructions first expanded by the reference expander in the test
// package (the design itself never expands them). Reserved 16-bit encodings
// are skipped. x0 as a source counts as "not used" on both sides.
module tb_rvcp_pdec_if;
  import rvcp_pkg::*;
  import rvcp_tb_pkg::*;
  word_t inst; if_dec_t dec;
  int checks = 0, failures = 0, n16 = 0;
  rvcp_pdec_if dut (.inst, .dec);
  initial begin
    #1_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int n = 0; n < 40000; n++) begin
      word_t i; logic [6:0] o; bit u1, u2, w, ld; int rd;
      inst = $urandom;
      if (n % 2 == 0) inst[1:0] = 2'b11;
      if (inst[1:0] != 2'b11) begin
        i = expand16(inst[15:0]);
        if (i == 0 || i == 32'h0010_0073) continue;
        n16++;
      end else i = inst;
      #1;
      o = i[6:0];
      u1 = o inside {7'h67, 7'h13, 7'h63, 7'h23, 7'h03, 7'h33};
      u2 = o inside {7'h63, 7'h23, 7'h33};
      rd = i[11:7];
      w  = (o inside {7'h37, 7'h17, 7'h6f, 7'h67, 7'h13, 7'h03, 7'h33}) && rd != 0;
      ld = (o == 7'h03) && rd != 0;
      u1 = u1 && i[19:15] != 0;
      u2 = u2 && i[24:20] != 0;
      checks++;
      if ((dec.use_rs1 && dec.rs1 != 0) != u1 || (u1 && dec.rs1 != i[19:15]) ||
          (dec.use_rs2 && dec.rs2 != 0) != u2 || (u2 && dec.rs2 != i[24:20]) ||
          dec.rd_we != w || (w && dec.rd != reg_t'(rd)) || dec.is_load != ld) begin
        failures++;
        if (failures < 10) $display("FAIL %h (as %h): %p", inst, i, dec);
      end
    end
    checks++; if (n16 < 1000) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
