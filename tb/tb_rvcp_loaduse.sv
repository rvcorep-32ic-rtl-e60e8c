// tb_rvcp_loaduse: random IF decodes against a random ID load. A stall is
// expected exactly when the ID instruction is a valid load with a non-zero
// destination that the valid IF instruction reads through a used source.
module tb_rvcp_loaduse;
  import rvcp_pkg::*;
  logic if_valid, id_valid, id_is_load, stall; if_dec_t d; reg_t id_rd;
  int checks = 0, failures = 0, nstall = 0;
  rvcp_loaduse dut (.if_valid, .if_dec(d), .id_valid, .id_is_load, .id_rd, .stall);
  initial begin
    #1_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int n = 0; n < 20000; n++) begin
      bit exp, hit1, hit2;
      d = if_dec_t'({$urandom, $urandom});
      id_rd = reg_t'($urandom_range(0, 7));
      d.rs1 = reg_t'($urandom_range(0, 7)); d.rs2 = reg_t'($urandom_range(0, 7));
      if_valid = $urandom_range(0, 7) != 0; id_valid = $urandom_range(0, 7) != 0; id_is_load = 1'($urandom);
      #1;
      hit1 = d.use_rs1 && (d.rs1 == id_rd);
      hit2 = d.use_rs2 && (d.rs2 == id_rd);
      exp = 0;
      if (if_valid && id_valid && id_is_load && id_rd != 0 && (hit1 || hit2)) exp = 1;
      nstall += exp;
      checks++;
      if (stall !== exp) begin failures++; if (failures < 10) $display("FAIL %p rd=%0d", d, id_rd); end
    end
    checks++; if (nstall == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
