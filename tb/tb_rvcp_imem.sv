// tb_rvcp_imem: fills the default-size instruction memory through the load
// port, then reads random pairs of entries on both ports at once and checks
// that each port returns its entry one clock after the address.
module tb_rvcp_imem;
  localparam int AW = 14;
  logic clk = 0, init_we = 0; logic [AW-1:0] addr_a = 0, addr_b = 0, init_addr = 0;
  logic [15:0] q_a, q_b, init_data = 0;
  logic [15:0] model[1 << AW];
  int checks = 0, failures = 0;
  rvcp_imem dut (.*);
  always #5 clk = ~clk;
  initial begin
    #5_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int k = 0; k < (1 << AW); k++) begin
      @(negedge clk);
      init_we = 1; init_addr = AW'(k); init_data = 16'($urandom); model[k] = init_data;
    end
    @(negedge clk); init_we = 0;
    for (int n = 0; n < 3000; n++) begin
      logic [AW-1:0] a, b;
      a = AW'($urandom); b = ($urandom_range(0, 1)) ? AW'(a + 1) : AW'($urandom);
      addr_a = a; addr_b = b;
      @(negedge clk);
      addr_a = AW'($urandom); addr_b = AW'($urandom);   // next address must not matter
      #1;
      checks += 2;
      if (q_a !== model[a] || q_b !== model[b]) begin
        failures++; if (failures < 10) $display("FAIL %0d:%h %0d:%h", a, q_a, b, q_b);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
