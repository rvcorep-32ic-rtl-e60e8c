// tb_rvcp_dmem: random byte-enable writes and reads over a window of the
// default-size data memory, checked against a byte model; read data is
// expected one clock after the address.
module tb_rvcp_dmem;
  logic clk = 0, init_we = 0; logic [3:0] we = 0;
  logic [31:0] addr = 0, wdata = 0, rdata, init_addr = 0, init_data = 0;
  logic [31:0] model[256];
  int checks = 0, failures = 0;
  rvcp_dmem dut (.*);
  always #5 clk = ~clk;
  initial begin
    #5_000_000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int k = 0; k < 256; k++) begin
      @(negedge clk);
      init_we = 1; init_addr = 32'h7c00 + 4 * k; init_data = $urandom; model[k] = init_data;
    end
    @(negedge clk); init_we = 0;
    for (int n = 0; n < 5000; n++) begin
      int k;
      k = $urandom_range(0, 255);
      addr = 32'h7c00 + 4 * k + $urandom_range(0, 3);
      if ($urandom_range(0, 1)) begin
        we = 4'($urandom); wdata = $urandom;
        @(negedge clk);
        for (int b = 0; b < 4; b++) if (we[b]) model[k][8 * b +: 8] = wdata[8 * b +: 8];
        we = 0;
      end else begin
        @(negedge clk);
        checks++;
        if (rdata !== model[k]) begin
          failures++; if (failures < 10) $display("FAIL word %0d: %h exp %h", k, rdata, model[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
