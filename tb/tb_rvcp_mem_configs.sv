// tb_rvcp_mem_configs: the processor in the two other memory configurations
// of the original evaluation, running random RV32IC programs in lock step
// with the instruction-set model.
//   - 64 KB instruction and data memory (the size Embench-class programs
//     need): code starts at 0xF000 (reset address) and data at 0xE000, so
//     the top address bit of both memories is used.
//   - 4 KB instruction and data memory (the small configuration): code at 0,
//     data at 0x800, programs kept under 1 KB.
// The predictor keeps its default size in both.
module tb_rvcp_mem_configs;
  logic clk = 1'b0;
  logic start = 1'b0;
  logic done64, done4;
  int   c64, f64, r64, c4, f4, r4;
  int   checks, failures;

  always #5 clk = ~clk;

  rvcp_cfg_harness #(.IMEM_BYTES(65536), .DMEM_BYTES(65536), .CODE_BASE(32'hF000),
                     .DATA_BASE(32'hE000), .MAX_HW(2040)) u64 (
    .clk, .start, .done(done64), .checks(c64), .failures(f64), .retired(r64));
  rvcp_cfg_harness #(.IMEM_BYTES(4096), .DMEM_BYTES(4096), .CODE_BASE(0),
                     .DATA_BASE(32'h800), .MAX_HW(512)) u4 (
    .clk, .start, .done(done4), .checks(c4), .failures(f4), .retired(r4));

  initial begin
    #10_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c64 + c4, f64 + f4 + 1);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    start = 1'b1;
    wait (done64 && done4);
    checks = c64 + c4 + 2;
    failures = f64 + f4;
    if (r64 < 1000) failures++;
    if (r4 < 1000) failures++;
    $display("64 KB memories: %0d instructions retired, 4 KB memories: %0d", r64, r4);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
