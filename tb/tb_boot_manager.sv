// tb_boot_manager: checks the boot manager registers. The boot-select pad
// is captured once after reset (debug = 1 in the first run, secure = 0 in the
// second) and later pad changes do not alter BOOT_MODE; FLASH_PRELOADED is
// software writable and reads back; BOOT_MODE ignores writes.
// The register offsets are this design's own; the two registers and the
// pad-selected modes follow the source design.
module tb_boot_manager;
  import ot_pkg::*;
  logic clk = 0, rst_n = 0, pad = 0, mode, preload;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  tl_h2d_t h2d;
  tl_d2h_t d2h;

  boot_manager dut (.clk_i(clk), .rst_ni(rst_n), .tl_i(h2d), .tl_o(d2h),
                    .bootmode_i(pad), .bootmode_o(mode), .flash_preloaded_o(preload));
  tb_tl_host u_host (.clk_i(clk), .tl_o(h2d), .tl_i(d2h));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [31:0] rd;
  initial begin
    for (int run = 0; run < 2; run++) begin
      rst_n = 0;
      pad = (run == 0);
      repeat (3) @(negedge clk);
      rst_n = 1;
      repeat (10) @(negedge clk);
      pad = !pad;                        // late change must be ignored
      repeat (5) @(negedge clk);
      u_host.read32(BOOTMGR_BASE + 32'h0, rd);
      check(rd == 32'(run == 0), $sformatf("run %0d BOOT_MODE %0d", run, rd));
      check(mode == (run == 0), "bootmode_o");
      u_host.write32(BOOTMGR_BASE + 32'h0, 32'h0000_0001 ^ 32'(run == 0));
      u_host.read32(BOOTMGR_BASE + 32'h0, rd);
      check(rd == 32'(run == 0), "BOOT_MODE is read-only");
      u_host.read32(BOOTMGR_BASE + 32'h4, rd);
      check(rd == 0 && !preload, "FLASH_PRELOADED reset value");
      u_host.write32(BOOTMGR_BASE + 32'h4, 32'h1);
      u_host.read32(BOOTMGR_BASE + 32'h4, rd);
      check(rd == 1 && preload, "FLASH_PRELOADED set");
      u_host.write32(BOOTMGR_BASE + 32'h4, 32'h0);
      u_host.read32(BOOTMGR_BASE + 32'h4, rd);
      check(rd == 0 && !preload, "FLASH_PRELOADED cleared");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
