// tb_flash_emu_sram: checks the flash-emulating SRAM: 76-bit words written
// at random addresses of both banks read back intact one cycle after the
// request, with rvalid one cycle after every request.
// Word width (76 bits) and bank size (64 KiB of data) follow the source
// design; the single-cycle timing is this design's own.
module tb_flash_emu_sram;
  localparam int AW = 14;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic req, we, gnt, rvalid;
  logic [AW-1:0] addr;
  logic [75:0] wdata, rdata;

  flash_emu_sram dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .we_i(we), .addr_i(addr),
                      .wdata_i(wdata), .gnt_o(gnt), .rvalid_o(rvalid), .rdata_o(rdata));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [75:0] ref_w [int];
  initial begin
    req = 0; we = 0; addr = '0; wdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      int a;
      a = (i < 100) ? $urandom_range(0, 16383) : 0;
      if (i >= 100) begin
        // read back one of the written words
        int k, j;
        k = $urandom_range(0, ref_w.num() - 1);
        j = 0;
        foreach (ref_w[x]) begin if (j == k) a = x; j++; end
        @(negedge clk);
        req = 1; we = 0; addr = AW'(a);
        @(negedge clk);
        req = 0;
        #1;
        check(rvalid && rdata == ref_w[a], $sformatf("read word %0d", a));
      end else begin
        @(negedge clk);
        req = 1; we = 1; addr = AW'(a);
        wdata = {12'($urandom), $urandom, $urandom};
        ref_w[a] = wdata;
        #1;
        check(gnt, "always granted");
        @(negedge clk);
        req = 0;
      end
    end
    // last word of bank 1
    @(negedge clk); req = 1; we = 1; addr = '1; wdata = {76{1'b1}};
    @(negedge clk); we = 0;
    @(negedge clk); req = 0; #1;
    check(rdata == {76{1'b1}}, "top word");
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
