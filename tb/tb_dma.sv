// tb_dma: checks the DMA engine end to end through its register file.
// Two AXI memory models sit on the external port (with access latency) and
// on the TCDM port. Jobs move random payloads external -> TCDM and
// TCDM -> external, including one that starts just below a 4 KiB boundary;
// the data must arrive intact, no burst may cross a 4 KiB boundary or exceed
// 16 beats, STATUS must show busy then done, and with zero-latency memories
// a 4 KiB transfer must run close to the nominal 0.25 cycles per byte
// (at most 0.3).
module tb_dma;
  import ot_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  tl_h2d_t h2d;
  tl_d2h_t d2h;
  axi_req_t ext_req, tcdm_req;
  axi_rsp_t ext_rsp, tcdm_rsp;
  logic irq;
  int lat_sel = 0;

  dma dut (.clk_i(clk), .rst_ni(rst_n), .tl_i(h2d), .tl_o(d2h),
           .ext_req_o(ext_req), .ext_rsp_i(ext_rsp), .tcdm_req_o(tcdm_req), .tcdm_rsp_i(tcdm_rsp),
           .irq_done_o(irq));
  tb_tl_host u_host (.clk_i(clk), .tl_o(h2d), .tl_i(d2h));
  tb_axi_mem #(.Words(8192), .Latency(0)) u_ext  (.clk_i(clk), .rst_ni(rst_n), .req_i(ext_req),  .rsp_o(ext_rsp));
  tb_axi_mem #(.Words(8192), .Latency(0)) u_tcdm (.clk_i(clk), .rst_ni(rst_n), .req_i(tcdm_req), .rsp_o(tcdm_rsp));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // burst rule monitor
  int bursts = 0, split4k = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (ext_req.ar_valid && ext_rsp.ar_ready) begin
        bursts++;
        if (((ext_req.ar.addr & 32'hFFF) + (32'(ext_req.ar.len) + 1) * 4) > 32'h1000) begin
          failures++; $display("FAIL: AR crosses 4 KiB");
        end
        if (ext_req.ar.len > 15) begin failures++; $display("FAIL: burst too long"); end
        if (ext_req.ar.len < 15 && ((ext_req.ar.addr + (32'(ext_req.ar.len) + 1) * 4) & 32'hFFF) == 0) split4k++;
      end
      if (tcdm_req.aw_valid && tcdm_rsp.aw_ready && ((tcdm_req.aw.addr & 32'hFFF) + (32'(tcdm_req.aw.len) + 1) * 4) > 32'h1000) begin
        failures++; $display("FAIL: AW crosses 4 KiB");
      end
    end
  end

  task automatic run_job(input logic [31:0] src, input logic [31:0] dst, input int bytes, output int cycles);
    logic [31:0] st;
    u_host.write32(DMA_BASE + 32'h0, src);
    u_host.write32(DMA_BASE + 32'h4, dst);
    u_host.write32(DMA_BASE + 32'h8, 32'(bytes));
    u_host.write32(DMA_BASE + 32'hC, 32'h1);
    cycles = 0;
    u_host.read32(DMA_BASE + 32'h10, st);
    check(st[0] == 1'b1 || bytes < 64, "busy after start");
    while (!irq && cycles < 100000) begin @(posedge clk); cycles++; end
    u_host.read32(DMA_BASE + 32'h10, st);
    check(st[2:0] == 3'b010, $sformatf("status done %b", st[2:0]));
  endtask

  int cyc0, n;
  logic [31:0] rd;
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 8192; i++) u_ext.mem[i] = $urandom;
    // register read-back
    u_host.write32(DMA_BASE + 32'h0, 32'h8000_1234);
    u_host.read32(DMA_BASE + 32'h0, rd);
    check(rd == 32'h8000_1234, "SRC read-back");
    // external -> TCDM, 4 KiB, timing measured from the start write
    fork
      begin
        wait (dut.u_backend.start_i);
        cyc0 = 0;
        while (!dut.u_backend.done_o) begin @(posedge clk); cyc0++; end
      end
      run_job(32'h8000_0000, TCDM_BASE, 4096, n);
    join
    for (int i = 0; i < 1024; i++) check(u_tcdm.mem[i] == u_ext.mem[i], $sformatf("ext->tcdm word %0d", i));
    $display("4 KiB external->TCDM: %0d cycles, %0.3f cycles/byte", cyc0, real'(cyc0) / 4096.0);
    check(real'(cyc0) / 4096.0 <= 0.30, "DMA bandwidth near 0.25 cycles/byte");
    // TCDM -> external, starting 64 bytes below a 4 KiB boundary
    for (int i = 0; i < 1024; i++) u_tcdm.mem[i] = u_tcdm.mem[i] ^ 32'hFFFF_0000;
    run_job(TCDM_BASE, 32'h8000_2FC0, 1024, n);
    for (int i = 0; i < 256; i++) check(u_ext.mem[(32'h2FC0 >> 2) + i] == u_tcdm.mem[i], $sformatf("tcdm->ext word %0d", i));
    // external -> TCDM crossing a 4 KiB boundary on the read side
    run_job(32'h8000_0FD0, TCDM_BASE + 32'h4000, 512, n);
    for (int i = 0; i < 128; i++) check(u_tcdm.mem[(32'h4000 >> 2) + i] == u_ext.mem[(32'hFD0 >> 2) + i], $sformatf("split word %0d", i));
    check(split4k > 0, "a burst was cut at a 4 KiB boundary");
    check(bursts > 0, "bursts observed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
