// tb_ot_se_top: end-to-end test of the secure-element extensions at their
// default sizes, following the host/secure-element flow of an offloaded job.
// OpenTitan runs on a 10-unit clock, the host SoC on a 14-unit clock.
//  1. boot: the boot-select pad is high (debug); BOOT_MODE must read 1.
//  2. the host (AXI master in the SoC domain) writes a job into the SCMI
//     mailbox (source, destination, length in the payload), marks the
//     channel busy, enables the completion interrupt and rings the doorbell;
//     the doorbell must reach OpenTitan as irq_mbox_ot_o.
//  3. the microcontroller (TL-UL host model) reads the job from the mailbox
//     through the TL-UL-to-AXI4 bridge, the clock crossing and the SoC-side
//     demultiplexer, and clears the doorbell.
//  4. it programs the DMA to copy 4 KiB from host memory (L3 model with 20
//     cycles of latency) into the TCDM and waits for the DMA interrupt.
//  5. it processes the data in the TCDM (word-wise y = 3x + 1, standing in
//     for a crypto kernel) through the crossbar; TCDM reads must take 2
//     cycles with the pass-through crossbar.
//  6. it moves the result back to host memory with the DMA while it keeps
//     reading the TCDM, so that bank conflicts occur and are resolved.
//  7. it writes a status word into the mailbox, frees the channel and rings
//     the completion doorbell; the host must see irq_host_o and find the
//     results in its memory.
// Side checks: flash direct write of 76-bit words and read-back through the
// regular flash datapath; LFSR output; routing to the peripheral port and
// to the external AXI window. Every mechanism is counted by a monitor; a
// mechanism that never happened counts as a failure.
// The flow follows the source design's offload sequence through the SCMI
// mailbox; the message contents, addresses, clock ratio and the 20-cycle
// host memory latency are this testbench's own assumptions.
module tb_ot_se_top;
  import ot_pkg::*;
  logic clk_ot = 0, clk_soc = 0, rst_ot_n = 0, rst_soc_n = 0;
  always #5 clk_ot = ~clk_ot;
  always #7 clk_soc = ~clk_soc;
  int checks = 0, failures = 0;

  tl_h2d_t tl_h2d, per_h2d;
  tl_d2h_t tl_d2h, per_d2h;
  axi_req_t ext_req, dma_req, hmb_req;
  axi_rsp_t ext_rsp, dma_rsp, hmb_rsp;
  logic irq_host, irq_mbox_ot, irq_dma, bootmode, bootmode_q, preloaded;
  logic f_req = 0, f_we = 0, f_gnt, f_rvalid;
  logic [13:0] f_addr = '0;
  logic [75:0] f_wdata = '0, f_rdata;
  logic [3:0] rng;
  logic rng_valid;

  ot_se_top dut (
    .clk_ot_i (clk_ot), .rst_ot_ni (rst_ot_n), .clk_soc_i (clk_soc), .rst_soc_ni (rst_soc_n),
    .tl_host_i (tl_h2d), .tl_host_o (tl_d2h), .tl_periph_o (per_h2d), .tl_periph_i (per_d2h),
    .axi_ext_o (ext_req), .axi_ext_i (ext_rsp), .axi_dma_o (dma_req), .axi_dma_i (dma_rsp),
    .axi_host_mbox_i (hmb_req), .axi_host_mbox_o (hmb_rsp), .irq_host_o (irq_host),
    .irq_mbox_ot_o (irq_mbox_ot), .irq_dma_o (irq_dma),
    .bootmode_i (bootmode), .bootmode_o (bootmode_q), .flash_preloaded_o (preloaded),
    .flash_ot_req_i (f_req), .flash_ot_we_i (f_we), .flash_ot_addr_i (f_addr),
    .flash_ot_wdata_i (f_wdata), .flash_ot_gnt_o (f_gnt), .flash_ot_rvalid_o (f_rvalid),
    .flash_ot_rdata_o (f_rdata), .rng_o (rng), .rng_valid_o (rng_valid)
  );

  tb_tl_host u_ot (.clk_i (clk_ot), .tl_o (tl_h2d), .tl_i (tl_d2h));
  tb_mem_dev #(.Words (256)) u_periph (.clk_i (clk_ot), .rst_ni (rst_ot_n), .tl_i (per_h2d), .tl_o (per_d2h));
  tb_axi_mem #(.Words (8192), .Latency (20)) u_l3  (.clk_i (clk_soc), .rst_ni (rst_soc_n), .req_i (dma_req), .rsp_o (dma_rsp));
  tb_axi_mem #(.Words (1024), .Latency (4))  u_ext (.clk_i (clk_soc), .rst_ni (rst_soc_n), .req_i (ext_req), .rsp_o (ext_rsp));
  tb_axi_master u_host (.clk_i (clk_soc), .req_o (hmb_req), .rsp_i (hmb_rsp));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ------------------------------------------------------------ monitors
  typedef enum int {
    MBootMode, MDoorbellOt, MBridgeMbox, MDmaIn, MTcdmAccess, MDmaOut, MHostIrq,
    MBankConflict, MFlashDw, MFlashRead, MRng, MPeriph, MExtWindow, MNum
  } mech_e;
  int mech [MNum];
  string mech_name [MNum] = '{"boot mode captured", "mailbox doorbell to OpenTitan",
    "bridge access to mailbox", "DMA L3->TCDM", "TCDM access via crossbar", "DMA TCDM->L3",
    "completion interrupt to host", "TCDM bank conflict", "flash direct write",
    "flash regular read", "LFSR output", "peripheral port access", "external AXI window"};
  initial foreach (mech[i]) mech[i] = 0;

  logic irq_mbox_ot_d = 0, irq_dma_d = 0, irq_host_d = 0;
  // monitors count only once reset has been released
  always @(posedge clk_ot) if (rst_ot_n) begin
    irq_mbox_ot_d <= irq_mbox_ot;
    irq_dma_d     <= irq_dma;
    if (irq_mbox_ot && !irq_mbox_ot_d) mech[MDoorbellOt]++;
    if (dut.tcdm_conflict) mech[MBankConflict]++;
    if (dut.fm_req && dut.fm_we && dut.fm_gnt && dut.u_flash_dw.enable_q) mech[MFlashDw]++;
    if (f_req && !f_we && f_gnt) mech[MFlashRead]++;
    if (rng_valid) mech[MRng]++;
    if (per_h2d.a_valid && per_d2h.a_ready) mech[MPeriph]++;
    if (dut.tcdm_req[0].req && dut.tcdm_rsp[0].gnt) mech[MTcdmAccess]++;
  end
  always @(posedge clk_soc) if (rst_soc_n) begin
    irq_host_d <= irq_host;
    if (irq_host && !irq_host_d) mech[MHostIrq]++;
    if (dut.dmx_req[1].ar_valid && dut.dmx_rsp[1].ar_ready) mech[MBridgeMbox]++;
    if (ext_req.aw_valid && ext_rsp.aw_ready) mech[MExtWindow]++;
    if (dma_req.ar_valid && dma_rsp.ar_ready) mech[MDmaIn]++;
    if (dma_req.aw_valid && dma_rsp.aw_ready) mech[MDmaOut]++;
  end

  // ------------------------------------------------------------ helpers
  localparam logic [31:0] MB = MBOX_BASE;
  localparam int unsigned JobBytes = 4096;
  localparam logic [31:0] L3Src = EXT_BASE + 32'h0000_1000;
  localparam logic [31:0] L3Dst = EXT_BASE + 32'h0000_4000;

  task automatic wait_irq_dma(input string what);
    int n;
    n = 0;
    while (!irq_dma && n < 20000) begin @(negedge clk_ot); n++; end
    check(irq_dma, what);
  endtask

  logic [31:0] rd, src, dst, len, src_data [JobBytes/4];
  int lat, t0, cyc_in, cyc_out;
  int cyc = 0;
  always @(posedge clk_ot) cyc++;

  initial begin
    bootmode = 1'b1;
    repeat (4) @(negedge clk_ot);
    rst_ot_n = 1; rst_soc_n = 1;
    repeat (10) @(negedge clk_ot);
    bootmode = 1'b0;                               // must be ignored from now on

    // 1. boot mode
    u_ot.read32(BOOTMGR_BASE, rd);
    check(rd == 1 && bootmode_q, "debug boot mode captured");
    if (rd == 1) mech[MBootMode]++;
    u_ot.write32(BOOTMGR_BASE + 32'h4, 32'h1);
    check(preloaded, "flash preloaded flag");

    // 2. host posts the job
    for (int i = 0; i < JobBytes / 4; i++) begin
      src_data[i] = $urandom;
      u_l3.mem[((L3Src >> 2) + i) % 8192] = src_data[i];
    end
    u_host.write32(MB + 32'h04, 32'h0);
    u_host.write32(MB + 32'h10, 32'h1);
    u_host.write32(MB + 32'h14, 32'd12);
    u_host.write32(MB + 32'h18, 32'h0000_0042);
    u_host.write32(MB + 32'h1C, L3Src);
    u_host.write32(MB + 32'h20, L3Dst);
    u_host.write32(MB + 32'h24, JobBytes);
    u_host.write32(MB + 32'h100, 32'h1);
    fork
      begin : wait_db
        while (!irq_mbox_ot) @(negedge clk_ot);
      end
      begin : wait_db_to
        repeat (100) @(negedge clk_ot);
      end
    join_any
    disable fork;
    check(irq_mbox_ot, "doorbell reached OpenTitan");

    // 3. microcontroller reads the job through the bridge
    u_ot.read32(MB + 32'h18, rd);  check(rd == 32'h42, "message header");
    u_ot.read32(MB + 32'h14, rd);  check(rd == 12, "message length");
    u_ot.read32(MB + 32'h1C, src); check(src == L3Src, "job source");
    u_ot.read32(MB + 32'h20, dst); check(dst == L3Dst, "job destination");
    u_ot.read32(MB + 32'h24, len); check(len == JobBytes, "job length");
    u_ot.write32(MB + 32'h100, 32'h0);
    repeat (8) @(negedge clk_ot);
    check(!irq_mbox_ot, "doorbell cleared");

    // 4. L3 -> TCDM
    u_ot.write32(DMA_BASE + 32'h0, src);
    u_ot.write32(DMA_BASE + 32'h4, TCDM_BASE);
    u_ot.write32(DMA_BASE + 32'h8, len);
    t0 = cyc;
    u_ot.write32(DMA_BASE + 32'hC, 32'h1);
    wait_irq_dma("DMA L3->TCDM done");
    cyc_in = cyc - t0;
    u_ot.read32(DMA_BASE + 32'h10, rd);
    check(rd[1:0] == 2'b10, "DMA status done, not busy");
    $display("DMA L3->TCDM: %0d bytes in %0d cycles", len, cyc_in);

    // 5. process in TCDM
    u_ot.read32_lat(TCDM_BASE, rd, lat);
    check(lat == 2, $sformatf("TCDM read latency %0d", lat));
    for (int i = 0; i < JobBytes / 4; i++) begin
      u_ot.read32(TCDM_BASE + 32'(4 * i), rd);
      check(rd == src_data[i], $sformatf("TCDM word %0d after DMA", i));
      u_ot.write32(TCDM_BASE + 32'(4 * i), 3 * rd + 1);
    end

    // 6. TCDM -> L3 with concurrent TCDM traffic
    u_ot.write32(DMA_BASE + 32'h0, TCDM_BASE);
    u_ot.write32(DMA_BASE + 32'h4, dst);
    u_ot.write32(DMA_BASE + 32'h8, len);
    t0 = cyc;
    u_ot.write32(DMA_BASE + 32'hC, 32'h1);
    begin
      int i;
      i = 0;
      while (!irq_dma) begin
        u_ot.read32(TCDM_BASE + 32'(4 * i), rd);
        check(rd == 3 * src_data[i] + 1, "TCDM read during DMA");
        i = (i + 1) % (JobBytes / 4);
      end
    end
    cyc_out = cyc - t0;
    check(irq_dma, "DMA TCDM->L3 done");
    $display("DMA TCDM->L3: %0d bytes in %0d cycles", len, cyc_out);
    repeat (20) @(negedge clk_soc);                 // last B response
    for (int i = 0; i < JobBytes / 4; i++)
      check(u_l3.mem[((L3Dst >> 2) + i) % 8192] == 3 * src_data[i] + 1,
            $sformatf("result word %0d in L3", i));

    // 7. completion
    u_ot.write32(MB + 32'h1C, 32'h0000_0000);       // SCMI status: success
    u_ot.write32(MB + 32'h04, 32'h1);               // channel free
    u_ot.write32(MB + 32'h104, 32'h1);
    repeat (20) @(negedge clk_soc);
    check(irq_host, "completion interrupt at host");
    u_host.read32(MB + 32'h04, rd);  check(rd == 1, "channel free at host");
    u_host.read32(MB + 32'h1C, rd);  check(rd == 0, "status word at host");
    u_host.write32(MB + 32'h104, 32'h0);
    repeat (3) @(negedge clk_soc);
    check(!irq_host, "completion interrupt cleared");

    // flash direct write, then read back through the regular datapath
    u_ot.write32(FLASHDW_BASE + 32'h00, 32'h1);
    for (int k = 0; k < 4; k++) begin
      logic [31:0] p1, p2, p3;
      logic [75:0] w;
      int a;
      p1 = $urandom; p2 = $urandom; p3 = $urandom;
      a = (k == 3) ? 16383 : $urandom_range(0, 16382);
      w = {p3[11:0], p2, p1};
      u_ot.write32(FLASHDW_BASE + 32'h04, p1);
      u_ot.write32(FLASHDW_BASE + 32'h08, p2);
      u_ot.write32(FLASHDW_BASE + 32'h0C, p3);
      u_ot.write32(FLASHDW_BASE + 32'h10, 32'(a));
      u_ot.write32(FLASHDW_BASE + 32'h14, 32'h1);
      repeat (3) @(negedge clk_ot);
      u_ot.write32(FLASHDW_BASE + 32'h00, 32'h0);
      @(negedge clk_ot);
      f_req = 1; f_we = 0; f_addr = 14'(a);
      #1 check(f_gnt, "regular flash datapath granted");
      @(negedge clk_ot);
      f_req = 0;
      #1 check(f_rvalid && f_rdata == w, $sformatf("flash word %0d", a));
      u_ot.write32(FLASHDW_BASE + 32'h00, 32'h1);
    end
    u_ot.write32(FLASHDW_BASE + 32'h00, 32'h0);

    // LFSR: the 4-bit output must take several values
    begin
      bit seen [16];
      int n;
      n = 0;
      repeat (64) begin
        @(negedge clk_ot);
        if (rng_valid) seen[rng] = 1;
      end
      foreach (seen[v]) n += seen[v];
      check(n >= 8, $sformatf("LFSR produced %0d distinct values", n));
    end

    // peripheral port and external window
    for (int k = 0; k < 8; k++) begin
      logic [31:0] d;
      d = $urandom;
      u_ot.write32(32'h4000_0000 + 32'(4 * k), d);
      u_ot.read32(32'h4000_0000 + 32'(4 * k), rd);
      check(rd == d && u_periph.mem[k] == d, "peripheral port");
      u_ot.write32(EXT_BASE + 32'h0010_0000 + 32'(4 * k), ~d);
      u_ot.read32(EXT_BASE + 32'h0010_0000 + 32'(4 * k), rd);
      check(rd == ~d, "external window");
    end

    check(mech[MHostIrq] == 1, "exactly one completion interrupt");
    foreach (mech[m]) begin
      $display("mechanism %-32s %0d", mech_name[m], mech[m]);
      checks++;
      if (mech[m] == 0) begin
        failures++;
        $display("FAIL: mechanism never happened: %s", mech_name[m]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk_ot);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
