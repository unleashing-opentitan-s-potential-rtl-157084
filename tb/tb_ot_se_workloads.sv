// tb_ot_se_workloads: runs the data movement of the evaluated crypto
// workloads (SHA-256, HMAC, AES-256 on payloads of 64, 256, 1024 and 4096
// bytes) through the full-size top. The crypto engines themselves sit
// outside this design, so the test covers what the top must deliver to
// them. The payload sizes come from the source design's evaluation; the
// 20-cycle host memory latency is this testbench's own assumption.
//  * payload in L1: the microcontroller writes it into the TCDM and reads it
//    back word by word; every load must cost 2 cycles, so data supply
//    (0.5 cycles/B) stays below the HMAC engine's nominal 1.25 cycles/B and
//    the AES engine's 4.5 cycles/B.
//  * payload in L3: the DMA copies it from host memory into the TCDM and the
//    result (input with every word inverted, standing in for the engine's
//    output) back to host memory; data must arrive intact, and for payloads
//    of 256 bytes and more the copy must cost at most 1.4 cycles per byte,
//    the DMA cost reported for the full system.
//  * a single microcontroller load from host memory through the bridge is
//    measured and must return the right word.
// OpenTitan runs on a 10-unit clock, the host SoC on a 14-unit clock.
module tb_ot_se_workloads;
  import ot_pkg::*;
  logic clk_ot = 0, clk_soc = 0, rst_ot_n = 0, rst_soc_n = 0;
  always #5 clk_ot = ~clk_ot;
  always #7 clk_soc = ~clk_soc;
  int checks = 0, failures = 0;

  tl_h2d_t tl_h2d, per_h2d;
  tl_d2h_t tl_d2h, per_d2h;
  axi_req_t ext_req, dma_req, hmb_req;
  axi_rsp_t ext_rsp, dma_rsp, hmb_rsp;
  logic irq_host, irq_mbox_ot, irq_dma, bootmode_q, preloaded;
  logic f_gnt, f_rvalid;
  logic [75:0] f_rdata;
  logic [3:0] rng;
  logic rng_valid;

  ot_se_top dut (
    .clk_ot_i (clk_ot), .rst_ot_ni (rst_ot_n), .clk_soc_i (clk_soc), .rst_soc_ni (rst_soc_n),
    .tl_host_i (tl_h2d), .tl_host_o (tl_d2h), .tl_periph_o (per_h2d), .tl_periph_i (per_d2h),
    .axi_ext_o (ext_req), .axi_ext_i (ext_rsp), .axi_dma_o (dma_req), .axi_dma_i (dma_rsp),
    .axi_host_mbox_i (hmb_req), .axi_host_mbox_o (hmb_rsp), .irq_host_o (irq_host),
    .irq_mbox_ot_o (irq_mbox_ot), .irq_dma_o (irq_dma),
    .bootmode_i (1'b0), .bootmode_o (bootmode_q), .flash_preloaded_o (preloaded),
    .flash_ot_req_i (1'b0), .flash_ot_we_i (1'b0), .flash_ot_addr_i ('0),
    .flash_ot_wdata_i ('0), .flash_ot_gnt_o (f_gnt), .flash_ot_rvalid_o (f_rvalid),
    .flash_ot_rdata_o (f_rdata), .rng_o (rng), .rng_valid_o (rng_valid)
  );

  tb_tl_host u_ot (.clk_i (clk_ot), .tl_o (tl_h2d), .tl_i (tl_d2h));
  tb_mem_dev #(.Words (16)) u_periph (.clk_i (clk_ot), .rst_ni (rst_ot_n), .tl_i (per_h2d), .tl_o (per_d2h));
  tb_axi_mem #(.Words (8192), .Latency (20)) u_l3  (.clk_i (clk_soc), .rst_ni (rst_soc_n), .req_i (dma_req), .rsp_o (dma_rsp));
  tb_axi_mem #(.Words (1024), .Latency (20)) u_ext (.clk_i (clk_soc), .rst_ni (rst_soc_n), .req_i (ext_req), .rsp_o (ext_rsp));
  assign hmb_req = '0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int cyc = 0;
  always @(posedge clk_ot) cyc++;

  task automatic dma_copy(input logic [31:0] src, input logic [31:0] dst, input int n,
                          output int cycles);
    int t0, w;
    u_ot.write32(DMA_BASE + 32'h0, src);
    u_ot.write32(DMA_BASE + 32'h4, dst);
    u_ot.write32(DMA_BASE + 32'h8, n);
    @(negedge clk_ot);
    t0 = cyc;
    u_ot.write32(DMA_BASE + 32'hC, 32'h1);
    w = 0;
    while (!irq_dma && w < 50000) begin @(negedge clk_ot); w++; end
    cycles = cyc - t0;
    check(irq_dma, "DMA finished");
  endtask

  localparam int Sizes [4] = '{64, 256, 1024, 4096};
  localparam logic [31:0] L3In  = EXT_BASE + 32'h0000_2000;
  localparam logic [31:0] L3Out = EXT_BASE + 32'h0000_6000;
  logic [31:0] data [1024];
  logic [31:0] rd;
  int lat, cycles;

  initial begin
    repeat (4) @(negedge clk_ot);
    rst_ot_n = 1; rst_soc_n = 1;
    repeat (10) @(negedge clk_ot);

    // single load from host memory through the bridge
    u_ext.mem[5] = 32'hC0FF_EE00;
    u_ot.read32_lat(EXT_BASE + 32'h14, rd, lat);
    check(rd == 32'hC0FF_EE00, "load from host memory");
    $display("load from host memory (20-cycle memory, two CDCs): %0d cycles", lat);

    foreach (Sizes[s]) begin
      int n, words, worst;
      n = Sizes[s];
      words = n / 4;
      for (int i = 0; i < words; i++) data[i] = $urandom;

      // payload in L1
      worst = 0;
      for (int i = 0; i < words; i++) u_ot.write32(TCDM_BASE + 32'(4 * i), data[i]);
      for (int i = 0; i < words; i++) begin
        u_ot.read32_lat(TCDM_BASE + 32'(4 * i), rd, lat);
        if (rd != data[i]) check(0, $sformatf("L1 %0d B word %0d", n, i));
        if (lat > worst) worst = lat;
      end
      check(worst == 2, $sformatf("L1 %0d B: worst load %0d cycles", n, worst));
      $display("payload %4d B in L1: load cost %0d cycles per 4 B = %0.2f cycles/B", n, worst,
               real'(worst) / 4.0);

      // payload in L3
      for (int i = 0; i < words; i++) u_l3.mem[((L3In >> 2) + i) % 8192] = data[i];
      dma_copy(L3In, TCDM_BASE, n, cycles);
      $display("payload %4d B in L3: DMA L3->TCDM %0d cycles = %0.2f cycles/B", n, cycles,
               real'(cycles) / real'(n));
      if (n >= 256) check(real'(cycles) / real'(n) <= 1.4, $sformatf("DMA cost %0d B", n));
      for (int i = 0; i < words; i++) begin
        u_ot.read32(TCDM_BASE + 32'(4 * i), rd);
        if (rd != data[i]) check(0, $sformatf("L3 %0d B word %0d in TCDM", n, i));
        u_ot.write32(TCDM_BASE + 32'(4 * i), ~rd);
      end
      dma_copy(TCDM_BASE, L3Out, n, cycles);
      $display("payload %4d B in L3: DMA TCDM->L3 %0d cycles = %0.2f cycles/B", n, cycles,
               real'(cycles) / real'(n));
      repeat (40) @(negedge clk_soc);
      begin
        int bad;
        bad = 0;
        for (int i = 0; i < words; i++)
          if (u_l3.mem[((L3Out >> 2) + i) % 8192] != ~data[i]) bad++;
        check(bad == 0, $sformatf("L3 %0d B result (%0d bad words)", n, bad));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk_ot);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
