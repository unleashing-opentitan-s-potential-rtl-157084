// ot_se_top: the extensions that turn OpenTitan Earl Grey into a secure
// element embedded in a host SoC, assembled around the places where the
// unchanged OpenTitan IPs connect.
//
// OpenTitan clock domain (clk_ot_i):
//  * tlul_xbar: the TL-UL interconnect, host port = microcontroller data
//    port (tl_host_*), with FIFOs in pass-through mode (XbarPass = 1) or in
//    the stock registered mode (XbarPass = 0). Devices:
//      DMA frontend   DMA_BASE      boot manager  BOOTMGR_BASE
//      flash direct-write registers FLASHDW_BASE
//      TCDM (via TLUL-to-TCDM)      TCDM_BASE
//      TL-UL-to-AXI4 bridge         EXT_BASE (upper 2 GiB)
//      any other address            tl_periph_* (the unchanged Earl Grey
//                                   peripherals, crypto engines, SRAM, ROM)
//  * tcdm: 8 x 4 KiB banks, master 0 = TL-UL adapter, master 1 = DMA (via
//    AXI-to-TCDM).
//  * dma: external AXI4 port crosses to the SoC clock (axi_dma_*).
//  * flash_dw + flash_emu_sram: emulated flash; the regular flash controller
//    datapath arrives on flash_ot_*.
//  * boot_manager (bootmode_i pad), lfsr_rng (rng_* to the entropy source).
// SoC clock domain (clk_soc_i):
//  * the bridge's AXI4 master, after its CDC, goes to the SCMI mailbox when
//    it addresses MBOX_BASE and out on axi_ext_* otherwise;
//  * scmi_mailbox: host access through axi_host_mbox_*, interrupt to the
//    host on irq_host_o; its doorbell to OpenTitan is synchronised into
//    clk_ot_i (irq_mbox_ot_o, for OpenTitan's PLIC).
// Interrupt outputs to the OpenTitan PLIC: irq_mbox_ot_o, irq_dma_o.
//
// The set of blocks and their connections follow the design's top wrapper
// and its DMA/TCDM integration; the address map, the port grouping and the
// two-way SoC demultiplexer are this design's own choices.
module ot_se_top
  import ot_pkg::*;
#(
  parameter bit          XbarPass      = 1'b1,
  parameter int unsigned TcdmBanks     = 8,
  parameter int unsigned TcdmBankWords = 1024,
  parameter int unsigned DmaMaxBurst   = 16,
  parameter int unsigned FlashBanks    = 2,
  parameter int unsigned FlashWords    = 8192,
  parameter int unsigned MboxPayload   = 32,
  localparam int unsigned FlashAddrW   = $clog2(FlashBanks * FlashWords)
) (
  input  logic     clk_ot_i,
  input  logic     rst_ot_ni,
  input  logic     clk_soc_i,
  input  logic     rst_soc_ni,
  // microcontroller data port (TL-UL host)
  input  tl_h2d_t  tl_host_i,
  output tl_d2h_t  tl_host_o,
  // remaining Earl Grey devices
  output tl_h2d_t  tl_periph_o,
  input  tl_d2h_t  tl_periph_i,
  // SoC side AXI4 masters
  output axi_req_t axi_ext_o,
  input  axi_rsp_t axi_ext_i,
  output axi_req_t axi_dma_o,
  input  axi_rsp_t axi_dma_i,
  // host access to the mailbox
  input  axi_req_t axi_host_mbox_i,
  output axi_rsp_t axi_host_mbox_o,
  output logic     irq_host_o,
  // interrupts toward OpenTitan's PLIC
  output logic     irq_mbox_ot_o,
  output logic     irq_dma_o,
  // boot select pad and boot manager state
  input  logic     bootmode_i,
  output logic     bootmode_o,
  output logic     flash_preloaded_o,
  // regular flash controller datapath
  input  logic                  flash_ot_req_i,
  input  logic                  flash_ot_we_i,
  input  logic [FlashAddrW-1:0] flash_ot_addr_i,
  input  logic [75:0]           flash_ot_wdata_i,
  output logic                  flash_ot_gnt_o,
  output logic                  flash_ot_rvalid_o,
  output logic [75:0]           flash_ot_rdata_o,
  // entropy toward the entropy source
  output logic [3:0] rng_o,
  output logic       rng_valid_o
);
  // ------------------------------------------------------ TL-UL crossbar
  localparam int unsigned NumDev = 6;
  localparam int unsigned DevDma = 0, DevBoot = 1, DevFlash = 2, DevTcdm = 3,
                          DevExt = 4, DevPeriph = 5;
  localparam logic [NumDev-1:0][31:0] AddrBase = {32'h0, EXT_BASE, TCDM_BASE,
                                                  FLASHDW_BASE, BOOTMGR_BASE, DMA_BASE};
  localparam logic [NumDev-1:0][31:0] AddrMask = {32'h0, MASK_2G, MASK_32K,
                                                  MASK_4K, MASK_4K, MASK_4K};

  tl_h2d_t xd_h2d [NumDev];
  tl_d2h_t xd_d2h [NumDev];

  tlul_xbar #(
    .NumDev (NumDev), .AddrBase (AddrBase), .AddrMask (AddrMask), .Pass (XbarPass)
  ) u_xbar (
    .clk_i (clk_ot_i), .rst_ni (rst_ot_ni),
    .tl_h_i (tl_host_i), .tl_h_o (tl_host_o),
    .tl_d_o (xd_h2d), .tl_d_i (xd_d2h)
  );

  assign tl_periph_o        = xd_h2d[DevPeriph];
  assign xd_d2h[DevPeriph]  = tl_periph_i;

  // ----------------------------------------------------------------- TCDM
  mem_req_t tcdm_req [2];
  mem_rsp_t tcdm_rsp [2];
  logic     tcdm_conflict;

  tlul_to_mem u_tlul2tcdm (
    .clk_i (clk_ot_i), .rst_ni (rst_ot_ni),
    .tl_i (xd_h2d[DevTcdm]), .tl_o (xd_d2h[DevTcdm]),
    .mem_o (tcdm_req[0]), .mem_i (tcdm_rsp[0])
  );

  tcdm #(.NumMasters (2), .NumBanks (TcdmBanks), .BankWords (TcdmBankWords)) u_tcdm (
    .clk_i (clk_ot_i), .rst_ni (rst_ot_ni),
    .req_i (tcdm_req), .rsp_o (tcdm_rsp), .conflict_o (tcdm_conflict)
  );

  // ------------------------------------------------------------------ DMA
  axi_req_t dma_ext_req, dma_tcdm_req;
  axi_rsp_t dma_ext_rsp, dma_tcdm_rsp;

  dma #(.MaxBurst (DmaMaxBurst)) u_dma (
    .clk_i (clk_ot_i), .rst_ni (rst_ot_ni),
    .tl_i (xd_h2d[DevDma]), .tl_o (xd_d2h[DevDma]),
    .ext_req_o (dma_ext_req), .ext_rsp_i (dma_ext_rsp),
    .tcdm_req_o (dma_tcdm_req), .tcdm_rsp_i (dma_tcdm_rsp),
    .irq_done_o (irq_dma_o)
  );

  axi_to_mem u_axi2tcdm (
    .clk_i (clk_ot_i), .rst_ni (rst_ot_ni),
    .axi_i (dma_tcdm_req), .axi_o (dma_tcdm_rsp),
    .mem_o (tcdm_req[1]), .mem_i (tcdm_rsp[1])
  );

  axi_cdc u_dma_cdc (
    .src_clk_i (clk_ot_i), .src_rst_ni (rst_ot_ni),
    .src_req_i (dma_ext_req), .src_rsp_o (dma_ext_rsp),
    .dst_clk_i (clk_soc_i), .dst_rst_ni (rst_soc_ni),
    .dst_req_o (axi_dma_o), .dst_rsp_i (axi_dma_i)
  );

  // ------------------------------------------------ TL-UL-to-AXI4 bridge
  axi_req_t br_req, br_soc_req;
  axi_rsp_t br_rsp, br_soc_rsp;
  axi_req_t dmx_req [2];
  axi_rsp_t dmx_rsp [2];

  tlul2axi u_tlul2axi (
    .clk_i (clk_ot_i), .rst_ni (rst_ot_ni),
    .tl_i (xd_h2d[DevExt]), .tl_o (xd_d2h[DevExt]),
    .axi_o (br_req), .axi_i (br_rsp)
  );

  axi_cdc u_br_cdc (
    .src_clk_i (clk_ot_i), .src_rst_ni (rst_ot_ni),
    .src_req_i (br_req), .src_rsp_o (br_rsp),
    .dst_clk_i (clk_soc_i), .dst_rst_ni (rst_soc_ni),
    .dst_req_o (br_soc_req), .dst_rsp_i (br_soc_rsp)
  );

  axi_demux2 #(.Base (MBOX_BASE), .Mask (MASK_4K)) u_demux (
    .clk_i (clk_soc_i), .rst_ni (rst_soc_ni),
    .req_i (br_soc_req), .rsp_o (br_soc_rsp),
    .req_o (dmx_req), .rsp_i (dmx_rsp)
  );

  assign axi_ext_o  = dmx_req[0];
  assign dmx_rsp[0] = axi_ext_i;

  // --------------------------------------------------------- SCMI mailbox
  logic irq_mbox_ot_soc;

  scmi_mailbox #(.PayloadWords (MboxPayload)) u_mbox (
    .clk_i (clk_soc_i), .rst_ni (rst_soc_ni),
    .host_req_i (axi_host_mbox_i), .host_rsp_o (axi_host_mbox_o),
    .ot_req_i (dmx_req[1]), .ot_rsp_o (dmx_rsp[1]),
    .irq_ot_o (irq_mbox_ot_soc), .irq_host_o (irq_host_o)
  );

  irq_sync u_irq_cdc (
    .clk_i (clk_ot_i), .rst_ni (rst_ot_ni),
    .irq_i (irq_mbox_ot_soc), .irq_o (irq_mbox_ot_o)
  );

  // --------------------------------------------------------- boot manager
  boot_manager u_boot_mgr (
    .clk_i (clk_ot_i), .rst_ni (rst_ot_ni),
    .tl_i (xd_h2d[DevBoot]), .tl_o (xd_d2h[DevBoot]),
    .bootmode_i, .bootmode_o, .flash_preloaded_o
  );

  // ------------------------------------------------------- emulated flash
  logic                  fm_req, fm_we, fm_gnt, fm_rvalid;
  logic [FlashAddrW-1:0] fm_addr;
  logic [75:0]           fm_wdata, fm_rdata;

  flash_dw #(.AddrW (FlashAddrW), .Width (76)) u_flash_dw (
    .clk_i (clk_ot_i), .rst_ni (rst_ot_ni),
    .tl_i (xd_h2d[DevFlash]), .tl_o (xd_d2h[DevFlash]),
    .ot_req_i (flash_ot_req_i), .ot_we_i (flash_ot_we_i),
    .ot_addr_i (flash_ot_addr_i), .ot_wdata_i (flash_ot_wdata_i),
    .ot_gnt_o (flash_ot_gnt_o), .ot_rvalid_o (flash_ot_rvalid_o),
    .ot_rdata_o (flash_ot_rdata_o),
    .mem_req_o (fm_req), .mem_we_o (fm_we), .mem_addr_o (fm_addr),
    .mem_wdata_o (fm_wdata), .mem_gnt_i (fm_gnt), .mem_rvalid_i (fm_rvalid),
    .mem_rdata_i (fm_rdata)
  );

  flash_emu_sram #(.Banks (FlashBanks), .WordsPerBank (FlashWords), .Width (76)) u_flash_mem (
    .clk_i (clk_ot_i), .rst_ni (rst_ot_ni),
    .req_i (fm_req), .we_i (fm_we), .addr_i (fm_addr), .wdata_i (fm_wdata),
    .gnt_o (fm_gnt), .rvalid_o (fm_rvalid), .rdata_o (fm_rdata)
  );

  // ------------------------------------------------------------- LFSR RNG
  lfsr_rng u_rng (
    .clk_i (clk_ot_i), .rst_ni (rst_ot_ni), .en_i (1'b1),
    .rng_o, .rng_valid_o
  );

  // TCDM bank conflicts are resolved by the interconnect; the flag is only
  // observed by simulation.
  logic unused_conflict;
  assign unused_conflict = tcdm_conflict;
endmodule
