// boot_manager: TL-UL register file that tells the boot ROM which boot mode
// to follow.
//
// Registers (byte offsets; layout is this design's own):
//   0x00 BOOT_MODE        bit 0: boot-select pad captured after reset
//                         (0 = secure boot, 1 = debug boot)            RO
//   0x04 FLASH_PRELOADED  bit 0: software sets it once the emulated flash
//                         already holds its image (hybrid boot), so the
//                         ROM skips loading it over SPI                  RW
// The pad is asynchronous: it passes a two-flop synchroniser and is latched
// once, SettleCycles cycles after reset, so a later change of the pad cannot
// switch the mode of a running boot. Register reads return one cycle after
// the request (two cycles from a TL-UL request through tlul_to_mem).
module boot_manager
  import ot_pkg::*;
#(
  parameter int unsigned SettleCycles = 4
) (
  input  logic    clk_i,
  input  logic    rst_ni,
  input  tl_h2d_t tl_i,
  output tl_d2h_t tl_o,
  input  logic    bootmode_i,
  output logic    bootmode_o,        // captured mode
  output logic    flash_preloaded_o
);
  mem_req_t reg_req;
  mem_rsp_t reg_rsp;

  tlul_to_mem u_adapter (
    .clk_i, .rst_ni, .tl_i, .tl_o,
    .mem_o (reg_req), .mem_i (reg_rsp)
  );

  logic       bootmode_sync;
  logic [$clog2(SettleCycles+1)-1:0] settle_q;
  logic       mode_q, captured_q, preload_q, rvalid_q;
  logic [31:0] rdata_q;

  irq_sync #(.Stages(2)) u_sync (
    .clk_i, .rst_ni, .irq_i (bootmode_i), .irq_o (bootmode_sync)
  );

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      settle_q   <= '0;
      mode_q     <= 1'b0;
      captured_q <= 1'b0;
      preload_q  <= 1'b0;
      rvalid_q   <= 1'b0;
      rdata_q    <= '0;
    end else begin
      if (!captured_q) begin
        if (settle_q == SettleCycles[$bits(settle_q)-1:0]) begin
          mode_q     <= bootmode_sync;
          captured_q <= 1'b1;
        end else begin
          settle_q <= settle_q + 1'b1;
        end
      end
      rvalid_q <= reg_req.req;
      if (reg_req.req && reg_req.we && reg_req.addr[2] && reg_req.be[0])
        preload_q <= reg_req.wdata[0];
      if (reg_req.req && !reg_req.we)
        rdata_q <= reg_req.addr[2] ? {31'd0, preload_q} : {31'd0, mode_q};
    end
  end

  assign reg_rsp.gnt        = 1'b1;
  assign reg_rsp.rvalid     = rvalid_q;
  assign reg_rsp.rdata      = rdata_q;
  assign bootmode_o         = mode_q;
  assign flash_preloaded_o  = preload_q;
endmodule
