// dma: DMA engine of the secure element, moving payloads across the
// OpenTitan perimeter between the host SoC memory and the accelerators' TCDM.
//
// It is made of the two parts the paper names: a frontend, a TL-UL register
// file where the microcontroller writes source, destination and length and
// starts a job, and a backend that performs the transfer with AXI4 bursts on
// two master ports, one toward the host interconnect and one toward the TCDM.
// See dma_frontend and dma_backend for the register map and the timing.
module dma
  import ot_pkg::*;
#(
  parameter int unsigned MaxBurst  = 16,
  parameter int unsigned FifoDepth = 32,
  parameter logic [31:0] TcdmBase  = TCDM_BASE,
  parameter logic [31:0] TcdmMask  = MASK_32K
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  tl_h2d_t  tl_i,
  output tl_d2h_t  tl_o,
  output axi_req_t ext_req_o,
  input  axi_rsp_t ext_rsp_i,
  output axi_req_t tcdm_req_o,
  input  axi_rsp_t tcdm_rsp_i,
  output logic     irq_done_o
);
  logic        start, busy, done, err;
  logic [31:0] src, dst, len;

  dma_frontend u_frontend (
    .clk_i, .rst_ni, .tl_i, .tl_o,
    .start_o (start), .src_o (src), .dst_o (dst), .len_o (len),
    .busy_i (busy), .done_i (done), .error_i (err), .done_o (irq_done_o)
  );

  dma_backend #(
    .MaxBurst (MaxBurst), .FifoDepth (FifoDepth),
    .TcdmBase (TcdmBase), .TcdmMask (TcdmMask)
  ) u_backend (
    .clk_i, .rst_ni,
    .start_i (start), .src_i (src), .dst_i (dst), .len_i (len),
    .busy_o (busy), .done_o (done), .error_o (err),
    .ext_req_o, .ext_rsp_i, .tcdm_req_o, .tcdm_rsp_i
  );
endmodule
