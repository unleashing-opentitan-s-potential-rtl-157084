// dma_frontend: register file through which the microcontroller programs the
// DMA engine over TL-UL.
//
// Registers (byte offsets in the DMA window; layout is this design's own):
//   0x00 SRC     source byte address            (RW)
//   0x04 DST     destination byte address       (RW)
//   0x08 LEN     transfer length in bytes       (RW, multiple of 4)
//   0x0C CTRL    write bit 0 = 1 to start       (WO, reads 0)
//   0x10 STATUS  bit 0 busy, bit 1 done, bit 2 error (RO; done/error are
//                cleared by the next start)
// A start written while the engine is busy is ignored. done_o is the level
// of the done bit, meant as an interrupt to the PLIC.
module dma_frontend
  import ot_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  tl_h2d_t     tl_i,
  output tl_d2h_t     tl_o,
  // to the backend
  output logic        start_o,
  output logic [31:0] src_o,
  output logic [31:0] dst_o,
  output logic [31:0] len_o,
  input  logic        busy_i,
  input  logic        done_i,    // one-cycle pulse at completion
  input  logic        error_i,   // sampled with done_i
  output logic        done_o
);
  mem_req_t reg_req;
  mem_rsp_t reg_rsp;

  tlul_to_mem u_adapter (
    .clk_i, .rst_ni,
    .tl_i, .tl_o,
    .mem_o (reg_req),
    .mem_i (reg_rsp)
  );

  logic [31:0] src_q, dst_q, len_q, rdata_q;
  logic        done_q, err_q, rvalid_q;
  logic [3:0]  widx;
  logic        wr;

  assign widx = reg_req.addr[5:2];
  assign wr   = reg_req.req && reg_req.we;
  assign start_o = wr && (widx == 4'd3) && reg_req.wdata[0] && !busy_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      src_q <= '0; dst_q <= '0; len_q <= '0;
      done_q <= 1'b0; err_q <= 1'b0;
      rvalid_q <= 1'b0; rdata_q <= '0;
    end else begin
      rvalid_q <= reg_req.req;
      if (wr && !busy_i) begin
        case (widx)
          4'd0: src_q <= reg_req.wdata;
          4'd1: dst_q <= reg_req.wdata;
          4'd2: len_q <= reg_req.wdata;
          default: ;
        endcase
      end
      if (start_o) begin
        done_q <= 1'b0;
        err_q  <= 1'b0;
      end else if (done_i) begin
        done_q <= 1'b1;
        err_q  <= error_i;
      end
      if (reg_req.req && !reg_req.we) begin
        case (widx)
          4'd0: rdata_q <= src_q;
          4'd1: rdata_q <= dst_q;
          4'd2: rdata_q <= len_q;
          4'd4: rdata_q <= {29'd0, err_q, done_q, busy_i};
          default: rdata_q <= '0;
        endcase
      end
    end
  end

  assign reg_rsp.gnt    = 1'b1;
  assign reg_rsp.rvalid = rvalid_q;
  assign reg_rsp.rdata  = rdata_q;
  assign src_o  = src_q;
  assign dst_o  = dst_q;
  assign len_o  = len_q;
  assign done_o = done_q;
endmodule
