// dma_backend: data mover of the DMA engine, with two AXI4 master ports.
//
// Port 0 (ext) leads to the host SoC interconnect, port 1 (tcdm) to the
// accelerators' TCDM. Each side of a transfer uses the port its address
// belongs to (the TCDM window selects port 1), so both directions
// external->TCDM and TCDM->external are possible.
// A read engine issues INCR bursts of up to MaxBurst 32-bit beats (never
// crossing a 4 KiB boundary) as long as the data FIFO has room for the whole
// burst, with up to two bursts in flight; a write engine issues a write burst
// once the FIFO holds all of its beats and streams W from the FIFO. Both run
// concurrently, so with single-cycle memories the engine approaches its
// nominal 4 bytes per cycle (0.25 cycles per byte).
// Addresses and the length are in bytes and must be multiples of 4.
// start_i loads a job; done_o pulses once all write responses are back;
// error_o reports any non-OKAY response of the job.
//
// Follows the design: a backend driven by the frontend with two AXI4
// master ports, external and TCDM. Burst length, 4 KiB rule, FIFO depth and
// the two outstanding reads are this design's own choices.
module dma_backend
  import ot_pkg::*;
#(
  parameter int unsigned MaxBurst  = 16,
  parameter int unsigned FifoDepth = 32,
  parameter logic [31:0] TcdmBase  = TCDM_BASE,
  parameter logic [31:0] TcdmMask  = MASK_32K
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        start_i,
  input  logic [31:0] src_i,
  input  logic [31:0] dst_i,
  input  logic [31:0] len_i,
  output logic        busy_o,
  output logic        done_o,
  output logic        error_o,
  output axi_req_t    ext_req_o,
  input  axi_rsp_t    ext_rsp_i,
  output axi_req_t    tcdm_req_o,
  input  axi_rsp_t    tcdm_rsp_i
);
  localparam int unsigned CntW = $clog2(FifoDepth + 1);

  logic        busy_q, rd_port_q, wr_port_q, err_q;
  logic [31:0] rd_addr_q, wr_addr_q, rd_left_q, wr_left_q;   // bytes
  logic [1:0]  rd_out_q;                                     // bursts in flight
  logic [CntW:0] rd_resv_q;                                  // beats requested
  logic        in_burst_q;
  logic [8:0]  w_beats_q;
  logic [7:0]  b_pend_q;

  // burst length (beats) from an address and the bytes left
  function automatic logic [8:0] burst_beats(input logic [31:0] addr, input logic [31:0] left);
    logic [31:0] n, to_4k;
    n     = left >> 2;
    to_4k = (32'h1000 - {20'd0, addr[11:0]}) >> 2;
    if (n > 32'(MaxBurst)) n = 32'(MaxBurst);
    if (n > to_4k)         n = to_4k;
    return n[8:0];
  endfunction

  function automatic logic in_tcdm(input logic [31:0] a);
    return (a & TcdmMask) == TcdmBase;
  endfunction

  // selected port views
  axi_rsp_t rd_rsp, wr_rsp;
  assign rd_rsp = rd_port_q ? tcdm_rsp_i : ext_rsp_i;
  assign wr_rsp = wr_port_q ? tcdm_rsp_i : ext_rsp_i;

  // ---------------------------------------------------------------- FIFO
  logic          f_wvalid, f_rvalid, f_rready;
  logic [31:0]   f_rdata;
  logic [CntW-1:0] f_cnt;

  fifo_sync #(.T(logic [31:0]), .Depth(FifoDepth), .Pass(1'b0)) u_fifo (
    .clk_i, .rst_ni,
    .wvalid_i (f_wvalid),
    .wready_o (),
    .wdata_i  (rd_rsp.r.data),
    .rvalid_o (f_rvalid),
    .rready_i (f_rready),
    .rdata_o  (f_rdata),
    .cnt_o    (f_cnt)
  );

  // ---------------------------------------------------------- read engine
  logic [8:0] rd_n, wr_n;
  logic       ar_valid, ar_hs, r_hs, aw_valid, aw_hs, w_valid, w_hs, b_hs;

  assign rd_n     = burst_beats(rd_addr_q, rd_left_q);
  assign ar_valid = busy_q && (rd_left_q != '0) && (rd_out_q < 2'd2) &&
                    ((32'(f_cnt) + 32'(rd_resv_q) + 32'(rd_n)) <= FifoDepth);
  assign ar_hs    = ar_valid && rd_rsp.ar_ready;
  assign r_hs     = busy_q && rd_rsp.r_valid && (rd_out_q != '0);
  assign f_wvalid = r_hs;

  // --------------------------------------------------------- write engine
  assign wr_n     = burst_beats(wr_addr_q, wr_left_q);
  assign aw_valid = busy_q && !in_burst_q && (wr_left_q != '0) && (32'(f_cnt) >= 32'(wr_n));
  assign aw_hs    = aw_valid && wr_rsp.aw_ready;
  assign w_valid  = in_burst_q && f_rvalid;
  assign w_hs     = w_valid && wr_rsp.w_ready;
  assign f_rready = w_hs;
  assign b_hs     = busy_q && wr_rsp.b_valid && (b_pend_q != '0);

  // ------------------------------------------------------------ port muxes
  axi_req_t rd_req, wr_req;
  always_comb begin
    rd_req          = '0;
    rd_req.ar_valid = ar_valid;
    rd_req.ar.addr  = rd_addr_q;
    rd_req.ar.len   = 8'(rd_n - 9'd1);
    rd_req.ar.size  = 3'd2;
    rd_req.ar.burst = AXI_BURST_INCR;
    rd_req.r_ready  = busy_q && (rd_out_q != '0);

    wr_req          = '0;
    wr_req.aw_valid = aw_valid;
    wr_req.aw.addr  = wr_addr_q;
    wr_req.aw.len   = 8'(wr_n - 9'd1);
    wr_req.aw.size  = 3'd2;
    wr_req.aw.burst = AXI_BURST_INCR;
    wr_req.w_valid  = w_valid;
    wr_req.w.data   = f_rdata;
    wr_req.w.strb   = '1;
    wr_req.w.last   = (w_beats_q == 9'd1);
    wr_req.b_ready  = busy_q && (b_pend_q != '0);
  end

  always_comb begin
    ext_req_o  = '0;
    tcdm_req_o = '0;
    // read channels
    if (rd_port_q) begin
      tcdm_req_o.ar = rd_req.ar; tcdm_req_o.ar_valid = rd_req.ar_valid;
      tcdm_req_o.r_ready = rd_req.r_ready;
    end else begin
      ext_req_o.ar = rd_req.ar;  ext_req_o.ar_valid = rd_req.ar_valid;
      ext_req_o.r_ready = rd_req.r_ready;
    end
    // write channels
    if (wr_port_q) begin
      tcdm_req_o.aw = wr_req.aw; tcdm_req_o.aw_valid = wr_req.aw_valid;
      tcdm_req_o.w  = wr_req.w;  tcdm_req_o.w_valid  = wr_req.w_valid;
      tcdm_req_o.b_ready = wr_req.b_ready;
    end else begin
      ext_req_o.aw = wr_req.aw;  ext_req_o.aw_valid = wr_req.aw_valid;
      ext_req_o.w  = wr_req.w;   ext_req_o.w_valid  = wr_req.w_valid;
      ext_req_o.b_ready = wr_req.b_ready;
    end
  end

  // ----------------------------------------------------------- sequencing
  logic finish;
  assign finish = busy_q && (rd_left_q == '0) && (wr_left_q == '0) && (rd_out_q == '0) &&
                  !in_burst_q && (b_pend_q == '0) && !(b_hs);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q <= 1'b0; rd_port_q <= 1'b0; wr_port_q <= 1'b0; err_q <= 1'b0;
      rd_addr_q <= '0; wr_addr_q <= '0; rd_left_q <= '0; wr_left_q <= '0;
      rd_out_q <= '0; rd_resv_q <= '0; in_burst_q <= 1'b0; w_beats_q <= '0;
      b_pend_q <= '0; done_o <= 1'b0;
    end else begin
      done_o <= 1'b0;
      if (start_i && !busy_q) begin
        busy_q    <= 1'b1;
        err_q     <= 1'b0;
        rd_addr_q <= {src_i[31:2], 2'b00};
        wr_addr_q <= {dst_i[31:2], 2'b00};
        rd_left_q <= {len_i[31:2], 2'b00};
        wr_left_q <= {len_i[31:2], 2'b00};
        rd_port_q <= in_tcdm(src_i);
        wr_port_q <= in_tcdm(dst_i);
      end else if (busy_q) begin
        // read engine
        if (ar_hs) begin
          rd_addr_q <= rd_addr_q + {21'd0, rd_n, 2'b00};
          rd_left_q <= rd_left_q - {21'd0, rd_n, 2'b00};
        end
        rd_out_q  <= rd_out_q + 2'(ar_hs) - 2'(r_hs && rd_rsp.r.last);
        rd_resv_q <= rd_resv_q + (ar_hs ? (CntW+1)'(rd_n) : '0) - (CntW+1)'(r_hs);
        if (r_hs && rd_rsp.r.resp != AXI_RESP_OKAY) err_q <= 1'b1;
        // write engine
        if (aw_hs) begin
          in_burst_q <= 1'b1;
          w_beats_q  <= wr_n;
          wr_addr_q  <= wr_addr_q + {21'd0, wr_n, 2'b00};
          wr_left_q  <= wr_left_q - {21'd0, wr_n, 2'b00};
        end else if (w_hs) begin
          w_beats_q <= w_beats_q - 1'b1;
          if (w_beats_q == 9'd1) in_burst_q <= 1'b0;
        end
        b_pend_q <= b_pend_q + 8'(aw_hs) - 8'(b_hs);
        if (b_hs && wr_rsp.b.resp != AXI_RESP_OKAY) err_q <= 1'b1;
        if (finish) begin
          busy_q <= 1'b0;
          done_o <= 1'b1;
        end
      end
    end
  end

  assign busy_o  = busy_q;
  assign error_o = err_q;

`ifndef SYNTHESIS
  a_ar_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (ar_valid && !rd_rsp.ar_ready) |=> (ar_valid && $stable(rd_req.ar)));
  a_aw_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (aw_valid && !wr_rsp.aw_ready) |=> (aw_valid && $stable(wr_req.aw)));
  a_fifo_never_overflows: assert property (@(posedge clk_i) disable iff (!rst_ni)
    32'(f_cnt) <= FifoDepth);
`endif
endmodule
