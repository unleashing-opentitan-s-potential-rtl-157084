// axi_to_mem: AXI4 slave onto a TCDM-style memory port (the AXI-to-TCDM
// protocol converter between the DMA and the TCDM, also used for the slave
// ports of the mailbox).
//
// One burst is served at a time. INCR and FIXED bursts of any length are
// supported; WRAP is treated as INCR. For a read burst one memory request is
// issued per beat, at most one per cycle, and the data go out through a
// two-entry pass-through buffer, so a burst streams at one beat per cycle
// while R is ready. A write burst turns every W beat into a memory write (W
// ready is the memory grant); B is sent after the last write has completed.
// Reads and writes that wait together are served alternately.
//
// Follows the design's AXI-to-TCDM protocol converter in front of the
// TCDM's DMA port; burst handling, buffering and the read/write priority
// are this design's own choices.
module axi_to_mem
  import ot_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t axi_i,
  output axi_rsp_t axi_o,
  output mem_req_t mem_o,
  input  mem_rsp_t mem_i
);
  typedef enum logic [1:0] {Idle, Read, Write, WResp} state_e;
  state_e state_q;

  axi_ax_t     ax_q;          // current burst
  logic [8:0]  issue_left_q;  // read beats not yet requested
  logic [8:0]  ret_left_q;    // read beats not yet returned on R
  logic        inflight_q;    // a read request awaits its data
  logic        last_wr_q;     // the last write awaits its completion
  logic        prefer_wr_q;
  logic [31:0] addr_q;

  // R output buffer
  logic        rbuf_rvalid;
  logic [31:0] rbuf_rdata;
  logic [1:0]  rbuf_cnt;
  logic        rd_issue;

  function automatic logic [31:0] next_addr(input axi_ax_t ax, input logic [31:0] a);
    if (ax.burst == AXI_BURST_FIXED) return a;
    return a + (32'd1 << ax.size);
  endfunction

  assign rd_issue = (state_q == Read) && (issue_left_q != '0) &&
                    ((32'(rbuf_cnt) + 32'(inflight_q)) < 2);

  always_comb begin
    mem_o = '0;
    if (rd_issue) begin
      mem_o.req  = 1'b1;
      mem_o.addr = addr_q;
      mem_o.be   = '1;
    end else if (state_q == Write && axi_i.w_valid) begin
      mem_o.req   = 1'b1;
      mem_o.we    = 1'b1;
      mem_o.addr  = addr_q;
      mem_o.wdata = axi_i.w.data;
      mem_o.be    = axi_i.w.strb;
    end
  end

  fifo_sync #(.T(logic [31:0]), .Depth(2), .Pass(1'b1)) u_rbuf (
    .clk_i, .rst_ni,
    .wvalid_i (inflight_q && mem_i.rvalid),
    .wready_o (),
    .wdata_i  (mem_i.rdata),
    .rvalid_o (rbuf_rvalid),
    .rready_i (axi_i.r_ready),
    .rdata_o  (rbuf_rdata),
    .cnt_o    (rbuf_cnt)
  );

  logic take_ar, take_aw;
  assign take_ar = (state_q == Idle) && axi_i.ar_valid && (!axi_i.aw_valid || !prefer_wr_q);
  assign take_aw = (state_q == Idle) && axi_i.aw_valid && !take_ar;

  always_comb begin
    axi_o          = '0;
    axi_o.ar_ready = take_ar;
    axi_o.aw_ready = take_aw;
    axi_o.w_ready  = (state_q == Write) && mem_i.gnt && !last_wr_q;
    axi_o.r_valid  = (state_q == Read) && rbuf_rvalid;
    axi_o.r.id     = ax_q.id;
    axi_o.r.data   = rbuf_rdata;
    axi_o.r.resp   = AXI_RESP_OKAY;
    axi_o.r.last   = (ret_left_q == 9'd1);
    axi_o.b_valid  = (state_q == WResp);
    axi_o.b.id     = ax_q.id;
    axi_o.b.resp   = AXI_RESP_OKAY;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q      <= Idle;
      ax_q         <= '0;
      issue_left_q <= '0;
      ret_left_q   <= '0;
      inflight_q   <= 1'b0;
      last_wr_q    <= 1'b0;
      prefer_wr_q  <= 1'b0;
      addr_q       <= '0;
    end else begin
      inflight_q <= rd_issue && mem_i.gnt;
      case (state_q)
        Idle: begin
          if (take_ar) begin
            state_q      <= Read;
            ax_q         <= axi_i.ar;
            addr_q       <= axi_i.ar.addr;
            issue_left_q <= 9'(axi_i.ar.len) + 9'd1;
            ret_left_q   <= 9'(axi_i.ar.len) + 9'd1;
            prefer_wr_q  <= 1'b1;
          end else if (take_aw) begin
            state_q     <= Write;
            ax_q        <= axi_i.aw;
            addr_q      <= axi_i.aw.addr;
            prefer_wr_q <= 1'b0;
          end
        end
        Read: begin
          if (rd_issue && mem_i.gnt) begin
            issue_left_q <= issue_left_q - 1'b1;
            addr_q       <= next_addr(ax_q, addr_q);
          end
          if (axi_o.r_valid && axi_i.r_ready) begin
            ret_left_q <= ret_left_q - 1'b1;
            if (ret_left_q == 9'd1) state_q <= Idle;
          end
        end
        Write: begin
          if (last_wr_q) begin
            last_wr_q <= 1'b0;           // its data phase completes now
            state_q   <= WResp;
          end else if (axi_i.w_valid && mem_i.gnt) begin
            addr_q <= next_addr(ax_q, addr_q);
            if (axi_i.w.last) last_wr_q <= 1'b1;
          end
        end
        WResp: if (axi_i.b_ready) state_q <= Idle;
        default: state_q <= Idle;
      endcase
    end
  end
endmodule
