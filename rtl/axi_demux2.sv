// axi_demux2: one AXI4 master to two slaves by address, used after the
// bridge's clock crossing to send OpenTitan's accesses either to the mailbox
// or out to the host interconnect.
//
// Port 1 is taken when (addr & Mask) == Base, port 0 otherwise. The demux
// keeps one write and one read in flight: the AW address picks the target,
// W beats follow it, and the write ends with its B response; a read ends
// with the last R beat. This suits the single-outstanding bridge in front.
//
// The source design routes the bridge through the host SoC's AXI4
// crossbar; this two-way demultiplexer, which only separates the mailbox
// from the rest of the SoC, is this design's own stand-in for it.
module axi_demux2
  import ot_pkg::*;
#(
  parameter logic [31:0] Base = MBOX_BASE,
  parameter logic [31:0] Mask = MASK_4K
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t req_i,
  output axi_rsp_t rsp_o,
  output axi_req_t req_o [2],
  input  axi_rsp_t rsp_i [2]
);
  logic wr_busy_q, wr_sel_q, rd_busy_q, rd_sel_q;
  logic aw_sel, ar_sel;

  assign aw_sel = ((req_i.aw.addr & Mask) == Base);
  assign ar_sel = ((req_i.ar.addr & Mask) == Base);

  always_comb begin
    for (int i = 0; i < 2; i++) begin
      req_o[i]          = req_i;
      req_o[i].aw_valid = req_i.aw_valid && !wr_busy_q && (aw_sel == i[0]);
      req_o[i].w_valid  = req_i.w_valid && wr_busy_q && (wr_sel_q == i[0]);
      req_o[i].b_ready  = req_i.b_ready && wr_busy_q && (wr_sel_q == i[0]);
      req_o[i].ar_valid = req_i.ar_valid && !rd_busy_q && (ar_sel == i[0]);
      req_o[i].r_ready  = req_i.r_ready && rd_busy_q && (rd_sel_q == i[0]);
    end
    rsp_o          = '0;
    rsp_o.aw_ready = !wr_busy_q && rsp_i[aw_sel].aw_ready;
    rsp_o.w_ready  = wr_busy_q && rsp_i[wr_sel_q].w_ready;
    rsp_o.b        = rsp_i[wr_sel_q].b;
    rsp_o.b_valid  = wr_busy_q && rsp_i[wr_sel_q].b_valid;
    rsp_o.ar_ready = !rd_busy_q && rsp_i[ar_sel].ar_ready;
    rsp_o.r        = rsp_i[rd_sel_q].r;
    rsp_o.r_valid  = rd_busy_q && rsp_i[rd_sel_q].r_valid;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wr_busy_q <= 1'b0; wr_sel_q <= 1'b0; rd_busy_q <= 1'b0; rd_sel_q <= 1'b0;
    end else begin
      if (req_i.aw_valid && rsp_o.aw_ready) begin
        wr_busy_q <= 1'b1;
        wr_sel_q  <= aw_sel;
      end else if (rsp_o.b_valid && req_i.b_ready) begin
        wr_busy_q <= 1'b0;
      end
      if (req_i.ar_valid && rsp_o.ar_ready) begin
        rd_busy_q <= 1'b1;
        rd_sel_q  <= ar_sel;
      end else if (rsp_o.r_valid && req_i.r_ready && rsp_o.r.last) begin
        rd_busy_q <= 1'b0;
      end
    end
  end
endmodule
