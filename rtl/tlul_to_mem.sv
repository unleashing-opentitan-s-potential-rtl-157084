// tlul_to_mem: TL-UL device adapter onto a TCDM-style memory port.
//
// It is the TLUL-to-TCDM protocol converter in front of the TCDM, and the
// front end of every register file of the extensions. A TL-UL request is
// forwarded as a memory request in the cycle it arrives; the grant of the
// memory is the A-channel ready. The read data returned one cycle later is
// sent on the D channel in that same cycle, so a single-cycle memory answers
// a TL-UL request in two cycles. If the host stalls the D channel the
// response is held in a register and no new request is accepted.
// Put operations are acknowledged with AccessAck, Get with AccessAckData.
//
// Follows the design's protocol converter from the TL-UL crossbar to the
// TCDM master port; the response-hold register is this design's own.
module tlul_to_mem
  import ot_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  tl_h2d_t  tl_i,
  output tl_d2h_t  tl_o,
  output mem_req_t mem_o,
  input  mem_rsp_t mem_i
);
  logic    pending_q, hold_q;
  tl_d_t   rsp_q;          // response fields captured at the request
  logic [31:0] hold_data_q;
  logic    can_issue, a_hs;

  // A new request may go out if no response is held and, when one is in
  // flight, it leaves this cycle.
  assign can_issue = !hold_q && (!pending_q || tl_i.d_ready);

  always_comb begin
    mem_o       = '0;
    mem_o.req   = tl_i.a_valid && can_issue;
    mem_o.we    = (tl_i.a.opcode != Get);
    mem_o.addr  = tl_i.a.address;
    mem_o.wdata = tl_i.a.data;
    mem_o.be    = tl_i.a.mask;
  end

  assign a_hs = mem_o.req && mem_i.gnt;

  always_comb begin
    tl_o         = '0;
    tl_o.a_ready = can_issue && mem_i.gnt;
    tl_o.d_valid = hold_q || (pending_q && mem_i.rvalid);
    tl_o.d       = rsp_q;
    tl_o.d.data  = hold_q ? hold_data_q :
                   (rsp_q.opcode == AccessAckData) ? mem_i.rdata : '0;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pending_q   <= 1'b0;
      hold_q      <= 1'b0;
      rsp_q       <= '0;
      hold_data_q <= '0;
    end else begin
      if (pending_q && !tl_i.d_ready) begin
        hold_q      <= 1'b1;
        hold_data_q <= (rsp_q.opcode == AccessAckData) ? mem_i.rdata : '0;
      end else if (hold_q && tl_i.d_ready) begin
        hold_q <= 1'b0;
      end
      pending_q <= a_hs;
      if (a_hs) begin
        rsp_q.opcode <= (tl_i.a.opcode == Get) ? AccessAckData : AccessAck;
        rsp_q.size   <= tl_i.a.size;
        rsp_q.source <= tl_i.a.source;
        rsp_q.error  <= 1'b0;
        rsp_q.data   <= '0;
      end
    end
  end

`ifndef SYNTHESIS
  a_rvalid_follows_gnt: assert property (@(posedge clk_i) disable iff (!rst_ni)
    pending_q |-> mem_i.rvalid);
`endif
endmodule
