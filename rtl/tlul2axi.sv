// tlul2axi: TL-UL to AXI4 bridge, the master port through which OpenTitan
// reaches the whole memory map of the host SoC (OpenTitan offers no slave
// port to the host).
//
// TL-UL has no bursts, so every TL-UL request becomes a single-beat AXI4
// transaction (len 0, size from a_size, strobes from a_mask): Get turns into
// AR, PutFullData/PutPartialData into AW plus W issued together. One
// transaction is outstanding at a time. The R data or B response is returned
// on the D channel; a non-OKAY AXI response sets d_error.
// Timing with a zero-wait AXI slave: request accepted in cycle 0, AXI
// address/data in cycle 1, D response in cycle 2 at the earliest.
//
// Follows the design's TL-UL-to-AXI4 bridge that gives OpenTitan a master
// on the SoC; single-beat, one-at-a-time operation is this design's own
// choice, in line with TL-UL having no bursts.
module tlul2axi
  import ot_pkg::*;
#(
  parameter logic [AxiIdW-1:0] AxiId = '0
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  tl_h2d_t  tl_i,
  output tl_d2h_t  tl_o,
  output axi_req_t axi_o,
  input  axi_rsp_t axi_i
);
  typedef enum logic [2:0] {Idle, Ar, AwW, RWait, BWait, Rsp} state_e;
  state_e state_q;
  tl_a_t  a_q;
  logic   aw_done_q, w_done_q;
  logic [31:0] rdata_q;
  logic   err_q;

  always_comb begin
    axi_o          = '0;
    axi_o.ar.id    = AxiId;
    axi_o.ar.addr  = a_q.address;
    axi_o.ar.size  = {1'b0, a_q.size};
    axi_o.ar.burst = AXI_BURST_INCR;
    axi_o.ar_valid = (state_q == Ar);
    axi_o.aw       = axi_o.ar;
    axi_o.aw_valid = (state_q == AwW) && !aw_done_q;
    axi_o.w.data   = a_q.data;
    axi_o.w.strb   = a_q.mask;
    axi_o.w.last   = 1'b1;
    axi_o.w_valid  = (state_q == AwW) && !w_done_q;
    axi_o.r_ready  = (state_q == RWait) || (state_q == Ar);
    axi_o.b_ready  = (state_q == BWait) || (state_q == AwW);
  end

  always_comb begin
    tl_o          = '0;
    tl_o.a_ready  = (state_q == Idle);
    tl_o.d_valid  = (state_q == Rsp);
    tl_o.d.opcode = (a_q.opcode == Get) ? AccessAckData : AccessAck;
    tl_o.d.size   = a_q.size;
    tl_o.d.source = a_q.source;
    tl_o.d.data   = rdata_q;
    tl_o.d.error  = err_q;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q   <= Idle;
      a_q       <= '0;
      aw_done_q <= 1'b0;
      w_done_q  <= 1'b0;
      rdata_q   <= '0;
      err_q     <= 1'b0;
    end else begin
      case (state_q)
        Idle: if (tl_i.a_valid) begin
          a_q       <= tl_i.a;
          aw_done_q <= 1'b0;
          w_done_q  <= 1'b0;
          rdata_q   <= '0;
          err_q     <= 1'b0;
          state_q   <= (tl_i.a.opcode == Get) ? Ar : AwW;
        end
        Ar: if (axi_i.ar_ready) state_q <= RWait;
        AwW: begin
          if (axi_i.aw_ready) aw_done_q <= 1'b1;
          if (axi_i.w_ready)  w_done_q  <= 1'b1;
          if ((aw_done_q || axi_i.aw_ready) && (w_done_q || axi_i.w_ready)) state_q <= BWait;
        end
        RWait: if (axi_i.r_valid) begin
          rdata_q <= axi_i.r.data;
          err_q   <= axi_i.r.resp[1];
          if (axi_i.r.last) state_q <= Rsp;
        end
        BWait: if (axi_i.b_valid) begin
          err_q   <= axi_i.b.resp[1];
          state_q <= Rsp;
        end
        Rsp: if (tl_i.d_ready) state_q <= Idle;
        default: state_q <= Idle;
      endcase
    end
  end
endmodule
