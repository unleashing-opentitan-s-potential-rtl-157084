// tb_axi_mem: AXI4 slave memory model for testbenches (stands for the host
// SoC's memory behind its interconnect, e.g. L3 through the last-level
// cache). Words wrap modulo Words. A read burst starts Latency cycles after
// its AR is accepted and then streams one beat per cycle; a write burst
// accepts one W beat per cycle and answers B Latency cycles after its last
// beat. One read and one write may be in progress at once.
// The latency is a parameter; the host memory hierarchy it stands for is
// not modelled in detail.
module tb_axi_mem
  import ot_pkg::*;
#(
  parameter int unsigned Words   = 4096,
  parameter int unsigned Latency = 2
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t req_i,
  output axi_rsp_t rsp_o
);
  logic [31:0] mem [Words];
  initial for (int i = 0; i < Words; i++) mem[i] = '0;

  function automatic int unsigned widx(input logic [31:0] a);
    return (a >> 2) % Words;
  endfunction

  // read side
  logic        rd_act, rd_go;
  axi_ax_t     ar_q;
  int          rd_wait, rd_beat;
  // write side
  logic        wr_act, wr_bwait;
  axi_ax_t     aw_q;
  int          wr_beat, wr_wait;

  always_comb begin
    rsp_o          = '0;
    rsp_o.ar_ready = !rd_act;
    rsp_o.r_valid  = rd_act && rd_go;
    rsp_o.r.id     = ar_q.id;
    rsp_o.r.data   = mem[widx(ar_q.addr + 32'(rd_beat * 4))];
    rsp_o.r.last   = (rd_beat == int'(ar_q.len));
    rsp_o.aw_ready = !wr_act;
    rsp_o.w_ready  = wr_act && !wr_bwait;
    rsp_o.b_valid  = wr_act && wr_bwait && (wr_wait == 0);
    rsp_o.b.id     = aw_q.id;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_act <= 0; rd_go <= 0; rd_wait <= 0; rd_beat <= 0; ar_q <= '0;
      wr_act <= 0; wr_bwait <= 0; wr_beat <= 0; wr_wait <= 0; aw_q <= '0;
    end else begin
      if (!rd_act && req_i.ar_valid) begin
        rd_act <= 1; ar_q <= req_i.ar; rd_beat <= 0;
        rd_wait <= Latency; rd_go <= (Latency == 0);
      end else if (rd_act && !rd_go) begin
        if (rd_wait <= 1) rd_go <= 1;
        rd_wait <= rd_wait - 1;
      end else if (rd_act && rd_go && req_i.r_ready) begin
        if (rd_beat == int'(ar_q.len)) begin rd_act <= 0; rd_go <= 0; end
        else rd_beat <= rd_beat + 1;
      end

      if (!wr_act && req_i.aw_valid) begin
        wr_act <= 1; aw_q <= req_i.aw; wr_beat <= 0; wr_bwait <= 0;
      end else if (wr_act && !wr_bwait && req_i.w_valid) begin
        for (int b = 0; b < 4; b++)
          if (req_i.w.strb[b]) mem[widx(aw_q.addr + 32'(wr_beat * 4))][8*b +: 8] <= req_i.w.data[8*b +: 8];
        wr_beat <= wr_beat + 1;
        if (req_i.w.last) begin wr_bwait <= 1; wr_wait <= Latency; end
      end else if (wr_act && wr_bwait) begin
        if (wr_wait > 0) wr_wait <= wr_wait - 1;
        else if (req_i.b_ready) begin wr_act <= 0; wr_bwait <= 0; end
      end
    end
  end
endmodule
