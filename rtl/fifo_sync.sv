// fifo_sync: single-clock FIFO with an optional same-cycle pass-through.
//
// Depth entries are kept in a circular buffer. With Pass = 1 an empty FIFO is
// transparent: a word offered on the write side appears on the read side in
// the same cycle and is only stored if the reader does not take it. With
// Pass = 0 every word spends at least one cycle in the buffer, which costs
// one cycle of latency per FIFO. The pass-through mode is what the
// interconnect optimisation of the secure element relies on.
// Interface: valid/ready on both sides; cnt_o is the number of stored words.
//
// The pass-through-when-empty behaviour is the crossbar optimisation of
// the source design; the storage scheme is this design's own.
module fifo_sync #(
  parameter type         T     = logic [31:0],
  parameter int unsigned Depth = 2,
  parameter bit          Pass  = 1'b1
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic wvalid_i,
  output logic wready_o,
  input  T     wdata_i,
  output logic rvalid_o,
  input  logic rready_i,
  output T     rdata_o,
  output logic [$clog2(Depth+1)-1:0] cnt_o
);
  localparam int unsigned PtrW = (Depth > 1) ? $clog2(Depth) : 1;

  T                         mem_q [Depth];
  logic [PtrW-1:0]          wptr_q, rptr_q;
  logic [$clog2(Depth+1)-1:0] cnt_q;
  logic empty, bypass, push, pop;

  assign empty    = (cnt_q == '0);
  assign bypass   = Pass && empty;
  assign wready_o = (cnt_q < Depth[$clog2(Depth+1)-1:0]);
  assign rvalid_o = !empty || (bypass && wvalid_i);
  assign rdata_o  = (bypass) ? wdata_i : mem_q[rptr_q];
  assign push     = wvalid_i && wready_o && !(bypass && rready_i);
  assign pop      = rready_i && !empty;
  assign cnt_o    = cnt_q;

  function automatic logic [PtrW-1:0] inc(input logic [PtrW-1:0] p);
    return (p == PtrW'(Depth - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wptr_q <= '0;
      rptr_q <= '0;
      cnt_q  <= '0;
    end else begin
      if (push) wptr_q <= inc(wptr_q);
      if (pop)  rptr_q <= inc(rptr_q);
      case ({push, pop})
        2'b10:   cnt_q <= cnt_q + 1'b1;
        2'b01:   cnt_q <= cnt_q - 1'b1;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk_i) begin
    if (push) mem_q[wptr_q] <= wdata_i;
  end
endmodule
