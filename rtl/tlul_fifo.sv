// tlul_fifo: a TL-UL FIFO stage, one FIFO for the A (request) channel and one
// for the D (response) channel, as placed between every host and device of
// the OpenTitan crossbar.
//
// ReqPass/RspPass select the pass-through mode of each FIFO. The stock
// crossbar registers both directions (one cycle each); the secure element
// sets both FIFOs to pass-through when empty, so an idle stage adds no
// latency while still absorbing back-pressure.
// Interface: host side tl_h_i/tl_h_o, device side tl_d_o/tl_d_i.
//
// Pass-through mode when empty is the crossbar optimisation of the source
// design; the depths are this design's own choice (stock value 2).
module tlul_fifo
  import ot_pkg::*;
#(
  parameter bit          ReqPass  = 1'b1,
  parameter bit          RspPass  = 1'b1,
  parameter int unsigned ReqDepth = 2,
  parameter int unsigned RspDepth = 2
) (
  input  logic    clk_i,
  input  logic    rst_ni,
  input  tl_h2d_t tl_h_i,
  output tl_d2h_t tl_h_o,
  output tl_h2d_t tl_d_o,
  input  tl_d2h_t tl_d_i
);
  fifo_sync #(.T(tl_a_t), .Depth(ReqDepth), .Pass(ReqPass)) u_req (
    .clk_i, .rst_ni,
    .wvalid_i (tl_h_i.a_valid),
    .wready_o (tl_h_o.a_ready),
    .wdata_i  (tl_h_i.a),
    .rvalid_o (tl_d_o.a_valid),
    .rready_i (tl_d_i.a_ready),
    .rdata_o  (tl_d_o.a),
    .cnt_o    ()
  );

  fifo_sync #(.T(tl_d_t), .Depth(RspDepth), .Pass(RspPass)) u_rsp (
    .clk_i, .rst_ni,
    .wvalid_i (tl_d_i.d_valid),
    .wready_o (tl_d_o.d_ready),
    .wdata_i  (tl_d_i.d),
    .rvalid_o (tl_h_o.d_valid),
    .rready_i (tl_h_i.d_ready),
    .rdata_o  (tl_h_o.d),
    .cnt_o    ()
  );
endmodule
