// axi_cdc: AXI4 clock domain crossing between the OpenTitan clock (source,
// where the master sits) and the host SoC clock (destination, where the
// slave sits).
//
// Each of the five AXI channels crosses through its own async_fifo: AW, W
// and AR from source to destination, B and R back. Handshakes on both sides
// are plain AXI valid/ready; ordering inside each channel is kept, and AXI's
// own rules (W after or with AW, responses after requests) make the
// independent FIFOs safe. Every crossing costs a few cycles of the receiving
// clock, which is the latency the paper measures on the DMA and bridge paths.
module axi_cdc
  import ot_pkg::*;
#(
  parameter int unsigned Depth = 4
) (
  input  logic     src_clk_i,
  input  logic     src_rst_ni,
  input  axi_req_t src_req_i,
  output axi_rsp_t src_rsp_o,
  input  logic     dst_clk_i,
  input  logic     dst_rst_ni,
  output axi_req_t dst_req_o,
  input  axi_rsp_t dst_rsp_i
);
  async_fifo #(.T(axi_ax_t), .Depth(Depth)) u_aw (
    .src_clk_i, .src_rst_ni,
    .src_valid_i (src_req_i.aw_valid), .src_ready_o (src_rsp_o.aw_ready), .src_data_i (src_req_i.aw),
    .dst_clk_i, .dst_rst_ni,
    .dst_valid_o (dst_req_o.aw_valid), .dst_ready_i (dst_rsp_i.aw_ready), .dst_data_o (dst_req_o.aw)
  );
  async_fifo #(.T(axi_w_t), .Depth(Depth)) u_w (
    .src_clk_i, .src_rst_ni,
    .src_valid_i (src_req_i.w_valid), .src_ready_o (src_rsp_o.w_ready), .src_data_i (src_req_i.w),
    .dst_clk_i, .dst_rst_ni,
    .dst_valid_o (dst_req_o.w_valid), .dst_ready_i (dst_rsp_i.w_ready), .dst_data_o (dst_req_o.w)
  );
  async_fifo #(.T(axi_ax_t), .Depth(Depth)) u_ar (
    .src_clk_i, .src_rst_ni,
    .src_valid_i (src_req_i.ar_valid), .src_ready_o (src_rsp_o.ar_ready), .src_data_i (src_req_i.ar),
    .dst_clk_i, .dst_rst_ni,
    .dst_valid_o (dst_req_o.ar_valid), .dst_ready_i (dst_rsp_i.ar_ready), .dst_data_o (dst_req_o.ar)
  );
  async_fifo #(.T(axi_b_t), .Depth(Depth)) u_b (
    .src_clk_i (dst_clk_i), .src_rst_ni (dst_rst_ni),
    .src_valid_i (dst_rsp_i.b_valid), .src_ready_o (dst_req_o.b_ready), .src_data_i (dst_rsp_i.b),
    .dst_clk_i (src_clk_i), .dst_rst_ni (src_rst_ni),
    .dst_valid_o (src_rsp_o.b_valid), .dst_ready_i (src_req_i.b_ready), .dst_data_o (src_rsp_o.b)
  );
  async_fifo #(.T(axi_r_t), .Depth(Depth)) u_r (
    .src_clk_i (dst_clk_i), .src_rst_ni (dst_rst_ni),
    .src_valid_i (dst_rsp_i.r_valid), .src_ready_o (dst_req_o.r_ready), .src_data_i (dst_rsp_i.r),
    .dst_clk_i (src_clk_i), .dst_rst_ni (src_rst_ni),
    .dst_valid_o (src_rsp_o.r_valid), .dst_ready_i (src_req_i.r_ready), .dst_data_o (src_rsp_o.r)
  );
endmodule
