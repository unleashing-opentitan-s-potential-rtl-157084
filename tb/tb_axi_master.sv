// tb_axi_master: AXI4 master model for testbenches (stands for the host
// processor reaching a slave through the SoC interconnect). Single-beat
// 32-bit reads and writes, one at a time; driven one time unit after the
// falling clock edge.
// Single-beat transfers and the driving edge are this model's own choices.
module tb_axi_master
  import ot_pkg::*;
(
  input  logic     clk_i,
  output axi_req_t req_o,
  input  axi_rsp_t rsp_i
);
  initial req_o = '0;

  task automatic write32(input logic [31:0] addr, input logic [31:0] data);
    bit aw_done, w_done;
    @(negedge clk_i);
    req_o.aw = '{id: 4'h1, addr: addr, len: 8'd0, size: 3'd2, burst: AXI_BURST_INCR};
    req_o.w  = '{data: data, strb: 4'hF, last: 1'b1};
    req_o.aw_valid = 1; req_o.w_valid = 1; req_o.b_ready = 1;
    aw_done = 0; w_done = 0;
    for (int i = 0; i < 1000; i++) begin
      #1;
      if (rsp_i.aw_ready) aw_done = 1;
      if (rsp_i.w_ready)  w_done = 1;
      if (aw_done && w_done && rsp_i.b_valid) break;
      @(negedge clk_i);
      if (aw_done) req_o.aw_valid = 0;
      if (w_done)  req_o.w_valid  = 0;
    end
    @(negedge clk_i);
    req_o.aw_valid = 0; req_o.w_valid = 0; req_o.b_ready = 0;
  endtask

  task automatic read32(input logic [31:0] addr, output logic [31:0] data);
    bit ar_done;
    @(negedge clk_i);
    req_o.ar = '{id: 4'h1, addr: addr, len: 8'd0, size: 3'd2, burst: AXI_BURST_INCR};
    req_o.ar_valid = 1; req_o.r_ready = 1;
    ar_done = 0;
    data = '0;
    for (int i = 0; i < 1000; i++) begin
      #1;
      if (rsp_i.ar_ready) ar_done = 1;
      if (rsp_i.r_valid) begin data = rsp_i.r.data; break; end
      @(negedge clk_i);
      if (ar_done) req_o.ar_valid = 0;
    end
    @(negedge clk_i);
    req_o.ar_valid = 0; req_o.r_ready = 0;
  endtask
endmodule
