// tb_mem_dev: TL-UL memory device for testbenches: a tlul_to_mem adapter in
// front of a single-cycle word array of Words entries (address modulo size).
// A testbench model; its size is arbitrary.
module tb_mem_dev
  import ot_pkg::*;
#(
  parameter int unsigned Words = 256
) (
  input  logic    clk_i,
  input  logic    rst_ni,
  input  tl_h2d_t tl_i,
  output tl_d2h_t tl_o
);
  mem_req_t req;
  mem_rsp_t rsp;
  logic [31:0] mem [Words];
  logic        rvalid_q;
  logic [31:0] rdata_q;

  tlul_to_mem u_adapter (.clk_i, .rst_ni, .tl_i, .tl_o, .mem_o (req), .mem_i (rsp));

  initial for (int i = 0; i < Words; i++) mem[i] = '0;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
    end else begin
      rvalid_q <= req.req;
      if (req.req) begin
        if (req.we) begin
          for (int b = 0; b < 4; b++)
            if (req.be[b]) mem[(req.addr >> 2) % Words][8*b +: 8] <= req.wdata[8*b +: 8];
        end
        rdata_q <= mem[(req.addr >> 2) % Words];
      end
    end
  end

  assign rsp.gnt    = 1'b1;
  assign rsp.rvalid = rvalid_q;
  assign rsp.rdata  = rdata_q;
endmodule
