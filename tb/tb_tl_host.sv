// tb_tl_host: TL-UL host model for testbenches (stands for the
// microcontroller's data port). Tasks issue one request at a time; inputs
// are driven and outputs sampled one time unit after the falling clock
// edge, away from the rising edge where the design updates.
// lat_o of each access is the number of cycles from the cycle the request
// is first presented to the cycle the response is valid, both included.
// The latency measurement counts request and response cycles, the same
// way the 2-cycle and 6-cycle access costs of the source design are counted.
module tb_tl_host
  import ot_pkg::*;
(
  input  logic    clk_i,
  output tl_h2d_t tl_o,
  input  tl_d2h_t tl_i
);
  initial tl_o = '{a_valid: 1'b0, a: '0, d_ready: 1'b1};

  task automatic access(input logic we, input logic [31:0] addr, input logic [31:0] wdata,
                        input logic [3:0] mask, output logic [31:0] rdata,
                        output logic err, output int lat);
    int cyc;
    logic got_a;
    @(negedge clk_i);
    tl_o.a_valid   = 1'b1;
    tl_o.a.opcode  = we ? ((mask == 4'hF) ? PutFullData : PutPartialData) : Get;
    tl_o.a.size    = 2'd2;
    tl_o.a.source  = 8'h5;
    tl_o.a.address = addr;
    tl_o.a.mask    = mask;
    tl_o.a.data    = wdata;
    tl_o.d_ready   = 1'b1;
    cyc   = 1;
    got_a = 1'b0;
    forever begin
      #1;
      if (got_a && tl_i.d_valid) break;
      if (!got_a && tl_i.a_ready) got_a = 1'b1;
      @(negedge clk_i);
      if (got_a) tl_o.a_valid = 1'b0;
      cyc++;
      if (cyc > 2000) begin
        $display("tb_tl_host: no response for address %h", addr);
        break;
      end
    end
    rdata = tl_i.d.data;
    err   = tl_i.d.error;
    lat   = cyc;
    @(negedge clk_i);
    tl_o.a_valid = 1'b0;
  endtask

  task automatic write32(input logic [31:0] addr, input logic [31:0] data);
    logic [31:0] rd; logic e; int l;
    access(1'b1, addr, data, 4'hF, rd, e, l);
  endtask

  task automatic read32(input logic [31:0] addr, output logic [31:0] data);
    logic e; int l;
    access(1'b0, addr, '0, 4'hF, data, e, l);
  endtask

  task automatic read32_lat(input logic [31:0] addr, output logic [31:0] data, output int lat);
    logic e;
    access(1'b0, addr, '0, 4'hF, data, e, lat);
  endtask
endmodule
