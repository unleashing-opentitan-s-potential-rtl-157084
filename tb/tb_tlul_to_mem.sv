// tb_tlul_to_mem: checks the TL-UL to memory-port adapter against a
// single-cycle memory: writes with byte masks, reads, the AccessAck /
// AccessAckData opcodes, the 2-cycle load latency, and that a response held
// back by d_ready = 0 is kept intact.
// The 2-cycle load follows the access cost of the source design.
module tb_tlul_to_mem;
  import ot_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  tl_h2d_t h2d;
  tl_d2h_t d2h;
  mem_req_t req;
  mem_rsp_t rsp;
  logic [31:0] mem [16];
  logic rvalid_q;
  logic [31:0] rdata_q;

  tlul_to_mem dut (.clk_i(clk), .rst_ni(rst_n), .tl_i(h2d), .tl_o(d2h), .mem_o(req), .mem_i(rsp));
  tb_tl_host u_host (.clk_i(clk), .tl_o(h2d), .tl_i(d2h));

  always_ff @(posedge clk) begin
    rvalid_q <= rst_n && req.req;
    if (req.req) begin
      if (req.we) for (int b = 0; b < 4; b++) if (req.be[b]) mem[req.addr[5:2]][8*b +: 8] <= req.wdata[8*b +: 8];
      rdata_q <= mem[req.addr[5:2]];
    end
  end
  assign rsp = '{gnt: 1'b1, rvalid: rvalid_q, rdata: rdata_q};

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [31:0] rd, ref_mem [16];
  logic e;
  int lat;
  initial begin
    for (int i = 0; i < 16; i++) begin mem[i] = '0; ref_mem[i] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 60; i++) begin
      int a; logic [3:0] m; logic [31:0] w;
      a = $urandom_range(0, 15); m = 4'($urandom_range(1, 15)); w = $urandom;
      u_host.access(1'b1, 32'(a * 4), w, m, rd, e, lat);
      check(lat == 2, $sformatf("write latency %0d", lat));
      for (int b = 0; b < 4; b++) if (m[b]) ref_mem[a][8*b +: 8] = w[8*b +: 8];
      a = $urandom_range(0, 15);
      u_host.read32_lat(32'(a * 4), rd, lat);
      check(rd == ref_mem[a], $sformatf("read %0d: %h exp %h", a, rd, ref_mem[a]));
      check(lat == 2, $sformatf("read latency %0d", lat));
    end
    // hold a response with d_ready low for a few cycles
    @(negedge clk);
    h2d.a_valid = 1; h2d.a.opcode = Get; h2d.a.address = 32'h8; h2d.d_ready = 0;
    @(negedge clk); h2d.a_valid = 0;
    repeat (4) begin
      @(negedge clk); #1;
      check(d2h.d_valid && d2h.d.data == ref_mem[2] && d2h.d.opcode == AccessAckData, "held response");
      check(!d2h.a_ready, "no new request while holding");
    end
    h2d.d_ready = 1;
    @(negedge clk); #1;
    check(!d2h.d_valid, "held response released");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
