// tb_flash_dw: checks the flash direct-write datapath. With ENABLE = 1 the
// microcontroller writes three payload registers, the address and the
// trigger; the 76-bit word {PAYLOAD3[11:0], PAYLOAD2, PAYLOAD1} must appear
// at that address of the emulated flash (the upper 20 bits of PAYLOAD3 are
// dropped) in a single write. With ENABLE = 0 the regular flash datapath
// must own the memory and read the words back; with ENABLE = 1 it must see
// no grant.
module tb_flash_dw;
  import ot_pkg::*;
  localparam int AW = 14;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  tl_h2d_t h2d;
  tl_d2h_t d2h;
  logic ot_req, ot_we, ot_gnt, ot_rvalid;
  logic [AW-1:0] ot_addr;
  logic [75:0] ot_wdata, ot_rdata;
  logic m_req, m_we, m_gnt, m_rvalid;
  logic [AW-1:0] m_addr;
  logic [75:0] m_wdata, m_rdata;

  flash_dw dut (.clk_i(clk), .rst_ni(rst_n), .tl_i(h2d), .tl_o(d2h),
    .ot_req_i(ot_req), .ot_we_i(ot_we), .ot_addr_i(ot_addr), .ot_wdata_i(ot_wdata),
    .ot_gnt_o(ot_gnt), .ot_rvalid_o(ot_rvalid), .ot_rdata_o(ot_rdata),
    .mem_req_o(m_req), .mem_we_o(m_we), .mem_addr_o(m_addr), .mem_wdata_o(m_wdata),
    .mem_gnt_i(m_gnt), .mem_rvalid_i(m_rvalid), .mem_rdata_i(m_rdata));
  flash_emu_sram u_mem (.clk_i(clk), .rst_ni(rst_n), .req_i(m_req), .we_i(m_we), .addr_i(m_addr),
    .wdata_i(m_wdata), .gnt_o(m_gnt), .rvalid_o(m_rvalid), .rdata_o(m_rdata));
  tb_tl_host u_host (.clk_i(clk), .tl_o(h2d), .tl_i(d2h));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int writes = 0;
  always @(posedge clk) if (m_req && m_we && m_gnt) writes++;

  task automatic ot_read(input int a, output logic [75:0] d, output bit ok);
    @(negedge clk);
    ot_req = 1; ot_we = 0; ot_addr = AW'(a);
    #1; ok = ot_gnt;
    @(negedge clk); ot_req = 0; #1;
    ok = ok && ot_rvalid;
    d = ot_rdata;
  endtask

  logic [31:0] rd;
  logic [75:0] exp_w [8];
  int addrs [8];
  logic [75:0] d;
  bit ok;
  initial begin
    ot_req = 0; ot_we = 0; ot_addr = '0; ot_wdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    u_host.write32(FLASHDW_BASE + 32'h00, 32'h1);        // select direct write
    u_host.read32(FLASHDW_BASE + 32'h00, rd);
    check(rd == 1, "ENABLE reads back");
    for (int i = 0; i < 8; i++) begin
      logic [31:0] p1, p2, p3;
      int w0;
      p1 = $urandom; p2 = $urandom; p3 = $urandom;     // upper bits of p3 are garbage
      addrs[i] = (i == 7) ? 16383 : $urandom_range(0, 16382);
      exp_w[i] = {p3[11:0], p2, p1};
      u_host.write32(FLASHDW_BASE + 32'h04, p1);
      u_host.write32(FLASHDW_BASE + 32'h08, p2);
      u_host.write32(FLASHDW_BASE + 32'h0C, p3);
      u_host.write32(FLASHDW_BASE + 32'h10, 32'(addrs[i]));
      w0 = writes;
      u_host.write32(FLASHDW_BASE + 32'h14, 32'h1);
      repeat (2) @(negedge clk);
      u_host.read32(FLASHDW_BASE + 32'h14, rd);
      check(rd == 0, "FSM back to idle");
      check(writes == w0 + 1, "exactly one 76-bit write per trigger");
      check(u_mem.mem_q[addrs[i]] == exp_w[i], $sformatf("word at %0d", addrs[i]));
    end
    ot_read(addrs[0], d, ok);
    check(!ok, "regular datapath blocked while ENABLE = 1");
    u_host.write32(FLASHDW_BASE + 32'h00, 32'h0);        // back to the regular datapath
    for (int i = 0; i < 8; i++) begin
      ot_read(addrs[i], d, ok);
      check(ok && d == exp_w[i], $sformatf("regular read %0d", i));
    end
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
