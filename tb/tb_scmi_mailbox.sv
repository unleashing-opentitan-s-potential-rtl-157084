// tb_scmi_mailbox: checks the SCMI shared-memory mailbox from both AXI4
// ports: reset values (channel free), the register map of the SCMI layout,
// the payload area written by one port and read by the other, the doorbell
// toward the secure element, and the completion interrupt toward the host
// gated by the channel flags. Both ports also hammer the payload at the same
// time with random data to exercise the port-0-first arbitration.
// The register layout follows the SCMI layout of the source design; the
// doorbell offsets are this design's own.
module tb_scmi_mailbox;
  import ot_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  axi_req_t hreq, oreq;
  axi_rsp_t hrsp, orsp;
  logic irq_ot, irq_host;

  scmi_mailbox dut (.clk_i(clk), .rst_ni(rst_n), .host_req_i(hreq), .host_rsp_o(hrsp),
                    .ot_req_i(oreq), .ot_rsp_o(orsp), .irq_ot_o(irq_ot), .irq_host_o(irq_host));
  tb_axi_master u_host (.clk_i(clk), .req_o(hreq), .rsp_i(hrsp));
  tb_axi_master u_ot   (.clk_i(clk), .req_o(oreq), .rsp_i(orsp));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  localparam logic [31:0] B = MBOX_BASE;
  logic [31:0] rd, pl [32];
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    u_host.read32(B + 32'h04, rd);
    check(rd == 32'h1, "channel free after reset");
    u_host.read32(B + 32'h00, rd);
    check(rd == 0, "reserved 0x00");
    u_host.write32(B + 32'h08, 32'hFFFF_FFFF);
    u_host.read32(B + 32'h08, rd);
    check(rd == 0, "reserved 0x08");
    check(!irq_ot && !irq_host, "no interrupt after reset");
    // host posts a message
    u_host.write32(B + 32'h04, 32'h0);                 // channel busy
    u_host.write32(B + 32'h10, 32'h1);                 // completion interrupt wanted
    u_host.write32(B + 32'h14, 32'd132);
    u_host.write32(B + 32'h18, 32'h0001_0203);
    for (int i = 0; i < 32; i++) begin
      pl[i] = $urandom;
      u_host.write32(B + 32'h1C + 32'(4 * i), pl[i]);
    end
    check(!irq_ot, "no doorbell before ringing");
    u_host.write32(B + 32'h100, 32'h1);
    @(negedge clk);
    check(irq_ot, "doorbell to the secure element");
    // secure element reads it
    u_ot.read32(B + 32'h14, rd);   check(rd == 132, "length");
    u_ot.read32(B + 32'h18, rd);   check(rd == 32'h0001_0203, "header");
    u_ot.read32(B + 32'h04, rd);   check(rd == 0, "status busy");
    for (int i = 0; i < 32; i++) begin
      u_ot.read32(B + 32'h1C + 32'(4 * i), rd);
      check(rd == pl[i], $sformatf("payload %0d", i));
    end
    u_ot.write32(B + 32'h100, 32'h0);
    @(negedge clk);
    check(!irq_ot, "doorbell cleared");
    // result and completion
    u_ot.write32(B + 32'h1C, ~pl[0]);
    u_ot.write32(B + 32'h04, 32'h1);
    u_ot.write32(B + 32'h104, 32'h1);
    @(negedge clk);
    check(irq_host, "completion interrupt");
    u_host.read32(B + 32'h1C, rd);
    check(rd == ~pl[0], "result word");
    u_host.write32(B + 32'h104, 32'h0);
    @(negedge clk);
    check(!irq_host, "completion cleared");
    // flags bit 0 masks the completion interrupt
    u_host.write32(B + 32'h10, 32'h0);
    u_ot.write32(B + 32'h104, 32'h1);
    repeat (2) @(negedge clk);
    check(!irq_host, "completion masked by channel flags");
    u_host.write32(B + 32'h10, 32'h1);
    @(negedge clk);
    check(irq_host, "pending completion shows when enabled");
    u_host.write32(B + 32'h104, 32'h0);
    // simultaneous traffic on both ports
    for (int r = 0; r < 20; r++) begin
      int ih, io;
      logic [31:0] dh, dz;
      ih = $urandom_range(0, 15); io = 16 + $urandom_range(0, 15);
      dh = $urandom; dz = $urandom;
      fork
        u_host.write32(B + 32'h1C + 32'(4 * ih), dh);
        u_ot.write32(B + 32'h1C + 32'(4 * io), dz);
      join
      pl[ih] = dh; pl[io] = dz;
      fork
        begin logic [31:0] x; u_host.read32(B + 32'h1C + 32'(4 * io), x);
              check(x == dz, "cross read by host"); end
        begin logic [31:0] y; u_ot.read32(B + 32'h1C + 32'(4 * ih), y);
              check(y == dh, "cross read by secure element"); end
      join
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
