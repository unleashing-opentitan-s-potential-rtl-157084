// tb_tlul_xbar: checks the TL-UL crossbar with three memory devices, once
// with pass-through FIFOs and once with registered FIFOs. Every device must
// receive exactly the accesses of its address window (the last one also all
// unmatched addresses), data must round-trip, and a load to a single-cycle
// memory must take 2 cycles in pass-through mode and 6 cycles in registered
// mode, the access costs the paper reports for the optimised and the stock
// interconnect.
module tb_tlul_xbar;
  import ot_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam logic [2:0][31:0] Base = {32'h0, 32'h2000_0000, 32'h1000_0000};
  localparam logic [2:0][31:0] Mask = {32'h0, 32'hF000_0000, 32'hF000_0000};

  tl_h2d_t h2d [2];
  tl_d2h_t d2h [2];
  tl_h2d_t dev_h2d [2][3];
  tl_d2h_t dev_d2h [2][3];

  tlul_xbar #(.NumDev(3), .AddrBase(Base), .AddrMask(Mask), .Pass(1'b1)) u_pass (
    .clk_i(clk), .rst_ni(rst_n), .tl_h_i(h2d[0]), .tl_h_o(d2h[0]),
    .tl_d_o(dev_h2d[0]), .tl_d_i(dev_d2h[0]));
  tlul_xbar #(.NumDev(3), .AddrBase(Base), .AddrMask(Mask), .Pass(1'b0)) u_reg (
    .clk_i(clk), .rst_ni(rst_n), .tl_h_i(h2d[1]), .tl_h_o(d2h[1]),
    .tl_d_o(dev_h2d[1]), .tl_d_i(dev_d2h[1]));

  for (genvar x = 0; x < 2; x++) begin : g_x
    tb_tl_host u_host (.clk_i(clk), .tl_o(h2d[x]), .tl_i(d2h[x]));
    for (genvar d = 0; d < 3; d++) begin : g_d
      tb_mem_dev #(.Words(64)) u_dev (.clk_i(clk), .rst_ni(rst_n),
        .tl_i(dev_h2d[x][d]), .tl_o(dev_d2h[x][d]));
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [31:0] rd;
  int lat;
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // distinct data per device, then read back through the same windows
    g_x[0].u_host.write32(32'h1000_0010, 32'h1111_0001);
    g_x[0].u_host.write32(32'h2000_0010, 32'h2222_0002);
    g_x[0].u_host.write32(32'h3000_0010, 32'h3333_0003);   // default device
    g_x[1].u_host.write32(32'h1000_0010, 32'h1111_0001);
    g_x[1].u_host.write32(32'h2000_0010, 32'h2222_0002);
    g_x[1].u_host.write32(32'h3000_0010, 32'h3333_0003);
    check(g_x[0].g_d[0].u_dev.mem[4] == 32'h1111_0001, "dev0 written");
    check(g_x[0].g_d[1].u_dev.mem[4] == 32'h2222_0002, "dev1 written");
    check(g_x[0].g_d[2].u_dev.mem[4] == 32'h3333_0003, "default dev written");
    for (int x = 0; x < 2; x++) begin
      for (int d = 0; d < 3; d++) begin
        logic [31:0] exp;
        exp = {{4{4'(d + 1)}}, 16'h0000} | 32'(d + 1);
        if (x == 0) g_x[0].u_host.read32_lat(32'h1000_0010 + 32'(d) * 32'h1000_0000, rd, lat);
        else        g_x[1].u_host.read32_lat(32'h1000_0010 + 32'(d) * 32'h1000_0000, rd, lat);
        check(rd == exp, $sformatf("xbar%0d dev%0d read %h exp %h", x, d, rd, exp));
        check(lat == ((x == 0) ? 2 : 6), $sformatf("xbar%0d load latency %0d", x, lat));
      end
    end
    // many accesses alternating devices (exercises the same-device stall)
    for (int i = 0; i < 40; i++) begin
      int d;
      d = $urandom_range(0, 2);
      g_x[0].u_host.write32(32'h1000_0000 + 32'(d) * 32'h1000_0000 + 32'(4 * (i % 16)), 32'(i * 7 + d));
      g_x[0].u_host.read32(32'h1000_0000 + 32'(d) * 32'h1000_0000 + 32'(4 * (i % 16)), rd);
      check(rd == 32'(i * 7 + d), "random round trip");
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
