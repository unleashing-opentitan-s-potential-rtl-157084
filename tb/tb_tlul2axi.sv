// tb_tlul2axi: checks the TL-UL to AXI4 bridge against an AXI memory model.
// Random full and partial writes and reads must reach / come from the
// memory; every AXI transaction must be a single beat with the strobes of
// the TL-UL mask; a read through a zero-latency slave must take 4 cycles
// (accept, AR, R, D).
// The 4-cycle read latency is this design's own; the source design gives
// only the overall cost of a load through the bridge and crossings.
module tb_tlul2axi;
  import ot_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  tl_h2d_t h2d;
  tl_d2h_t d2h;
  axi_req_t areq;
  axi_rsp_t arsp;
  int lat_mem;

  tlul2axi dut (.clk_i(clk), .rst_ni(rst_n), .tl_i(h2d), .tl_o(d2h), .axi_o(areq), .axi_i(arsp));
  tb_tl_host u_host (.clk_i(clk), .tl_o(h2d), .tl_i(d2h));
  tb_axi_mem #(.Words(256), .Latency(0)) u_mem (.clk_i(clk), .rst_ni(rst_n), .req_i(areq), .rsp_o(arsp));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int beats_bad = 0;
  always @(posedge clk) begin
    if (areq.ar_valid && arsp.ar_ready && areq.ar.len != 0) beats_bad++;
    if (areq.aw_valid && arsp.aw_ready && areq.aw.len != 0) beats_bad++;
  end

  logic [31:0] ref_mem [256], rd;
  logic e;
  int lat;
  initial begin
    for (int i = 0; i < 256; i++) ref_mem[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 100; i++) begin
      int a; logic [3:0] m; logic [31:0] w;
      a = $urandom_range(0, 255); m = ($urandom_range(0, 1) != 0) ? 4'hF : 4'($urandom_range(1, 15));
      w = $urandom;
      u_host.access(1'b1, 32'h8000_0000 + 32'(a * 4), w, m, rd, e, lat);
      check(!e, "write ok");
      for (int b = 0; b < 4; b++) if (m[b]) ref_mem[a][8*b +: 8] = w[8*b +: 8];
      check(u_mem.mem[a] == ref_mem[a], $sformatf("memory word %0d", a));
      a = $urandom_range(0, 255);
      u_host.access(1'b0, 32'h8000_0000 + 32'(a * 4), '0, 4'hF, rd, e, lat);
      check(rd == ref_mem[a], $sformatf("read %0d got %h exp %h", a, rd, ref_mem[a]));
      check(lat == 4, $sformatf("read latency %0d", lat));
    end
    check(beats_bad == 0, "single-beat transactions only");
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
