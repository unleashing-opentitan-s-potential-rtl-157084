// tb_axi_cdc: checks the AXI4 clock domain crossing between two unrelated
// clocks (10 and 7 time units). A master in the source clock writes and reads
// random words of a memory model in the destination clock; every write must
// land and every read must return the right word.
// The clock ratio and the memory model are the testbench's own choices.
module tb_axi_cdc;
  import ot_pkg::*;
  logic clk_s = 0, clk_d = 0, rst_n = 0;
  always #5 clk_s = ~clk_s;
  always #3.5 clk_d = ~clk_d;
  int checks = 0, failures = 0;

  axi_req_t sreq, dreq;
  axi_rsp_t srsp, drsp;

  axi_cdc dut (.src_clk_i(clk_s), .src_rst_ni(rst_n), .src_req_i(sreq), .src_rsp_o(srsp),
               .dst_clk_i(clk_d), .dst_rst_ni(rst_n), .dst_req_o(dreq), .dst_rsp_i(drsp));
  tb_axi_master u_mst (.clk_i(clk_s), .req_o(sreq), .rsp_i(srsp));
  tb_axi_mem #(.Words(256), .Latency(1)) u_mem (.clk_i(clk_d), .rst_ni(rst_n), .req_i(dreq), .rsp_o(drsp));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [31:0] ref_mem [256], rd;
  initial begin
    for (int i = 0; i < 256; i++) ref_mem[i] = '0;
    repeat (4) @(negedge clk_s);
    rst_n = 1;
    repeat (2) @(negedge clk_s);
    for (int i = 0; i < 80; i++) begin
      int a; logic [31:0] w;
      a = $urandom_range(0, 255); w = $urandom;
      u_mst.write32(32'(a * 4), w);
      ref_mem[a] = w;
      a = $urandom_range(0, 255);
      u_mst.read32(32'(a * 4), rd);
      check(rd == ref_mem[a], $sformatf("read %0d got %h exp %h", a, rd, ref_mem[a]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk_s);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
