// tb_axi_to_mem: checks the AXI4-to-memory converter. Random INCR write
// bursts (random strobes, random W gaps) are followed by read bursts with
// random R back-pressure; read data must match a reference memory. A 16-beat
// read burst with R always ready must finish within 16 + 3 cycles of its AR
// handshake (one beat per cycle once streaming).
// The one-beat-per-cycle streaming rate is this design's own target; it is
// what lets the DMA approach its nominal 0.25 cycles per byte.
module tb_axi_to_mem;
  import ot_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  axi_req_t axi_req;
  axi_rsp_t axi_rsp;
  mem_req_t mreq;
  mem_rsp_t mrsp;
  logic [31:0] mem [256];
  logic rvalid_q;
  logic [31:0] rdata_q;
  logic gnt_rand;

  axi_to_mem dut (.clk_i(clk), .rst_ni(rst_n), .axi_i(axi_req), .axi_o(axi_rsp), .mem_o(mreq), .mem_i(mrsp));

  always_ff @(posedge clk) begin
    rvalid_q <= rst_n && mreq.req && gnt_rand;
    if (mreq.req && gnt_rand) begin
      if (mreq.we) for (int b = 0; b < 4; b++) if (mreq.be[b]) mem[mreq.addr[9:2]][8*b +: 8] <= mreq.wdata[8*b +: 8];
      rdata_q <= mem[mreq.addr[9:2]];
    end
  end
  assign mrsp = '{gnt: gnt_rand, rvalid: rvalid_q, rdata: rdata_q};

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [31:0] ref_mem [256];

  task automatic wr_burst(input int word, input int n);
    int beat;
    @(negedge clk);
    axi_req.aw = '{id: 4'h3, addr: 32'(word * 4), len: 8'(n - 1), size: 3'd2, burst: AXI_BURST_INCR};
    axi_req.aw_valid = 1;
    #1; while (!axi_rsp.aw_ready) begin @(negedge clk); #1; end
    @(negedge clk); axi_req.aw_valid = 0;
    beat = 0;
    while (beat < n) begin
      axi_req.w_valid = ($urandom_range(0, 3) != 0);
      axi_req.w.data  = $urandom;
      axi_req.w.strb  = 4'($urandom_range(0, 15));
      axi_req.w.last  = (beat == n - 1);
      #1;
      if (axi_req.w_valid && axi_rsp.w_ready) begin
        for (int b = 0; b < 4; b++) if (axi_req.w.strb[b]) ref_mem[(word + beat) % 256][8*b +: 8] = axi_req.w.data[8*b +: 8];
        beat++;
      end
      @(negedge clk);
    end
    axi_req.w_valid = 0;
    axi_req.b_ready = 1;
    #1; while (!axi_rsp.b_valid) begin @(negedge clk); #1; end
    check(axi_rsp.b.id == 4'h3 && axi_rsp.b.resp == AXI_RESP_OKAY, "B response");
    @(negedge clk);
  endtask

  task automatic rd_burst(input int word, input int n, input bit full_speed, output int cycles);
    int beat;
    @(negedge clk);
    axi_req.ar = '{id: 4'h5, addr: 32'(word * 4), len: 8'(n - 1), size: 3'd2, burst: AXI_BURST_INCR};
    axi_req.ar_valid = 1;
    #1; while (!axi_rsp.ar_ready) begin @(negedge clk); #1; end
    @(negedge clk); axi_req.ar_valid = 0;
    beat = 0; cycles = 1;
    while (beat < n) begin
      axi_req.r_ready = full_speed || ($urandom_range(0, 2) != 0);
      #1;
      if (axi_rsp.r_valid && axi_req.r_ready) begin
        check(axi_rsp.r.data == ref_mem[(word + beat) % 256], $sformatf("R beat %0d", beat));
        check(axi_rsp.r.last == (beat == n - 1), "R last");
        beat++;
      end
      @(negedge clk);
      cycles++;
    end
    axi_req.r_ready = 0;
  endtask

  int cyc;
  initial begin
    axi_req = '0; gnt_rand = 1;
    for (int i = 0; i < 256; i++) begin mem[i] = '0; ref_mem[i] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      int w, n;
      w = $urandom_range(0, 200); n = $urandom_range(1, 16);
      gnt_rand = 1;
      wr_burst(w, n);
      rd_burst(w, n, 1'b0, cyc);
    end
    // full-speed burst
    wr_burst(64, 16);
    rd_burst(64, 16, 1'b1, cyc);
    check(cyc <= 19, $sformatf("16-beat read took %0d cycles", cyc));
    $display("16-beat read burst: %0d cycles", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
