// tb_tcdm: checks the banked TCDM with two masters issuing random reads and
// writes in disjoint halves of the memory (so the expected contents do not
// depend on arbitration order) but over all banks, so that bank conflicts
// happen. Read data are compared with a reference array updated at each
// grant; the round-robin arbiter must never keep a master waiting more than
// one cycle, and two masters on different banks must both be granted.
// The testbench overrides BankWords to 64 to keep the run short; banking
// (8 banks, 2 masters) follows the source design.
module tb_tcdm;
  import ot_pkg::*;
  localparam int NB = 8, BW = 64;          // reduced depth for a short run
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, conflicts = 0;

  mem_req_t req [2];
  mem_rsp_t rsp [2];
  logic conflict;

  tcdm #(.NumMasters(2), .NumBanks(NB), .BankWords(BW)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .rsp_o(rsp), .conflict_o(conflict));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [31:0] ref_mem [NB*BW];
  logic [31:0] exp_q [2][$];
  int wait_cnt [2];
  bit granted [2];

  initial begin
    for (int m = 0; m < 2; m++) begin req[m] = '0; wait_cnt[m] = 0; granted[m] = 0; end
    for (int i = 0; i < NB*BW; i++) ref_mem[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // write everything once so reads see defined data
    for (int i = 0; i < NB*BW; i++) begin
      @(negedge clk);
      req[0] = '{req: 1'b1, we: 1'b1, addr: 32'(i * 4), wdata: 32'(i) ^ 32'hC0DE_0000, be: 4'hF};
      #1; while (!rsp[0].gnt) begin @(negedge clk); #1; end
      ref_mem[i] = 32'(i) ^ 32'hC0DE_0000;
    end
    @(negedge clk); req[0] = '0;
    @(negedge clk);
    // random traffic from both masters
    for (int cyc = 0; cyc < 3000; cyc++) begin
      @(negedge clk);
      #1;
      // responses of the previous cycle
      for (int m = 0; m < 2; m++) begin
        if (rsp[m].rvalid) begin
          logic [31:0] e;
          e = exp_q[m].pop_front();
          check(rsp[m].rdata == e, $sformatf("m%0d rdata %h exp %h", m, rsp[m].rdata, e));
        end
      end
      // new requests (a request not granted stays as it is)
      for (int m = 0; m < 2; m++) begin
        if (!req[m].req || granted[m]) begin
          int w;
          w = $urandom_range(0, NB*BW/2 - 1) + m * NB*BW/2;
          req[m].req   = ($urandom_range(0, 3) != 0);
          req[m].we    = $urandom_range(0, 1);
          req[m].addr  = 32'(w * 4);
          req[m].wdata = $urandom;
          req[m].be    = 4'($urandom_range(1, 15));
        end
      end
      #1;
      if (req[0].req && req[1].req && req[0].addr[4:2] != req[1].addr[4:2])
        check(rsp[0].gnt && rsp[1].gnt, "different banks both granted");
      if (conflict) conflicts++;
      for (int m = 0; m < 2; m++) begin
        granted[m] = req[m].req && rsp[m].gnt;
        if (req[m].req && rsp[m].gnt) begin
          int w;
          w = req[m].addr >> 2;
          exp_q[m].push_back(ref_mem[w]);
          if (req[m].we) for (int b = 0; b < 4; b++)
            if (req[m].be[b]) ref_mem[w][8*b +: 8] = req[m].wdata[8*b +: 8];
          wait_cnt[m] = 0;
        end else if (req[m].req) begin
          wait_cnt[m]++;
          check(wait_cnt[m] <= 1, "round-robin fairness");
        end
      end
    end
    check(conflicts > 0, $sformatf("bank conflicts seen: %0d", conflicts));
    $display("bank conflicts: %0d", conflicts);
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
