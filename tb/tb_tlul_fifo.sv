// tb_tlul_fifo: checks the TL-UL FIFO stage in pass-through and in
// registered mode. Random request and response streams with random
// back-pressure must arrive complete and in order; an empty pass-through
// FIFO must forward a beat in the same cycle, a registered one a cycle later.
// Pass-through-when-empty follows the source design; depths are own
// choices.
module tb_tlul_fifo;
  import ot_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  tl_h2d_t h_i [2];
  tl_d2h_t h_o [2];
  tl_h2d_t d_o [2];
  tl_d2h_t d_i [2];

  tlul_fifo #(.ReqPass(1'b1), .RspPass(1'b1)) u_pass (.clk_i(clk), .rst_ni(rst_n),
    .tl_h_i(h_i[0]), .tl_h_o(h_o[0]), .tl_d_o(d_o[0]), .tl_d_i(d_i[0]));
  tlul_fifo #(.ReqPass(1'b0), .RspPass(1'b0)) u_reg (.clk_i(clk), .rst_ni(rst_n),
    .tl_h_i(h_i[1]), .tl_h_o(h_o[1]), .tl_d_o(d_o[1]), .tl_d_i(d_i[1]));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // latency of a single beat into an empty FIFO
  task automatic latency(input int k, input int exp_a, input int exp_d);
    int n;
    @(negedge clk);
    h_i[k].a_valid = 1; h_i[k].a.data = 32'hA5A5_0000 + k; d_i[k].a_ready = 1;
    n = 0;
    #1; while (!d_o[k].a_valid) begin @(negedge clk); h_i[k].a_valid = 0; n++; #1; end
    check(n == exp_a && d_o[k].a.data == 32'hA5A5_0000 + k, $sformatf("A latency fifo%0d = %0d", k, n));
    @(negedge clk); h_i[k].a_valid = 0;
    d_i[k].d_valid = 1; d_i[k].d.data = 32'h5A5A_0000 + k; h_i[k].d_ready = 1;
    n = 0;
    #1; while (!h_o[k].d_valid) begin @(negedge clk); d_i[k].d_valid = 0; n++; #1; end
    check(n == exp_d && h_o[k].d.data == 32'h5A5A_0000 + k, $sformatf("D latency fifo%0d = %0d", k, n));
    @(negedge clk); d_i[k].d_valid = 0;
    repeat (3) @(negedge clk);
  endtask

  // random streaming with back-pressure on both channels
  task automatic stream(input int k, input int n);
    logic [31:0] aq[$], dq[$];
    int sent_a = 0, sent_d = 0, got_a = 0, got_d = 0, guard = 0;
    while ((got_a < n || got_d < n) && guard < 20000) begin
      @(negedge clk);
      guard++;
      h_i[k].a_valid = (sent_a < n) && ($urandom_range(0, 3) != 0);
      h_i[k].a.data  = 32'h1000 + sent_a;
      d_i[k].a_ready = ($urandom_range(0, 2) != 0);
      d_i[k].d_valid = (sent_d < n) && ($urandom_range(0, 3) != 0);
      d_i[k].d.data  = 32'h2000 + sent_d;
      h_i[k].d_ready = ($urandom_range(0, 2) != 0);
      #1;
      if (h_i[k].a_valid && h_o[k].a_ready) begin aq.push_back(h_i[k].a.data); sent_a++; end
      if (d_o[k].a_valid && d_i[k].a_ready) begin
        check(aq.size() > 0 && d_o[k].a.data == aq.pop_front(), "A order");
        got_a++;
      end
      if (d_i[k].d_valid && d_o[k].d_ready) begin dq.push_back(d_i[k].d.data); sent_d++; end
      if (h_o[k].d_valid && h_i[k].d_ready) begin
        check(dq.size() > 0 && h_o[k].d.data == dq.pop_front(), "D order");
        got_d++;
      end
    end
    check(got_a == n && got_d == n, "stream complete");
    @(negedge clk);
    h_i[k].a_valid = 0; d_i[k].d_valid = 0;
  endtask

  initial begin
    for (int k = 0; k < 2; k++) begin
      h_i[k] = '{a_valid: 1'b0, a: '0, d_ready: 1'b1};
      d_i[k] = '{d_valid: 1'b0, d: '0, a_ready: 1'b1};
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    latency(0, 0, 0);
    latency(1, 1, 1);
    stream(0, 200);
    stream(1, 200);
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
