// tb_lfsr_rng: checks the LFSR entropy stand-in. The default 32-bit
// instance must follow the polynomial x^32 + x^22 + x^2 + x + 1 step by step
// (reference computed bit by bit from the feedback equations) and must not
// return to its seed within 20000 steps; an 8-bit instance with the
// maximal-length polynomial x^8 + x^6 + x^5 + x^4 + 1 must have period 255
// exactly. The valid strobe follows the enable with one cycle of delay.
// The polynomial and seed are this design's own choices; the source design
// only asks for an LFSR-based generator.
module tb_lfsr_rng;
  logic clk = 0, rst_n = 0, en = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [3:0] rng32, rng8;
  logic v32, v8;

  lfsr_rng dut (.clk_i(clk), .rst_ni(rst_n), .en_i(en), .rng_o(rng32), .rng_valid_o(v32));
  lfsr_rng #(.Width(8), .Taps(8'hB8), .Seed(8'h01), .OutW(4)) dut8 (
    .clk_i(clk), .rst_ni(rst_n), .en_i(en), .rng_o(rng8), .rng_valid_o(v8));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // reference: right-shifting Galois form, taps at x^22, x^2, x^1, x^0
  function automatic logic [31:0] step(input logic [31:0] s);
    logic [31:0] n;
    logic fb;
    fb = s[0];
    for (int i = 0; i < 31; i++) n[i] = s[i + 1];
    n[31] = fb;
    n[21] = s[22] ^ fb;
    n[1]  = s[2] ^ fb;
    n[0]  = s[1] ^ fb;
    return n;
  endfunction

  logic [31:0] model;
  int period8;
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    model = 32'hACE1_2468;
    @(negedge clk);
    check(dut.state_q == model && !v32, "seed after reset, not valid");
    en = 1;
    period8 = 0;
    for (int i = 1; i <= 20000; i++) begin
      @(negedge clk);
      model = step(model);
      if (i < 300) check(dut.state_q == model && rng32 == model[3:0], $sformatf("step %0d", i));
      if (dut.state_q == 32'hACE1_2468) begin failures++; $display("FAIL: short period"); end
      if (period8 == 0 && dut8.state_q == 8'h01) period8 = i;
      if (i == 1) check(v32 && v8, "valid follows enable");
    end
    check(period8 == 255, $sformatf("8-bit period %0d", period8));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
