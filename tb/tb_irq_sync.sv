// tb_irq_sync: checks that the interrupt synchroniser follows its input
// exactly two destination-clock cycles later, for random input patterns.
// The two-stage depth is this design's own choice.
module tb_irq_sync;
  logic clk = 0, rst_n = 0, irq_in = 0, irq_out;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic hist [3];

  irq_sync #(.Stages(2)) dut (.clk_i(clk), .rst_ni(rst_n), .irq_i(irq_in), .irq_o(irq_out));

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    hist = '{0, 0, 0};
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      checks++;
      if (irq_out !== hist[1]) begin failures++; $display("FAIL at %0d", i); end
      irq_in = ($urandom_range(0, 3) == 0) ? ~irq_in : irq_in;
      hist[2] = hist[1]; hist[1] = hist[0]; hist[0] = irq_in;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
