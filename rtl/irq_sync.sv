// irq_sync: synchroniser of a level interrupt into another clock domain.
//
// A chain of Stages flip-flops in the destination clock samples the
// asynchronous level; the output follows the input after Stages cycles. In
// the secure element it carries the mailbox doorbell interrupt from the host
// SoC clock into the OpenTitan clock, toward OpenTitan's PLIC.
//
// The design places a CDC stage on the mailbox interrupt toward the PLIC;
// the two-flop form and the level (not pulse) semantics are this design's
// own choice.
module irq_sync #(
  parameter int unsigned Stages = 2
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic irq_i,
  output logic irq_o
);
  logic [Stages-1:0] sync_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) sync_q <= '0;
    else         sync_q <= {sync_q[Stages-2:0], irq_i};
  end

  assign irq_o = sync_q[Stages-1];
endmodule
