// lfsr_rng: pseudo-random bit source that replaces the analog entropy of the
// AST, feeding OpenTitan's entropy source.
//
// A Width-bit Galois LFSR (default: x^32 + x^22 + x^2 + x + 1, maximal
// length) advances once per cycle while enabled and hands out its lowest
// OutW bits every cycle with a valid strobe. The seed is loaded at reset.
// This gives OpenTitan the entropy interface it expects so that the design
// runs without the AST; it is not a source of true randomness.
//
// The design specifies an LFSR-based generator feeding the entropy
// source; the width, polynomial, seed and 4-bit output are this design's
// own choices.
module lfsr_rng #(
  parameter int unsigned     Width = 32,
  parameter logic [Width-1:0] Taps  = 32'h8020_0003,
  parameter logic [Width-1:0] Seed  = 32'hACE1_2468,
  parameter int unsigned     OutW  = 4
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            en_i,
  output logic [OutW-1:0] rng_o,
  output logic            rng_valid_o
);
  logic [Width-1:0] state_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q     <= Seed;
      rng_valid_o <= 1'b0;
    end else begin
      rng_valid_o <= en_i;
      if (en_i) state_q <= (state_q >> 1) ^ (state_q[0] ? Taps : '0);
    end
  end

  assign rng_o = state_q[OutW-1:0];
endmodule
