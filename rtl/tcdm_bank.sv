// tcdm_bank: one single-port SRAM bank of the TCDM, 32-bit words with byte
// enables. A request is always granted; read data appears one cycle later.
// It stands for the technology SRAM macro of the physical implementation and
// is written as a plain array so that it maps onto one.
//
// Bank size follows the design (4 KiB per bank); the single-cycle
// byte-enable SRAM model is this design's own choice.
module tcdm_bank #(
  parameter int unsigned Words = 1024
) (
  input  logic                     clk_i,
  input  logic                     req_i,
  input  logic                     we_i,
  input  logic [$clog2(Words)-1:0] addr_i,
  input  logic [31:0]              wdata_i,
  input  logic [3:0]               be_i,
  output logic [31:0]              rdata_o
);
  logic [31:0] mem_q [Words];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int b = 0; b < 4; b++) begin
          if (be_i[b]) mem_q[addr_i][8*b +: 8] <= wdata_i[8*b +: 8];
        end
      end
      rdata_o <= mem_q[addr_i];
    end
  end
endmodule
