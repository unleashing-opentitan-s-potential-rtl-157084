// flash_emu_sram: SRAM banks that stand in for the embedded flash of
// OpenTitan when no flash macro is available.
//
// Words are 76 bits wide: the flash controller stores two 32-bit words, each
// extended with 6 ECC/integrity bits (2 x 38 = 76). The default holds two
// banks (A/B) whose data partition is reduced to 64 KiB each, i.e. 8192
// words per bank, each word carrying 8 data bytes. The top address bit
// selects the bank. Single port; requests are always granted and read data
// appear one cycle later. The image is lost at power-off and is reloaded
// before every boot.
//
// Follows the design: SRAM banks of 76-bit words in place of the flash,
// with the data partition reduced to 64 KiB per bank. Single-cycle timing
// and the always-granting port are this design's own choices.
module flash_emu_sram #(
  parameter int unsigned Banks        = 2,
  parameter int unsigned WordsPerBank = 8192,
  parameter int unsigned Width        = 76,
  localparam int unsigned AddrW = $clog2(Banks * WordsPerBank)
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             req_i,
  input  logic             we_i,
  input  logic [AddrW-1:0] addr_i,
  input  logic [Width-1:0] wdata_i,
  output logic             gnt_o,
  output logic             rvalid_o,
  output logic [Width-1:0] rdata_o
);
  logic [Width-1:0] mem_q [Banks * WordsPerBank];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) mem_q[addr_i] <= wdata_i;
      rdata_o <= mem_q[addr_i];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) rvalid_o <= 1'b0;
    else         rvalid_o <= req_i;
  end

  assign gnt_o = 1'b1;
endmodule
