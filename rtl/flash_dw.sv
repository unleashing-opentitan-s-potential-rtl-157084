// flash_dw: direct-write datapath added to the flash controller, which lets
// the microcontroller write whole 76-bit words into the SRAM that emulates
// the flash, bypassing the controller's program FSM.
//
// Registers behind a TL-UL port, in the order of the datapath's register
// file (offsets are this design's own):
//   0x00 ENABLE    bit 0 selects the multiplexer input: 1 = direct-write
//                  datapath, 0 = regular flash controller datapath   RW
//   0x04 PAYLOAD1  payload bits [31:0]                                RW
//   0x08 PAYLOAD2  payload bits [63:32]                               RW
//   0x0C PAYLOAD3  payload bits [75:64] in bits [11:0]; the upper 20
//                  bits are ignored                                   RW
//   0x10 ADDRESS   word index in the emulated flash                   RW
//   0x14 TRIGGER   write bit 0 = 1: start the write; read: bit 0 busy
// A size adapter concatenates the three payload registers into one 76-bit
// word; the FSM then issues a single 76-bit write at ADDRESS and returns to
// idle once the memory grants it (two cycles after the trigger with an
// always-granting SRAM). While ENABLE is 0 the memory port belongs to the
// regular datapath (ot_* ports); while it is 1 that datapath sees no grant.
module flash_dw
  import ot_pkg::*;
#(
  parameter int unsigned AddrW = 14,
  parameter int unsigned Width = 76
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  tl_h2d_t          tl_i,
  output tl_d2h_t          tl_o,
  // regular flash controller datapath (memory side)
  input  logic             ot_req_i,
  input  logic             ot_we_i,
  input  logic [AddrW-1:0] ot_addr_i,
  input  logic [Width-1:0] ot_wdata_i,
  output logic             ot_gnt_o,
  output logic             ot_rvalid_o,
  output logic [Width-1:0] ot_rdata_o,
  // emulated flash memory
  output logic             mem_req_o,
  output logic             mem_we_o,
  output logic [AddrW-1:0] mem_addr_o,
  output logic [Width-1:0] mem_wdata_o,
  input  logic             mem_gnt_i,
  input  logic             mem_rvalid_i,
  input  logic [Width-1:0] mem_rdata_i
);
  mem_req_t reg_req;
  mem_rsp_t reg_rsp;

  tlul_to_mem u_adapter (
    .clk_i, .rst_ni, .tl_i, .tl_o,
    .mem_o (reg_req), .mem_i (reg_rsp)
  );

  typedef enum logic {Idle, Write} state_e;
  state_e state_q;

  logic        enable_q, rvalid_q;
  logic [31:0] pl1_q, pl2_q, pl3_q, addr_q, rdata_q;
  logic [2:0]  idx;
  logic        wr, trigger;
  logic [Width-1:0] payload;

  assign idx     = reg_req.addr[4:2];
  assign wr      = reg_req.req && reg_req.we;
  assign trigger = wr && (reg_req.addr[4:2] == 3'd5) && reg_req.wdata[0];

  // size adapter: three 32-bit registers -> one Width-bit word
  assign payload = Width'({pl3_q[Width-65:0], pl2_q, pl1_q});

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q  <= Idle;
      enable_q <= 1'b0;
      pl1_q <= '0; pl2_q <= '0; pl3_q <= '0; addr_q <= '0;
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
    end else begin
      rvalid_q <= reg_req.req;
      if (wr && state_q == Idle) begin
        case (idx)
          3'd0: enable_q <= reg_req.wdata[0];
          3'd1: pl1_q    <= reg_req.wdata;
          3'd2: pl2_q    <= reg_req.wdata;
          3'd3: pl3_q    <= reg_req.wdata;
          3'd4: addr_q   <= reg_req.wdata;
          default: ;
        endcase
      end
      if (reg_req.req && !reg_req.we) begin
        case (idx)
          3'd0: rdata_q <= {31'd0, enable_q};
          3'd1: rdata_q <= pl1_q;
          3'd2: rdata_q <= pl2_q;
          3'd3: rdata_q <= pl3_q;
          3'd4: rdata_q <= addr_q;
          3'd5: rdata_q <= {31'd0, state_q == Write};
          default: rdata_q <= '0;
        endcase
      end
      // FSM
      case (state_q)
        Idle:  if (trigger) state_q <= Write;
        Write: if (mem_gnt_i && enable_q) state_q <= Idle;
        default: state_q <= Idle;
      endcase
    end
  end

  assign reg_rsp.gnt    = 1'b1;
  assign reg_rsp.rvalid = rvalid_q;
  assign reg_rsp.rdata  = rdata_q;

  // multiplexer in front of the emulated flash
  always_comb begin
    if (enable_q) begin
      mem_req_o   = (state_q == Write);
      mem_we_o    = 1'b1;
      mem_addr_o  = addr_q[AddrW-1:0];
      mem_wdata_o = payload;
      ot_gnt_o    = 1'b0;
    end else begin
      mem_req_o   = ot_req_i;
      mem_we_o    = ot_we_i;
      mem_addr_o  = ot_addr_i;
      mem_wdata_o = ot_wdata_i;
      ot_gnt_o    = mem_gnt_i;
    end
  end

  logic ot_pending_q;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) ot_pending_q <= 1'b0;
    else         ot_pending_q <= !enable_q && ot_req_i && mem_gnt_i;
  end
  assign ot_rvalid_o = ot_pending_q && mem_rvalid_i;
  assign ot_rdata_o  = mem_rdata_i;
endmodule
