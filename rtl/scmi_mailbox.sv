// scmi_mailbox: shared-memory mailbox through which the host processor
// hands tasks to the secure element and gets results back, following the
// ARM SCMI shared-memory transport.
//
// It sits in the host SoC domain, on the host AXI4 interconnect, because
// OpenTitan exposes no slave port; OpenTitan reaches it through its own AXI
// master (TL-UL-to-AXI4 bridge). It therefore has two AXI4 slave ports,
// port 0 for the host and port 1 for OpenTitan; when both write in the same
// cycle port 0 goes first and port 1 waits one cycle.
// Register map (byte offsets; 0x00-0x1C and the sizes follow SCMI):
//   0x00 reserved                           reads 0
//   0x04 channel status  bit 0 channel free (reset 1), bit 1 channel error
//   0x08 reserved (8 bytes)                 reads 0
//   0x10 channel flags   bit 0 completion-interrupt enable
//   0x14 length          message length in bytes
//   0x18 message header
//   0x1C message payload, PayloadWords 32-bit words
//   DoorbellOffs     doorbell toward OpenTitan: bit 0 drives irq_ot_o
//   DoorbellOffs+4   completion toward the host: bit 0 drives irq_host_o
//                    when the channel flags enable it
// The writer of a doorbell sets bit 0; the receiver clears it by writing 0.
// Accesses take the axi_to_mem timing (data one cycle after the grant).
//
// The register layout and the two doorbell interrupts follow the design
// (an SCMI-compliant register file with two registers for interrupts); the
// doorbell offsets, the payload size and the port priority are this
// design's own choices.
module scmi_mailbox
  import ot_pkg::*;
#(
  parameter int unsigned PayloadWords = 32,
  parameter logic [11:0] DoorbellOffs = 12'h100
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t host_req_i,
  output axi_rsp_t host_rsp_o,
  input  axi_req_t ot_req_i,
  output axi_rsp_t ot_rsp_o,
  output logic     irq_ot_o,
  output logic     irq_host_o
);
  mem_req_t m_req [2];
  mem_rsp_t m_rsp [2];

  axi_to_mem u_host_port (
    .clk_i, .rst_ni, .axi_i (host_req_i), .axi_o (host_rsp_o),
    .mem_o (m_req[0]), .mem_i (m_rsp[0])
  );
  axi_to_mem u_ot_port (
    .clk_i, .rst_ni, .axi_i (ot_req_i), .axi_o (ot_rsp_o),
    .mem_o (m_req[1]), .mem_i (m_rsp[1])
  );

  // one access per cycle, port 0 first
  logic     sel;
  mem_req_t req;
  assign sel = !m_req[0].req;
  assign req = m_req[sel];

  logic        status_free_q, status_err_q, flag_irq_q, db_ot_q, db_host_q;
  logic [31:0] length_q, header_q;
  logic [31:0] payload_q [PayloadWords];
  logic [31:0] rdata_q;
  logic [1:0]  rvalid_q;
  logic [11:0] offs;
  logic [31:0] wmask;

  assign offs = req.addr[11:0];
  always_comb begin
    for (int b = 0; b < 4; b++) wmask[8*b +: 8] = {8{req.be[b]}};
  end

  function automatic logic [31:0] merge(input logic [31:0] old, input logic [31:0] nw,
                                        input logic [31:0] m);
    return (old & ~m) | (nw & m);
  endfunction

  logic in_payload;
  logic [31:0] pidx;
  assign pidx       = (32'(offs) - 32'h1C) >> 2;
  assign in_payload = (offs >= 12'h1C) && (pidx < PayloadWords) && (offs[1:0] == 2'b00);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      status_free_q <= 1'b1;
      status_err_q  <= 1'b0;
      flag_irq_q    <= 1'b0;
      db_ot_q       <= 1'b0;
      db_host_q     <= 1'b0;
      length_q      <= '0;
      header_q      <= '0;
      rdata_q       <= '0;
      rvalid_q      <= '0;
      for (int i = 0; i < PayloadWords; i++) payload_q[i] <= '0;
    end else begin
      rvalid_q <= {m_req[1].req && sel, m_req[0].req};
      if (req.req && req.we) begin
        case (offs)
          12'h004: begin
            if (req.be[0]) begin
              status_free_q <= req.wdata[0];
              status_err_q  <= req.wdata[1];
            end
          end
          12'h010: if (req.be[0]) flag_irq_q <= req.wdata[0];
          12'h014: length_q <= merge(length_q, req.wdata, wmask);
          12'h018: header_q <= merge(header_q, req.wdata, wmask);
          DoorbellOffs:         if (req.be[0]) db_ot_q   <= req.wdata[0];
          DoorbellOffs + 12'd4: if (req.be[0]) db_host_q <= req.wdata[0];
          default:
            if (in_payload) payload_q[pidx] <= merge(payload_q[pidx], req.wdata, wmask);
        endcase
      end
      if (req.req && !req.we) begin
        case (offs)
          12'h004: rdata_q <= {30'd0, status_err_q, status_free_q};
          12'h010: rdata_q <= {31'd0, flag_irq_q};
          12'h014: rdata_q <= length_q;
          12'h018: rdata_q <= header_q;
          DoorbellOffs:         rdata_q <= {31'd0, db_ot_q};
          DoorbellOffs + 12'd4: rdata_q <= {31'd0, db_host_q};
          default: rdata_q <= in_payload ? payload_q[pidx] : '0;
        endcase
      end
    end
  end

  always_comb begin
    m_rsp[0].gnt    = m_req[0].req;
    m_rsp[1].gnt    = m_req[1].req && sel;
    m_rsp[0].rvalid = rvalid_q[0];
    m_rsp[1].rvalid = rvalid_q[1];
    m_rsp[0].rdata  = rdata_q;
    m_rsp[1].rdata  = rdata_q;
  end

  assign irq_ot_o   = db_ot_q;
  assign irq_host_o = db_host_q && flag_irq_q;
endmodule
