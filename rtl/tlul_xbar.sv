// tlul_xbar: the OpenTitan TL-UL interconnect as seen by the extensions, one
// host (the microcontroller's data port) to NumDev devices.
//
// A host-side tlul_fifo and one device-side tlul_fifo per device sit on every
// path, so a transaction crosses two request FIFOs and two response FIFOs.
// With Pass = 0 (the stock configuration) each FIFO costs a cycle and a load
// takes 6 cycles from request to response; with Pass = 1 (the optimised
// configuration of the secure element) idle FIFOs are transparent and a load
// to a single-cycle memory takes 2 cycles.
// Device i is selected when (address & AddrMask[i]) == AddrBase[i]; an
// address no rule matches goes to the last device (DefaultDev). Requests to a
// new device wait until all responses of the previous one have returned, so
// responses stay in order; at most MaxOut requests are outstanding.
//
// The pass-through FIFOs and the 2-cycle vs 6-cycle access cost follow the
// design; the in-order rule (stall on a device change) and the default
// route are this design's own choices.
module tlul_xbar
  import ot_pkg::*;
#(
  parameter int unsigned NumDev = 2,
  parameter logic [NumDev-1:0][31:0] AddrBase = '0,
  parameter logic [NumDev-1:0][31:0] AddrMask = '0,
  parameter bit          Pass   = 1'b1,
  parameter int unsigned MaxOut = 4
) (
  input  logic    clk_i,
  input  logic    rst_ni,
  input  tl_h2d_t tl_h_i,
  output tl_d2h_t tl_h_o,
  output tl_h2d_t tl_d_o [NumDev],
  input  tl_d2h_t tl_d_i [NumDev]
);
  localparam int unsigned SelW = (NumDev > 1) ? $clog2(NumDev) : 1;
  localparam int unsigned CntW = $clog2(MaxOut + 1);

  tl_h2d_t h2s;                 // host FIFO -> steering
  tl_d2h_t s2h;
  tl_h2d_t s2d [NumDev];        // steering -> device FIFOs
  tl_d2h_t d2s [NumDev];

  tlul_fifo #(.ReqPass(Pass), .RspPass(Pass)) u_host_fifo (
    .clk_i, .rst_ni,
    .tl_h_i (tl_h_i), .tl_h_o (tl_h_o),
    .tl_d_o (h2s),    .tl_d_i (s2h)
  );

  for (genvar i = 0; i < NumDev; i++) begin : g_dev
    tlul_fifo #(.ReqPass(Pass), .RspPass(Pass)) u_dev_fifo (
      .clk_i, .rst_ni,
      .tl_h_i (s2d[i]),    .tl_h_o (d2s[i]),
      .tl_d_o (tl_d_o[i]), .tl_d_i (tl_d_i[i])
    );
  end

  // ------------------------------------------------------------- decode
  logic [SelW-1:0] dev_sel;
  always_comb begin
    dev_sel = SelW'(NumDev - 1);
    for (int i = NumDev - 2; i >= 0; i--) begin
      if ((h2s.a.address & AddrMask[i]) == AddrBase[i]) dev_sel = SelW'(i);
    end
  end

  // ------------------------------------------------ outstanding tracking
  logic [CntW-1:0] out_q;
  logic [SelW-1:0] dev_q;
  logic stall, a_hs, d_hs;

  assign stall = (out_q != '0 && dev_sel != dev_q) || (out_q == CntW'(MaxOut));

  always_comb begin
    for (int i = 0; i < NumDev; i++) begin
      s2d[i]         = h2s;
      s2d[i].a_valid = h2s.a_valid && !stall && (dev_sel == SelW'(i));
      s2d[i].d_ready = h2s.d_ready && (dev_q == SelW'(i));
    end
    s2h         = d2s[dev_q];
    s2h.a_ready = d2s[dev_sel].a_ready && !stall;
  end

  assign a_hs = h2s.a_valid && s2h.a_ready;
  assign d_hs = s2h.d_valid && h2s.d_ready;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      out_q <= '0;
      dev_q <= '0;
    end else begin
      if (a_hs) dev_q <= dev_sel;
      case ({a_hs, d_hs})
        2'b10:   out_q <= out_q + 1'b1;
        2'b01:   out_q <= out_q - 1'b1;
        default: ;
      endcase
    end
  end

`ifndef SYNTHESIS
  // A response never arrives without an outstanding request.
  a_no_orphan_rsp: assert property (@(posedge clk_i) disable iff (!rst_ni)
    d_hs |-> (out_q != '0));
`endif
endmodule
