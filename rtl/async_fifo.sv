// async_fifo: dual-clock FIFO for clock domain crossing.
//
// Classic gray-code pointer design: each side keeps a binary and a gray
// pointer one bit wider than the address; the gray pointer of the other side
// is brought over through a two-flop synchroniser and compared to decide
// full (write side) and empty (read side). The storage is written in the
// source clock and read combinationally in the destination clock; only
// entries the reader knows to be stable are read. Depth must be a power of
// two. A word written in the source domain becomes visible to the reader
// about three destination-clock cycles later.
//
// Follows the design in that every AXI channel crosses the clock boundary
// through a CDC stage; the gray-pointer FIFO and its depth are this
// design's own choice.
module async_fifo #(
  parameter type         T     = logic [31:0],
  parameter int unsigned Depth = 4
) (
  input  logic src_clk_i,
  input  logic src_rst_ni,
  input  logic src_valid_i,
  output logic src_ready_o,
  input  T     src_data_i,
  input  logic dst_clk_i,
  input  logic dst_rst_ni,
  output logic dst_valid_o,
  input  logic dst_ready_i,
  output T     dst_data_o
);
  localparam int unsigned AW = $clog2(Depth);

  T mem_q [Depth];
  logic [AW:0] wbin_q, wgray_q, rbin_q, rgray_q;
  logic [AW:0] rgray_s1_q, rgray_s2_q;   // read pointer in the write domain
  logic [AW:0] wgray_s1_q, wgray_s2_q;   // write pointer in the read domain

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // ---------------------------------------------------------- write side
  logic [AW:0] wbin_n;
  logic        full, push;
  assign full        = (wgray_q == {~rgray_s2_q[AW:AW-1], rgray_s2_q[AW-2:0]});
  assign src_ready_o = !full;
  assign push        = src_valid_i && !full;
  assign wbin_n      = wbin_q + 1'b1;

  always_ff @(posedge src_clk_i or negedge src_rst_ni) begin
    if (!src_rst_ni) begin
      wbin_q <= '0; wgray_q <= '0; rgray_s1_q <= '0; rgray_s2_q <= '0;
    end else begin
      rgray_s1_q <= rgray_q;
      rgray_s2_q <= rgray_s1_q;
      if (push) begin
        wbin_q  <= wbin_n;
        wgray_q <= bin2gray(wbin_n);
      end
    end
  end

  always_ff @(posedge src_clk_i) begin
    if (push) mem_q[wbin_q[AW-1:0]] <= src_data_i;
  end

  // ----------------------------------------------------------- read side
  logic [AW:0] rbin_n;
  logic        empty, pop;
  assign empty       = (rgray_q == wgray_s2_q);
  assign dst_valid_o = !empty;
  assign dst_data_o  = mem_q[rbin_q[AW-1:0]];
  assign pop         = dst_ready_i && !empty;
  assign rbin_n      = rbin_q + 1'b1;

  always_ff @(posedge dst_clk_i or negedge dst_rst_ni) begin
    if (!dst_rst_ni) begin
      rbin_q <= '0; rgray_q <= '0; wgray_s1_q <= '0; wgray_s2_q <= '0;
    end else begin
      wgray_s1_q <= wgray_q;
      wgray_s2_q <= wgray_s1_q;
      if (pop) begin
        rbin_q  <= rbin_n;
        rgray_q <= bin2gray(rbin_n);
      end
    end
  end
endmodule
