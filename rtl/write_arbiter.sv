// write_arbiter: the write arbiter of a routing element.
//
// Three sources want to send packets to neighbouring clusters: packets from
// the DI-FIFO that are only passing through (source 0), stores of the PE's
// threads to another cluster (source 1) and writes of the DMA engine
// (source 2). For each source the output direction is the single step
// (column and row each moved by -1, 0 or +1) toward the packet's target
// cluster, so a packet takes max(|dc|,|dr|) hops on the eight-neighbour
// array. Each cycle one source whose output link is ready is granted, in
// round-robin order, and its packet is put on that link.
//
// Every output link has a one-packet output register: a source is granted
// when the register of its direction is empty or being emptied in the same
// cycle, and out_valid comes straight from the register. A packet thus
// leaves one cycle after its grant, and no combinational path runs from one
// cluster's link handshake to the next (the paper assumes the routing
// structure can be pipelined).
//
// The paper names the block and shows its eight outputs (Fig. 5); the
// routing rule, the three sources and round-robin order are this design's
// choices. A packet for the own cluster must not arrive here.
module write_arbiter
  import hpra_pkg::*;
#(
  parameter int unsigned NSRC   = 3,
  parameter logic [3:0]  MY_COL = 4'd1,
  parameter logic [3:0]  MY_ROW = 4'd1,
  localparam int unsigned SIW = $clog2(NSRC)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [NSRC-1:0] src_valid,
  input  pkt_t            src_pkt [NSRC],
  output logic [NSRC-1:0] src_ready,
  output logic [NDIR-1:0] out_valid,
  output pkt_t            out_pkt [NDIR],
  input  logic [NDIR-1:0] out_ready
);
  logic [2:0]     dir [NSRC];
  logic [SIW-1:0] last, sel;
  logic           any;

  always_comb begin
    for (int s = 0; s < NSRC; s++) begin
      int dc, dr;
      dc = int'(addr_col(src_pkt[s].addr)) - int'(MY_COL);
      dr = int'(addr_row(src_pkt[s].addr)) - int'(MY_ROW);
      dc = (dc > 0) ? 1 : (dc < 0) ? -1 : 0;
      dr = (dr > 0) ? 1 : (dr < 0) ? -1 : 0;
      dir[s] = dir_index(dc, dr);
    end
  end

  logic [NDIR-1:0] free;
  assign free = ~out_valid | out_ready;

  always_comb begin
    logic [SIW-1:0] cand;
    any = 1'b0;
    sel = '0;
    for (int k = NSRC; k >= 1; k--) begin
      cand = SIW'((32'(last) + k) % NSRC);
      if (src_valid[cand] && free[dir[cand]]) begin
        any = 1'b1;
        sel = cand;
      end
    end
    src_ready = '0;
    if (any) src_ready[sel] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last      <= SIW'(NSRC - 1);
      out_valid <= '0;
    end else begin
      for (int d = 0; d < NDIR; d++)
        if (out_ready[d]) out_valid[d] <= 1'b0;
      if (any) begin
        last <= sel;
        out_valid[dir[sel]] <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (any) out_pkt[dir[sel]] <= src_pkt[sel];
  end

  for (genvar s = 0; s < NSRC; s++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
      src_valid[s] |-> !(addr_col(src_pkt[s].addr) == MY_COL && addr_row(src_pkt[s].addr) == MY_ROW));
  end
endmodule
