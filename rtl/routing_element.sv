// routing_element: the routing element (RE) of one cluster.
//
// Packets (word writes to a global address) arrive on eight links from the
// neighbouring clusters. The DI arbiter takes one per cycle into the DI-FIFO.
// A packet at the head of the FIFO whose target is this cluster is delivered
// to the own PE (loc_*; the PE writes it to its MEM or, for the SFR page, to
// the thread controller or DMA engine); any other packet is handed to the
// write arbiter, which sends it one hop further together with the PE's own
// remote stores (core_*) and DMA writes (dma_*). All links use valid/ready.
//
// Structure and the "forward or deliver to MEM or TC" rule follow the paper
// (Fig. 5, Section IV-D, which leaves the mechanism open); the packet format
// and handshake are this design's choices.
module routing_element
  import hpra_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 8,
  parameter logic [3:0]  MY_COL     = 4'd1,
  parameter logic [3:0]  MY_ROW     = 4'd1
) (
  input  logic            clk,
  input  logic            rst_n,
  // links from the neighbours
  input  logic [NDIR-1:0] in_valid,
  input  pkt_t            in_pkt [NDIR],
  output logic [NDIR-1:0] in_ready,
  // links to the neighbours
  output logic [NDIR-1:0] out_valid,
  output pkt_t            out_pkt [NDIR],
  input  logic [NDIR-1:0] out_ready,
  // delivery to the own PE
  output logic            loc_valid,
  output pkt_t            loc_pkt,
  input  logic            loc_ready,
  // stores of the own PE's threads to other clusters
  input  logic            core_valid,
  input  pkt_t            core_pkt,
  output logic            core_ready,
  // DMA writes of the own PE to other clusters
  input  logic            dma_valid,
  input  pkt_t            dma_pkt,
  output logic            dma_ready
);
  logic arb_valid, arb_ready, head_valid, head_ready, head_local;
  pkt_t arb_pkt, head_pkt;
  logic [$clog2(FIFO_DEPTH):0] level;
  logic [2:0] src_valid, src_ready;
  pkt_t       src_pkt [3];

  di_arbiter #(.N(NDIR)) u_di_arb (
    .clk, .rst_n, .in_valid, .in_pkt, .in_ready,
    .out_valid(arb_valid), .out_pkt(arb_pkt), .out_ready(arb_ready));

  di_fifo #(.DEPTH(FIFO_DEPTH)) u_di_fifo (
    .clk, .rst_n, .in_valid(arb_valid), .in_pkt(arb_pkt), .in_ready(arb_ready),
    .out_valid(head_valid), .out_pkt(head_pkt), .out_ready(head_ready), .level);

  assign head_local = addr_col(head_pkt.addr) == MY_COL && addr_row(head_pkt.addr) == MY_ROW;
  assign loc_valid  = head_valid && head_local;
  assign loc_pkt    = head_pkt;
  assign head_ready = head_local ? loc_ready : src_ready[0];

  assign src_valid  = {dma_valid, core_valid, head_valid && !head_local};
  assign src_pkt[0] = head_pkt;
  assign src_pkt[1] = core_pkt;
  assign src_pkt[2] = dma_pkt;
  assign core_ready = src_ready[1];
  assign dma_ready  = src_ready[2];

  write_arbiter #(.NSRC(3), .MY_COL(MY_COL), .MY_ROW(MY_ROW)) u_wr_arb (
    .clk, .rst_n, .src_valid, .src_pkt, .src_ready, .out_valid, .out_pkt, .out_ready);
endmodule
