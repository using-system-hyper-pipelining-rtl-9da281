// cluster: one cluster (CL) of the HPRA, a routing element and a programming
// element (Fig. 5 of the paper).
//
// The eight in_*/out_* links connect to the eight neighbouring clusters, in
// the direction order of hpra_pkg (Fig. 5's list of neighbours). Packets for
// this cluster go from the routing element into the PE; the PE's remote
// stores and DMA writes leave through the routing element's write arbiter.
// MY_COL/MY_ROW are the cluster's position, which is also its global
// address field. Status outputs are passed up from the PE.
module cluster
  import hpra_pkg::*;
#(
  parameter int unsigned D             = 16,
  parameter int unsigned MEM_WORDS     = 4096,
  parameter int unsigned SECTIONS      = 8,
  parameter int unsigned SECTION_WORDS = 64,
  parameter int unsigned DIV_PASSES    = 4,
  parameter int unsigned FIFO_DEPTH    = 8,
  parameter logic [3:0]  MY_COL        = 4'd1,
  parameter logic [3:0]  MY_ROW        = 4'd1,
  localparam int unsigned TW = $clog2(D)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [NDIR-1:0] in_valid,
  input  pkt_t            in_pkt [NDIR],
  output logic [NDIR-1:0] in_ready,
  output logic [NDIR-1:0] out_valid,
  output pkt_t            out_pkt [NDIR],
  input  logic [NDIR-1:0] out_ready,
  output logic [D-1:0]    active,
  output logic [D-1:0]    stall,
  output logic            retire_valid,
  output logic [TW-1:0]   retire_tid,
  output logic            replay_valid,
  output logic            stack_full,
  output logic            dma_busy,
  output logic [31:0]     thread_overflows
);
  logic loc_valid, loc_ready, core_valid, core_ready, dma_valid, dma_ready;
  pkt_t loc_pkt, core_pkt, dma_pkt;

  routing_element #(.FIFO_DEPTH(FIFO_DEPTH), .MY_COL(MY_COL), .MY_ROW(MY_ROW)) u_re (
    .clk, .rst_n, .in_valid, .in_pkt, .in_ready, .out_valid, .out_pkt, .out_ready,
    .loc_valid, .loc_pkt, .loc_ready, .core_valid, .core_pkt, .core_ready,
    .dma_valid, .dma_pkt, .dma_ready);

  pe #(.D(D), .MEM_WORDS(MEM_WORDS), .SECTIONS(SECTIONS), .SECTION_WORDS(SECTION_WORDS),
       .DIV_PASSES(DIV_PASSES), .MY_COL(MY_COL), .MY_ROW(MY_ROW)) u_pe (
    .clk, .rst_n, .loc_valid, .loc_pkt, .loc_ready,
    .core_g_valid(core_valid), .core_g_pkt(core_pkt), .core_g_ready(core_ready),
    .dma_g_valid(dma_valid), .dma_g_pkt(dma_pkt), .dma_g_ready(dma_ready),
    .active, .stall, .retire_valid, .retire_tid, .replay_valid, .stack_full, .dma_busy,
    .thread_overflows);
endmodule
