// pe: the programming element (PE) of a cluster.
//
// It joins the SHP-ed RV32IM core with its thread controller (TC), the
// shared PE-RAM (MEM), the shared stack memory (PE-STACK) and its TLB, and
// the DMA engine (DMAE), as in the cluster figure of the paper. MEM port A
// serves the core's instruction fetch. MEM port B is shared: a thread's load
// or store in the core's execute stage always gets it; otherwise a write
// arriving from the routing element, and after that the DMA engine, may use
// it. The SFR page (byte offsets 0xF000..0xF0FF) holds the TC registers
// (word offsets 0x00..0x0F) and the DMAE registers (0x10..0x1F); threads
// reach them with loads and stores, and other clusters with write packets.
//
// loc_*  packets for this PE from the routing element (MEM or SFR writes)
// core_g_*, dma_g_*  writes of this PE to other clusters
// The remaining outputs are status for observation.
//
// The set of parts comes from the paper; the port sharing and priorities
// are this design's choices.
module pe
  import hpra_pkg::*;
#(
  parameter int unsigned D             = 16,
  parameter int unsigned MEM_WORDS     = 4096,
  parameter int unsigned SECTIONS      = 8,
  parameter int unsigned SECTION_WORDS = 64,
  parameter int unsigned DIV_PASSES    = 4,
  parameter logic [3:0]  MY_COL        = 4'd1,
  parameter logic [3:0]  MY_ROW        = 4'd1,
  localparam int unsigned TW = $clog2(D),
  localparam int unsigned AW = $clog2(MEM_WORDS),
  localparam int unsigned SW = $clog2(SECTIONS),
  localparam int unsigned OW = $clog2(SECTION_WORDS),
  localparam int unsigned VPNW = 14 - OW
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          loc_valid,
  input  pkt_t          loc_pkt,
  output logic          loc_ready,
  output logic          core_g_valid,
  output pkt_t          core_g_pkt,
  input  logic          core_g_ready,
  output logic          dma_g_valid,
  output pkt_t          dma_g_pkt,
  input  logic          dma_g_ready,
  // status
  output logic [D-1:0]  active,
  output logic [D-1:0]  stall,
  output logic          retire_valid,
  output logic [TW-1:0] retire_tid,
  output logic          replay_valid,
  output logic          stack_full,
  output logic          dma_busy,
  output logic [31:0]   thread_overflows
);
  // TC <-> core
  logic          issue_valid, start_valid, exit_valid;
  logic [TW-1:0] issue_tid, start_sid, exit_tid;
  logic [31:0]   start_pc;
  // core memory side
  logic          ia_en, d_en, d_we, s_valid, s_we, t_valid, t_grant, k_en, k_we;
  logic [AW-1:0] ia_addr, d_addr;
  logic [31:0]   ia_rdata, d_wdata, s_wdata, s_rdata, k_wdata, k_rdata;
  logic [3:0]    d_be, k_be;
  logic [TW-1:0] s_tid, t_tid;
  logic [5:0]    s_off;
  logic [VPNW-1:0] t_vpn;
  logic [SW-1:0] t_sec;
  logic [SW+OW-1:0] k_addr;
  // SFR split
  logic          tc_c_valid, dm_c_valid, tc_x_ready, dm_x_ready, rd_dma_q;
  logic [31:0]   tc_rdata, dm_rdata;
  // routing element delivery
  addr_class_e   loc_cls;
  logic          loc_mem, loc_sfr, loc_sfr_dma;
  // DMA memory side
  logic          dm_req, dm_we, dm_gnt;
  logic [AW-1:0] dm_addr;
  logic [31:0]   dm_wdata;
  // MEM port B
  logic          b_en, b_we;
  logic [3:0]    b_be;
  logic [AW-1:0] b_addr;
  logic [31:0]   b_wdata, b_rdata;

  thread_ctrl #(.D(D)) u_tc (
    .clk, .rst_n, .issue_valid, .issue_tid, .start_valid, .start_sid, .start_pc,
    .c_valid(tc_c_valid), .c_we(s_we), .c_tid(s_tid), .c_off(s_off), .c_wdata(s_wdata),
    .c_rdata(tc_rdata),
    .x_valid(loc_valid && loc_sfr && !loc_sfr_dma), .x_off(loc_pkt.addr[7:2]),
    .x_wdata(loc_pkt.data), .x_ready(tc_x_ready),
    .exit_valid, .exit_tid, .active, .stall, .overflow_cnt(thread_overflows));

  rv_shp_core #(.D(D), .MEM_WORDS(MEM_WORDS), .SECTIONS(SECTIONS),
                .SECTION_WORDS(SECTION_WORDS), .DIV_PASSES(DIV_PASSES),
                .MY_COL(MY_COL), .MY_ROW(MY_ROW)) u_core (
    .clk, .rst_n, .issue_valid, .issue_tid, .start_valid, .start_sid, .start_pc,
    .ia_en, .ia_addr, .ia_rdata,
    .d_en, .d_we, .d_be, .d_addr, .d_wdata, .d_rdata(b_rdata),
    .s_valid, .s_we, .s_tid, .s_off, .s_wdata, .s_rdata,
    .t_valid, .t_tid, .t_vpn, .t_grant, .t_sec,
    .k_en, .k_we, .k_be, .k_addr, .k_wdata, .k_rdata,
    .g_valid(core_g_valid), .g_pkt(core_g_pkt), .g_ready(core_g_ready),
    .retire_valid, .retire_tid, .replay_valid);

  stack_tlb #(.D(D), .SECTIONS(SECTIONS), .VPNW(VPNW)) u_tlb (
    .clk, .rst_n, .lk_valid(t_valid), .lk_tid(t_tid), .lk_vpn(t_vpn),
    .lk_grant(t_grant), .lk_sec(t_sec), .lk_full(stack_full),
    .rel_valid(exit_valid), .rel_tid(exit_tid), .used());

  pe_stack #(.SECTIONS(SECTIONS), .SECTION_WORDS(SECTION_WORDS)) u_stack (
    .clk, .en(k_en), .we(k_we), .be(k_be), .addr(k_addr), .wdata(k_wdata), .rdata(k_rdata));

  dmae #(.MEM_WORDS(MEM_WORDS), .MY_COL(MY_COL), .MY_ROW(MY_ROW)) u_dmae (
    .clk, .rst_n,
    .s_valid(dm_c_valid), .s_we, .s_off, .s_wdata, .s_rdata(dm_rdata),
    .x_valid(loc_valid && loc_sfr && loc_sfr_dma), .x_off(loc_pkt.addr[7:2]),
    .x_wdata(loc_pkt.data), .x_ready(dm_x_ready),
    .m_req(dm_req), .m_we(dm_we), .m_addr(dm_addr), .m_wdata(dm_wdata), .m_gnt(dm_gnt),
    .m_rdata(b_rdata), .g_valid(dma_g_valid), .g_pkt(dma_g_pkt), .g_ready(dma_g_ready),
    .busy(dma_busy));

  pe_mem #(.MEM_WORDS(MEM_WORDS)) u_mem (
    .clk, .a_en(ia_en), .a_addr(ia_addr), .a_rdata(ia_rdata),
    .b_en, .b_we, .b_be, .b_addr, .b_wdata, .b_rdata);

  // SFR page split: word offsets 0x00..0x0F TC, 0x10..0x1F DMAE
  assign tc_c_valid = s_valid && !s_off[4];
  assign dm_c_valid = s_valid &&  s_off[4];
  always_ff @(posedge clk) rd_dma_q <= s_off[4];
  assign s_rdata = rd_dma_q ? dm_rdata : tc_rdata;

  // delivery from the routing element
  assign loc_cls     = addr_class({16'h0, loc_pkt.addr[15:0]});
  assign loc_sfr     = (loc_cls == AC_SFR);
  assign loc_mem     = !loc_sfr;
  assign loc_sfr_dma = loc_pkt.addr[6];
  assign loc_ready   = loc_sfr ? (loc_sfr_dma ? dm_x_ready : tc_x_ready) : !d_en;

  // MEM port B: core, then routing element writes, then DMA
  always_comb begin
    dm_gnt = 1'b0;
    if (d_en) begin
      b_en = 1'b1; b_we = d_we; b_be = d_be; b_addr = d_addr; b_wdata = d_wdata;
    end else if (loc_valid && loc_mem) begin
      b_en = 1'b1; b_we = 1'b1; b_be = loc_pkt.be; b_addr = loc_pkt.addr[AW+1:2];
      b_wdata = loc_pkt.data;
    end else begin
      b_en = dm_req; b_we = dm_we; b_be = 4'hF; b_addr = dm_addr; b_wdata = dm_wdata;
      dm_gnt = dm_req;
    end
  end
endmodule
