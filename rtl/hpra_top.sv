// hpra_top: the hyper pipelined reconfigurable architecture (HPRA).
//
// COLS x ROWS positions on a grid, every position linked to its (up to)
// eight neighbours, diagonals included. All positions but one hold a
// cluster (routing element + SHP-ed RISC-V PE). The position (SUP_COL,
// SUP_ROW) holds the system support logic in the evaluated system (SDRAM
// controller and system bridge); that logic is not part of this RTL, and the
// links of its position are the sys_* ports of this module, in the direction
// order of hpra_pkg as seen from the support position. Through them the
// outside loads programs and data (write packets to any cluster's MEM),
// starts threads (writes to a TC's Activate SFR) and receives the packets
// that clusters address to the support position.
//
// The 4x4 size with one position given to the support logic (15 clusters),
// C = 4 and D = 16 are the paper's numbers. The position of the support
// logic is not given; (0,0) is this design's choice. Links off the grid's
// edge are tied off. Status outputs are per cluster, indexed
// [col][row]; the support position reads 0.
module hpra_top
  import hpra_pkg::*;
#(
  parameter int unsigned COLS          = 4,
  parameter int unsigned ROWS          = 4,
  parameter int unsigned SUP_COL       = 0,
  parameter int unsigned SUP_ROW       = 0,
  parameter int unsigned D             = 16,
  parameter int unsigned MEM_WORDS     = 4096,
  parameter int unsigned SECTIONS      = 8,
  parameter int unsigned SECTION_WORDS = 64,
  parameter int unsigned DIV_PASSES    = 4,
  parameter int unsigned FIFO_DEPTH    = 8,
  localparam int unsigned TW = $clog2(D)
) (
  input  logic            clk,
  input  logic            rst_n,
  // links of the support position: sys_in_* go from the support logic to
  // the neighbour in direction k, sys_out_* come from that neighbour
  input  logic [NDIR-1:0] sys_in_valid,
  input  pkt_t            sys_in_pkt [NDIR],
  output logic [NDIR-1:0] sys_in_ready,
  output logic [NDIR-1:0] sys_out_valid,
  output pkt_t            sys_out_pkt [NDIR],
  input  logic [NDIR-1:0] sys_out_ready,
  // status per position
  output logic [D-1:0]    active [COLS][ROWS],
  output logic [D-1:0]    stall [COLS][ROWS],
  output logic            retire_valid [COLS][ROWS],
  output logic            replay_valid [COLS][ROWS],
  output logic            stack_full [COLS][ROWS],
  output logic            dma_busy [COLS][ROWS],
  output logic [31:0]     thread_overflows [COLS][ROWS]
);
  // o_*[c][r][k]: what position (c,r) sends in direction k
  logic [NDIR-1:0] o_valid [COLS][ROWS];
  pkt_t            o_pkt   [COLS][ROWS][NDIR];
  logic [NDIR-1:0] o_ready [COLS][ROWS];   // ready of the receiver
  // i_*[c][r][k]: what position (c,r) receives from direction k
  logic [NDIR-1:0] i_valid [COLS][ROWS];
  pkt_t            i_pkt   [COLS][ROWS][NDIR];
  logic [NDIR-1:0] i_ready [COLS][ROWS];

  for (genvar c = 0; c < COLS; c++) begin : g_col
    for (genvar r = 0; r < ROWS; r++) begin : g_row
      // neighbour wiring: input k of (c,r) is output 7-k of (c+dc_k, r+dr_k)
      for (genvar k = 0; k < NDIR; k++) begin : g_dir
        localparam int NC = c + dir_dc(k);
        localparam int NR = r + dir_dr(k);
        if (NC >= 0 && NC < COLS && NR >= 0 && NR < ROWS) begin : g_link
          assign i_valid[c][r][k] = o_valid[NC][NR][7-k];
          assign i_pkt[c][r][k]   = o_pkt[NC][NR][7-k];
          assign o_ready[NC][NR][7-k] = i_ready[c][r][k];
        end else begin : g_edge
          assign i_valid[c][r][k] = 1'b0;
          assign i_pkt[c][r][k]   = '0;
          assign o_ready[c][r][k] = 1'b0;
        end
      end

      if (c == SUP_COL && r == SUP_ROW) begin : g_sup
        assign o_valid[c][r]  = sys_in_valid;
        assign sys_in_ready   = o_ready[c][r];
        assign sys_out_valid  = i_valid[c][r];
        assign i_ready[c][r]  = sys_out_ready;
        for (genvar k = 0; k < NDIR; k++) begin : g_p
          assign o_pkt[c][r][k]  = sys_in_pkt[k];
          assign sys_out_pkt[k]  = i_pkt[c][r][k];
        end
        assign active[c][r] = '0;
        assign stall[c][r] = '0;
        assign retire_valid[c][r] = 1'b0;
        assign replay_valid[c][r] = 1'b0;
        assign stack_full[c][r] = 1'b0;
        assign dma_busy[c][r] = 1'b0;
        assign thread_overflows[c][r] = '0;
      end else begin : g_cl
        logic [TW-1:0] retire_tid;
        cluster #(.D(D), .MEM_WORDS(MEM_WORDS), .SECTIONS(SECTIONS),
                  .SECTION_WORDS(SECTION_WORDS), .DIV_PASSES(DIV_PASSES),
                  .FIFO_DEPTH(FIFO_DEPTH), .MY_COL(4'(c)), .MY_ROW(4'(r))) u_cl (
          .clk, .rst_n,
          .in_valid(i_valid[c][r]), .in_pkt(i_pkt[c][r]), .in_ready(i_ready[c][r]),
          .out_valid(o_valid[c][r]), .out_pkt(o_pkt[c][r]), .out_ready(o_ready[c][r]),
          .active(active[c][r]), .stall(stall[c][r]), .retire_valid(retire_valid[c][r]),
          .retire_tid, .replay_valid(replay_valid[c][r]), .stack_full(stack_full[c][r]),
          .dma_busy(dma_busy[c][r]), .thread_overflows(thread_overflows[c][r]));
      end
    end
  end
endmodule
