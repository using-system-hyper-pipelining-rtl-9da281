// hpra_pkg: types and constants shared by the hyper pipelined reconfigurable
// architecture (HPRA).
//
// The HPRA is a two dimensional array of clusters. Each cluster holds one
// routing element (RE) and one programming element (PE); the PE is a RISC-V
// RV32IM core that has been C-slow retimed and system hyper pipelined (SHP)
// so that one physical core runs up to D independent threads. C = 4 and
// D = 16 are the numbers given for the evaluated design.
//
// Everything else in this package (packet format, address map, SFR offsets)
// is a choice of this implementation: the paper states that threads on
// different PEs write to each other "using the complete HPRA's memory range",
// and names the SFRs, but gives no addresses or encodings.
//
// Address map seen by a thread (byte addresses):
//   0x0000_0000 .. 0x0000_EFFF  local PE-RAM (MEM), size set by MEM_WORDS
//   0x0000_F000 .. 0x0000_F0FF  special function registers (TC and DMAE)
//   0x1CR0_xxxx                 global: cluster column C, row R, local offset xxxx
//   0xFFFF_0000 .. 0xFFFF_FFFF  thread-private stack (grows down from 0),
//                               mapped by the TLB onto the shared PE-STACK
package hpra_pkg;

  // Number of micro-pipeline stages (C-slow factor) of the SHP-ed core.
  // The core's pipeline is written for exactly this depth.
  localparam int unsigned C_SLOW = 4;

  // Link directions of a cluster, in the order Fig. 5 lists its neighbours:
  // 0:(c-1,r-1) 1:(c-1,r) 2:(c-1,r+1) 3:(c,r-1) 4:(c,r+1) 5:(c+1,r-1)
  // 6:(c+1,r) 7:(c+1,r+1). The opposite of direction k is 7-k.
  localparam int unsigned NDIR = 8;

  // A packet on the routing structure: one (masked) word write to a global
  // address.
  typedef struct packed {
    logic [31:0] addr;   // global address, see the address map above
    logic [31:0] data;   // write data, byte lanes as in memory
    logic [3:0]  be;     // byte enables
  } pkt_t;

  localparam logic [3:0] GLOBAL_TAG = 4'h1;

  // SFR word offsets inside the SFR page (address bits [7:2]).
  typedef enum logic [5:0] {
    SFR_ACTIVATE  = 6'h00, // W: start a thread at the written address; R: overflow count
    SFR_ACT_COUNT = 6'h01, // W: start a forked thread (Activate and Count); R: own AC
    SFR_EXIT      = 6'h02, // W: the writing thread terminates
    SFR_STALL     = 6'h03, // R/W: stall mask, bit i = slot i
    SFR_STALL_SET = 6'h04, // W: stall |= data
    SFR_STALL_CLR = 6'h05, // W: stall &= ~data
    SFR_SID       = 6'h06, // R: own slot ID
    SFR_ACTIVE    = 6'h07, // R: active slot mask
    SFR_DMASA     = 6'h10, // R/W: DMA source byte address (local MEM)
    SFR_DMAL      = 6'h11, // R/W: DMA length in words
    SFR_DMATA     = 6'h12, // W: DMA target byte address, starts the transfer
    SFR_DMABUSY   = 6'h13  // R: DMA active
  } sfr_e;

  // Address classes.
  typedef enum logic [1:0] {
    AC_LOCAL  = 2'd0, // local MEM
    AC_SFR    = 2'd1, // SFR page
    AC_STACK  = 2'd2, // thread-private stack
    AC_GLOBAL = 2'd3  // another cluster
  } addr_class_e;

  function automatic addr_class_e addr_class(input logic [31:0] a);
    if (a[31:16] == 16'hFFFF)        return AC_STACK;
    if (a[31:28] == GLOBAL_TAG)      return AC_GLOBAL;
    if (a[15:12] == 4'hF)            return AC_SFR;
    return AC_LOCAL;
  endfunction

  function automatic logic [31:0] global_addr(input logic [3:0] col, input logic [3:0] row,
                                              input logic [15:0] offs);
    return {GLOBAL_TAG, col, row, 4'h0, offs};
  endfunction

  function automatic logic [3:0] addr_col(input logic [31:0] a); return a[27:24]; endfunction
  function automatic logic [3:0] addr_row(input logic [31:0] a); return a[23:20]; endfunction

  // Direction index for a step (dc, dr), each in {-1, 0, +1}.
  function automatic logic [2:0] dir_index(input int dc, input int dr);
    if (dc < 0) return (dr < 0) ? 3'd0 : (dr == 0) ? 3'd1 : 3'd2;
    if (dc == 0) return (dr < 0) ? 3'd3 : 3'd4;
    return (dr < 0) ? 3'd5 : (dr == 0) ? 3'd6 : 3'd7;
  endfunction

  function automatic int dir_dc(input int k);
    return (k <= 2) ? -1 : (k <= 4) ? 0 : 1;
  endfunction
  function automatic int dir_dr(input int k);
    case (k)
      0, 3, 5: return -1;
      1, 6:    return 0;
      default: return 1;
    endcase
  endfunction

endpackage
