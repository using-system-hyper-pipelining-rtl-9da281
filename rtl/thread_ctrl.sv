// thread_ctrl: the thread controller (TC) of a system hyper pipelined PE.
//
// The core's design state lives in memories indexed by a slot ID (SID,
// 0..D-1). The TC decides, every micro-cycle, which slot enters the core's
// C-stage pipeline (the read pointer of Fig. 2): the next slot, in round-robin
// order after the last one issued, that is active, not stalled and not
// already in the pipeline. A slot issued in cycle t is in flight during the
// next C-1 cycles and can be issued again from cycle t+C on. With C or fewer
// runnable threads each one therefore runs at full macro-cycle speed; with
// more, the C issue slots per macro-cycle are shared among them, and stalled
// threads are bypassed.
//
// Software controls the TC through special function registers (SFRs):
//   Activate   W: start a thread at the written address in a free slot. If
//                 no slot is free this is a thread-overflow: the request is
//                 dropped and counted (read back from the same SFR).
//   AC         W: Activate and Count: as Activate, and the new thread records
//                 the caller's SID in its forked-thread register FT while the
//                 caller's AC counter is incremented. R: the caller's AC.
//   Exit       W: the writing thread frees its slot. If it was forked, the AC
//                 of its parent is decremented; when it reaches 0 the parent's
//                 stall bit is cleared so that the parent continues (join).
//   Stall      R/W: stall mask, one bit per SID. Stall-set / Stall-clear write
//                 ports OR / AND-NOT the written mask.
//   SID        R: the reading thread's own slot ID.   Active  R: active mask.
// The core port (c_*) carries the requesting thread's SID; read data appears
// in the cycle after the request. Writes from the routing element (x_*) have
// no SID and may only Activate (AC acts as Activate) or change the stall
// mask; they wait (x_ready low) while the core uses the SFRs.
//
// Register names and their function follow the paper; the address offsets,
// the separate set/clear ports, the lowest-free slot choice and the overflow
// counter are this design's choices.
module thread_ctrl
  import hpra_pkg::*;
#(
  parameter int unsigned D = 16,
  localparam int unsigned TW = $clog2(D)
) (
  input  logic          clk,
  input  logic          rst_n,
  // issue to the core's stage 0
  output logic          issue_valid,
  output logic [TW-1:0] issue_tid,
  // thread start: the core sets the slot's PC and clears its stack pointer
  output logic          start_valid,
  output logic [TW-1:0] start_sid,
  output logic [31:0]   start_pc,
  // SFR access by a thread (from the core's execute stage)
  input  logic          c_valid,
  input  logic          c_we,
  input  logic [TW-1:0] c_tid,
  input  logic [5:0]    c_off,
  input  logic [31:0]   c_wdata,
  output logic [31:0]   c_rdata,
  // SFR write from the routing element
  input  logic          x_valid,
  input  logic [5:0]    x_off,
  input  logic [31:0]   x_wdata,
  output logic          x_ready,
  // thread exit (releases the thread's stack sections)
  output logic          exit_valid,
  output logic [TW-1:0] exit_tid,
  // status
  output logic [D-1:0]  active,
  output logic [D-1:0]  stall,
  output logic [31:0]   overflow_cnt
);
  logic [D-1:0]  ft_valid;
  logic [TW-1:0] ft_sid [D];
  logic [TW:0]   ac [D];
  logic [TW-1:0] last_tid;

  // slots issued in the last C-1 cycles
  logic [C_SLOW-2:0] infl_v;
  logic [TW-1:0]     infl_t [C_SLOW-1];
  logic [D-1:0]      inflight;

  always_comb begin
    inflight = '0;
    for (int k = 0; k < C_SLOW - 1; k++)
      if (infl_v[k]) inflight[infl_t[k]] = 1'b1;
  end

  // round-robin selection
  always_comb begin
    logic [TW-1:0] cand;
    issue_valid = 1'b0;
    issue_tid   = '0;
    for (int k = D; k >= 1; k--) begin
      cand = last_tid + TW'(k);
      if (active[cand] && !stall[cand] && !inflight[cand]) begin
        issue_valid = 1'b1;
        issue_tid   = cand;
      end
    end
  end

  // request decode
  logic          wr_c, wr_x;
  logic [5:0]    w_off;
  logic [31:0]   w_data;
  assign x_ready = !c_valid;
  assign wr_c    = c_valid && c_we;
  assign wr_x    = x_valid && x_ready;
  assign w_off   = wr_c ? c_off : x_off;
  assign w_data  = wr_c ? c_wdata : x_wdata;

  logic          act_req, fork_req;
  logic          free_found;
  logic [TW-1:0] free_sid;
  always_comb begin
    act_req  = (wr_c || wr_x) && (w_off == SFR_ACTIVATE || w_off == SFR_ACT_COUNT);
    fork_req = wr_c && c_off == SFR_ACT_COUNT;
    free_found = 1'b0;
    free_sid   = '0;
    for (int i = D - 1; i >= 0; i--)
      if (!active[i] && !inflight[i]) begin
        free_found = 1'b1;
        free_sid   = TW'(i);
      end
  end

  assign start_valid = act_req && free_found;
  assign start_sid   = free_sid;
  assign start_pc    = w_data;
  assign exit_valid  = wr_c && c_off == SFR_EXIT && active[c_tid];
  assign exit_tid    = c_tid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active       <= '0;
      stall        <= '0;
      ft_valid     <= '0;
      last_tid     <= '0;
      infl_v       <= '0;
      overflow_cnt <= '0;
      c_rdata      <= '0;
      for (int i = 0; i < D; i++) begin
        ac[i]     <= '0;
        ft_sid[i] <= '0;
      end
      for (int k = 0; k < C_SLOW - 1; k++) infl_t[k] <= '0;
    end else begin
      // pipeline occupancy
      infl_v[0] <= issue_valid;
      infl_t[0] <= issue_tid;
      for (int k = 1; k < C_SLOW - 1; k++) begin
        infl_v[k] <= infl_v[k-1];
        infl_t[k] <= infl_t[k-1];
      end
      if (issue_valid) last_tid <= issue_tid;

      // activation
      if (act_req) begin
        if (free_found) begin
          active[free_sid]   <= 1'b1;
          stall[free_sid]    <= 1'b0;
          ac[free_sid]       <= '0;
          ft_valid[free_sid] <= fork_req;
          ft_sid[free_sid]   <= c_tid;
          if (fork_req) ac[c_tid] <= ac[c_tid] + 1'b1;
        end else begin
          overflow_cnt <= overflow_cnt + 1;
        end
      end

      // exit and join
      if (exit_valid) begin
        active[c_tid]   <= 1'b0;
        ft_valid[c_tid] <= 1'b0;
        if (ft_valid[c_tid]) begin
          ac[ft_sid[c_tid]] <= ac[ft_sid[c_tid]] - 1'b1;
          if (ac[ft_sid[c_tid]] == 1) stall[ft_sid[c_tid]] <= 1'b0;
        end
      end

      // stall mask
      if (wr_c || wr_x) begin
        case (w_off)
          SFR_STALL:     stall <= w_data[D-1:0];
          SFR_STALL_SET: stall <= stall | w_data[D-1:0];
          SFR_STALL_CLR: stall <= stall & ~w_data[D-1:0];
          default: ;
        endcase
      end

      // read data
      if (c_valid && !c_we) begin
        case (c_off)
          SFR_ACTIVATE:  c_rdata <= overflow_cnt;
          SFR_ACT_COUNT: c_rdata <= 32'(ac[c_tid]);
          SFR_STALL:     c_rdata <= 32'(stall);
          SFR_SID:       c_rdata <= 32'(c_tid);
          SFR_ACTIVE:    c_rdata <= 32'(active);
          default:       c_rdata <= '0;
        endcase
      end
    end
  end

  // A thread that issues must be active; an exit comes from an active thread.
  assert property (@(posedge clk) disable iff (!rst_n) issue_valid |-> active[issue_tid]);
endmodule
