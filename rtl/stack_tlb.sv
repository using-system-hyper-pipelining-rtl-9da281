// stack_tlb: register based translation look-aside buffer for the shared
// PE-STACK.
//
// Each thread sees a private stack that starts at address 0 and grows
// downwards (the stack pointer is 0 when a thread starts), so a stack byte
// at address a lies ~a bytes below the top. That distance, divided by the
// section size, is the thread's virtual section number (vpn). The TLB holds
// one entry per physical stack section: {valid, owner thread, vpn}.
//
// Lookup (combinational, same cycle): a stack access by thread lk_tid to
// virtual section lk_vpn hits an entry owned by that thread, or, on a miss,
// is given the lowest free section, which is written into the TLB at the
// clock edge. lk_grant then reports success and lk_sec the physical section.
// If there is no free section the stack is full: lk_grant is low and the core
// replays the instruction later, which stalls that thread until another
// thread releases its sections. Because the thread controller keeps issuing
// all active threads in turn, the retries form the round-robin use of the
// stack the paper describes. A thread's sections are released when it exits
// (rel_valid, rel_tid).
//
// The entry format, the allocate-on-first-touch policy and the release at
// thread exit are this design's choices; the paper states only that the TLB
// uses the stack access and the thread ID, and that threads stall while the
// stack is full until another thread releases its section.
module stack_tlb #(
  parameter int unsigned D        = 16,  // thread slots
  parameter int unsigned SECTIONS = 8,   // physical stack sections
  parameter int unsigned VPNW     = 8,   // virtual section number width
  localparam int unsigned TW = $clog2(D),
  localparam int unsigned SW = $clog2(SECTIONS)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            lk_valid,
  input  logic [TW-1:0]   lk_tid,
  input  logic [VPNW-1:0] lk_vpn,
  output logic            lk_grant,
  output logic [SW-1:0]   lk_sec,
  output logic            lk_full,   // a lookup missed and no section was free
  input  logic            rel_valid,
  input  logic [TW-1:0]   rel_tid,
  output logic [SECTIONS-1:0] used    // sections in use (status)
);
  typedef struct packed {
    logic            valid;
    logic [TW-1:0]   tid;
    logic [VPNW-1:0] vpn;
  } entry_t;

  entry_t ent [SECTIONS];

  logic          hit, free_found;
  logic [SW-1:0] hit_idx, free_idx;

  always_comb begin
    hit = 1'b0; hit_idx = '0; free_found = 1'b0; free_idx = '0;
    for (int i = SECTIONS - 1; i >= 0; i--) begin
      if (ent[i].valid && ent[i].tid == lk_tid && ent[i].vpn == lk_vpn) begin
        hit = 1'b1; hit_idx = SW'(i);
      end
      if (!ent[i].valid) begin
        free_found = 1'b1; free_idx = SW'(i);
      end
    end
    lk_grant = lk_valid && (hit || free_found);
    lk_sec   = hit ? hit_idx : free_idx;
    lk_full  = lk_valid && !hit && !free_found;
    for (int i = 0; i < SECTIONS; i++) used[i] = ent[i].valid;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < SECTIONS; i++) ent[i] <= '0;
    end else begin
      for (int i = 0; i < SECTIONS; i++)
        if (rel_valid && ent[i].valid && ent[i].tid == rel_tid) ent[i].valid <= 1'b0;
      if (lk_valid && !hit && free_found)
        ent[free_idx] <= '{valid: 1'b1, tid: lk_tid, vpn: lk_vpn};
    end
  end
endmodule
