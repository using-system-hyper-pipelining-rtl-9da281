// tb_pe: the programming element on its own, driven from the routing
// element side. The program and the matrices are written into MEM with
// write packets, a thread is started by a packet to the TC's Activate SFR,
// and the fork-join matrix multiplication (N = 4, four row threads) runs.
// While it runs, more packets write MEM through the shared port. Checks:
// the product in MEM, the DMA packets carrying it to cluster (3,3), the
// packets written during the run, that the main thread was stalled and
// released (join), that more than C threads were active, stack use, and
// that nothing overflowed.
module tb_pe;
  import hpra_pkg::*;
  import rv_asm_pkg::*;
  import mm_prog_pkg::*;
  localparam int N = 4, SEED = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic loc_valid, loc_ready, core_g_valid, core_g_ready, dma_g_valid, dma_g_ready;
  pkt_t loc_pkt, core_g_pkt, dma_g_pkt;
  logic [15:0] active, stall;
  logic retire_valid, replay_valid, stack_full, dma_busy;
  logic [3:0] retire_tid;
  logic [31:0] ovf;
  int checks = 0, failures = 0;

  pe #(.MY_COL(4'd1), .MY_ROW(4'd1)) dut (.clk, .rst_n, .loc_valid, .loc_pkt, .loc_ready,
    .core_g_valid, .core_g_pkt, .core_g_ready, .dma_g_valid, .dma_g_pkt, .dma_g_ready,
    .active, .stall, .retire_valid, .retire_tid, .replay_valid, .stack_full, .dma_busy,
    .thread_overflows(ovf));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic send(int offs, u32 data);
    @(negedge clk);
    loc_valid = 1; loc_pkt = '{addr: global_addr(4'd1, 4'd1, 16'(offs)), data: data, be: 4'hF};
    do @(posedge clk); while (!loc_ready);
    #1 loc_valid = 0;
  endtask

  pkt_t dma_got [$];
  int main_stalled = 0, max_active = 0, busy_refused = 0;
  always @(posedge clk) if (rst_n) begin
    if (dma_g_valid && dma_g_ready) dma_got.push_back(dma_g_pkt);
    if (stall[0] && active[0]) main_stalled++;
    if ($countones(active) > max_active) max_active = $countones(active);
    if (loc_valid && !loc_ready) busy_refused++;
  end
  always @(negedge clk) dma_g_ready = 1'($urandom_range(0, 1));

  initial begin
    int t0;
    loc_valid = 0; loc_pkt = '0; core_g_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < PROG_WORDS; i++) send(4 * i, mm_word(i));
    send(N_ADDR, N);
    send(TGT_ADDR, global_addr(4'd3, 4'd3, 16'h0100));
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) begin
        send(A_BASE + 4 * (r * N + c), u32'(a_elem(SEED, r, c)));
        send(B_BASE + 4 * (r * N + c), u32'(b_elem(SEED, r, c)));
      end
    t0 = $time;
    send('hF000, 0);                       // Activate main thread at address 0
    // extra MEM writes while the threads run
    for (int i = 0; i < 32; i++) send('h3000 + 4 * i, 32'h5500 + 32'(i));
    wait (active == 0 && !dma_busy);
    $display("matrix %0dx%0d took %0d cycles", N, N, ($time - t0) / 10);
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++)
        check(dut.u_mem.mem[(C_BASE >> 2) + r * N + c] == u32'(c_elem(SEED, N, r, c)),
              $sformatf("C[%0d][%0d]", r, c));
    check(dma_got.size() == N * N, $sformatf("DMA packets %0d", dma_got.size()));
    foreach (dma_got[i])
      check(dma_got[i].addr == global_addr(4'd3, 4'd3, 16'h0100 + 16'(4 * i)) &&
            dma_got[i].data == u32'(c_elem(SEED, N, i / N, i % N)), $sformatf("DMA word %0d", i));
    for (int i = 0; i < 32; i++)
      check(dut.u_mem.mem[('h3000 >> 2) + i] == 32'h5500 + 32'(i), "MEM write during the run");
    check(main_stalled > 0, "main thread never stalled");
    check(max_active == N + 1, $sformatf("max active threads %0d", max_active));
    check(busy_refused > 0, "port B never busy for a routing-element write");
    check(ovf == 0, "no thread overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
