// tb_matmul_lpp: local peak performance workload. One programming element
// at its default parameters runs the fork-join matrix multiplication of
// mm_prog_pkg for N = 4, 5, ..., 10 (the sizes of the published comparison),
// one after the other, with all data in its own MEM. For each size the
// program, N and the matrices are written into MEM with packets from the
// routing-element side, the main thread is started by an Activate packet,
// it forks N row threads (N + 1 threads active), joins them, and sends C by
// DMA to cluster (3,3).
// Checks per size: every element of C in MEM, every DMA packet, the number
// of active threads, no thread overflow, all stack sections released at the
// end, that the run took longer than the previous, smaller one, and that
// with more than C runnable threads the core retires more than one
// instruction every two cycles (a lone thread retires one per C = 4).
// The cycle count, instructions retired and instructions per cycle are
// printed for each size.
module tb_matmul_lpp;
  import hpra_pkg::*;
  import rv_asm_pkg::*;
  import mm_prog_pkg::*;
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
  int max_active = 0, retired = 0;
  always @(posedge clk) if (rst_n) begin
    if (dma_g_valid && dma_g_ready) dma_got.push_back(dma_g_pkt);
    if ($countones(active) > max_active) max_active = $countones(active);
    if (retire_valid) retired++;
  end

  initial begin
    int t0, cyc, prev = 0;
    loc_valid = 0; loc_pkt = '0; core_g_ready = 1; dma_g_ready = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < PROG_WORDS; i++) send(4 * i, mm_word(i));
    send(TGT_ADDR, global_addr(4'd3, 4'd3, 16'h0100));
    for (int n = 4; n <= 10; n++) begin
      send(N_ADDR, n);
      for (int r = 0; r < n; r++)
        for (int c = 0; c < n; c++) begin
          send(A_BASE + 4 * (r * n + c), u32'(a_elem(n, r, c)));
          send(B_BASE + 4 * (r * n + c), u32'(b_elem(n, r, c)));
        end
      dma_got.delete();
      repeat (5) @(posedge clk);
      max_active = 0; retired = 0;
      t0 = $time;
      send('hF000, 0);
      wait (active == 0 && !dma_busy);
      cyc = ($time - t0) / 10;
      $display("matrix %0dx%0d: %0d cycles, %0d instructions retired, %0d threads, %0.2f instructions per cycle",
               n, n, cyc, retired, max_active, real'(retired) / real'(cyc));
      for (int r = 0; r < n; r++)
        for (int c = 0; c < n; c++)
          check(dut.u_mem.mem[(C_BASE >> 2) + r * n + c] == u32'(c_elem(n, n, r, c)),
                $sformatf("N=%0d C[%0d][%0d]", n, r, c));
      check(dma_got.size() == n * n, $sformatf("N=%0d DMA packets %0d", n, dma_got.size()));
      foreach (dma_got[i])
        check(dma_got[i].addr == global_addr(4'd3, 4'd3, 16'h0100 + 16'(4 * i)) &&
              dma_got[i].data == u32'(c_elem(n, n, i / n, i % n)), $sformatf("N=%0d DMA word %0d", n, i));
      check(max_active == n + 1, $sformatf("N=%0d threads %0d", n, max_active));
      check(dut.u_tlb.used == '0, $sformatf("N=%0d stack sections released", n));
      check(cyc > prev, $sformatf("N=%0d runtime grows with N", n));
      check(real'(retired) / real'(cyc) > 0.5, $sformatf("N=%0d throughput", n));
      prev = cyc;
    end
    check(ovf == 0, "no thread overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
