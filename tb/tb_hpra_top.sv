// tb_hpra_top: end-to-end test of the full 4x4 array (15 clusters, support
// position (0,0)) at its default parameters. The testbench plays the support
// logic: it writes programs and data into clusters through the three links
// of position (0,0), starts threads with packets to their TCs, and collects
// what clusters send back to (0,0).
//   * Clusters (1,1), (3,3), (2,0) and (0,3) run fork-join matrix
//     multiplications of different sizes and DMA the product to (0,0).
//   * Cluster (3,1) multiplies and DMAs its product into the MEM of cluster
//     (1,3), through two other routing elements.
//   * Cluster (2,2) receives 17 Activate writes for a program that keeps a
//     SID-tagged word on its private stack: 16 threads run, the 17th is a
//     thread-overflow, and with 8 stack sections for 16 threads some must
//     wait for the stack.
// Every mechanism is counted (fork, stall with bypass, join, thread
// overflow, stack-full stall, instruction replay, DMA to a remote cluster,
// multi-hop forwarding, DI-FIFO back-pressure at the support links); one
// that never happens is a failure.
module tb_hpra_top;
  import hpra_pkg::*;
  import rv_asm_pkg::*;
  import mm_prog_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [7:0] sys_in_valid, sys_in_ready, sys_out_valid, sys_out_ready;
  pkt_t sys_in_pkt [8], sys_out_pkt [8];
  logic [15:0] active [4][4], stall [4][4];
  logic retire_valid [4][4], replay_valid [4][4], stack_full [4][4], dma_busy [4][4];
  logic [31:0] ovf [4][4];
  int checks = 0, failures = 0;

  hpra_top dut (.clk, .rst_n, .sys_in_valid, .sys_in_pkt, .sys_in_ready, .sys_out_valid,
    .sys_out_pkt, .sys_out_ready, .active, .stall, .retire_valid, .replay_valid, .stack_full,
    .dma_busy, .thread_overflows(ovf));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- support-logic side: three injection queues, one per link ----
  localparam int LINKS [3] = '{7, 6, 4};  // toward (1,1), (1,0), (0,1)
  pkt_t txq [3][$];
  int nq = 0;
  task automatic put(int c, int r, int offs, u32 d);
    txq[nq % 3].push_back('{addr: global_addr(4'(c), 4'(r), 16'(offs)), data: d, be: 4'hF});
    nq++;
  endtask
  always @(posedge clk) if (rst_n)
    for (int l = 0; l < 3; l++)
      if (sys_in_valid[LINKS[l]] && sys_in_ready[LINKS[l]]) void'(txq[l].pop_front());
  always @(negedge clk) begin
    sys_in_valid = '0;
    for (int l = 0; l < 3; l++)
      if (txq[l].size() > 0) begin
        sys_in_valid[LINKS[l]] = 1'b1;
        sys_in_pkt[LINKS[l]] = txq[l][0];
      end
    sys_out_ready = 8'($urandom) | 8'($urandom);
  end
  task automatic drain();
    wait (txq[0].size() == 0 && txq[1].size() == 0 && txq[2].size() == 0);
    // packets on different links may overtake each other: let the array
    // deliver everything before the next phase
    repeat (200) @(posedge clk);
  endtask

  // ---- received at (0,0) ----
  u32 rx [int];
  int nrx = 0;
  always @(posedge clk) if (rst_n)
    for (int d = 0; d < 8; d++)
      if (sys_out_valid[d] && sys_out_ready[d]) begin
        rx[int'(sys_out_pkt[d].addr)] = sys_out_pkt[d].data;
        nrx++;
      end

  // ---- mechanism counters ----
  int n_stall_bypass = 0, n_join = 0, n_full = 0, n_replay = 0, n_dma_remote = 0,
      n_forward = 0, n_backpressure = 0, n_fork = 0, max_threads = 0;
  bit main_was_stalled [4][4];
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < 4; c++)
      for (int r = 0; r < 4; r++) begin
        if (stall[c][r] != 0 && retire_valid[c][r]) n_stall_bypass++;
        if (stall[c][r][0] && active[c][r][0]) main_was_stalled[c][r] = 1;
        if (main_was_stalled[c][r] && !stall[c][r][0] && active[c][r][0]) begin
          n_join++; main_was_stalled[c][r] = 0;
        end
        if (stack_full[c][r]) n_full++;
        if (replay_valid[c][r]) n_replay++;
        if ($countones(active[c][r]) > max_threads) max_threads = $countones(active[c][r]);
      end
    for (int l = 0; l < 3; l++)
      if (sys_in_valid[LINKS[l]] && !sys_in_ready[LINKS[l]]) n_backpressure++;
  end
  // hierarchical probes of two routing elements and one PE
  always @(posedge clk) if (rst_n) begin
    if (dut.g_col[2].g_row[2].g_cl.u_cl.u_re.src_valid[0] &&
        dut.g_col[2].g_row[2].g_cl.u_cl.u_re.src_ready[0]) n_forward++;
    if (dut.g_col[1].g_row[2].g_cl.u_cl.u_re.src_valid[0] &&
        dut.g_col[1].g_row[2].g_cl.u_cl.u_re.src_ready[0]) n_forward++;
    if (dut.g_col[3].g_row[1].g_cl.u_cl.u_re.dma_valid &&
        dut.g_col[3].g_row[1].g_cl.u_cl.u_re.dma_ready) n_dma_remote++;
    if (dut.g_col[1].g_row[1].g_cl.u_cl.u_pe.u_tc.c_valid &&
        dut.g_col[1].g_row[1].g_cl.u_cl.u_pe.u_tc.c_we &&
        dut.g_col[1].g_row[1].g_cl.u_cl.u_pe.u_tc.c_off == SFR_ACT_COUNT) n_fork++;
  end

  // ---- workloads ----
  typedef struct { int c, r, n, seed, tc, tr, toffs; } mm_job_t;
  mm_job_t jobs [5];

  task automatic load_mm(mm_job_t j);
    for (int i = 0; i < PROG_WORDS; i++) put(j.c, j.r, 4 * i, mm_word(i));
    put(j.c, j.r, N_ADDR, j.n);
    put(j.c, j.r, TGT_ADDR, global_addr(4'(j.tc), 4'(j.tr), 16'(j.toffs)));
    for (int a = 0; a < j.n; a++)
      for (int b = 0; b < j.n; b++) begin
        put(j.c, j.r, A_BASE + 4 * (a * j.n + b), u32'(a_elem(j.seed, a, b)));
        put(j.c, j.r, B_BASE + 4 * (a * j.n + b), u32'(b_elem(j.seed, a, b)));
      end
  endtask

  // stack / overflow program at word 128 of cluster (2,2)
  function automatic u32 spin_word(int i);
    case (i)
      0: return lui(5, 'hF);
      1: return lw(12, 5, O_SID);
      2: return addi(2, 2, -4);
      3: return sw(12, 2, 0);
      4: return addi(10, 0, 60);
      5: return addi(10, 10, -1);
      6: return bne(10, 0, -4);
      7: return lw(11, 2, 0);
      8: return beq(11, 12, 8);
      9: return sw(11, 0, 'h7F0);
      10: return sw(0, 5, O_EXIT);
      default: return jal(0, 0);
    endcase
  endfunction

  int t0, t_done;
  initial begin
    jobs[0] = '{1, 1, 4, 1, 0, 0, 'h1000};
    jobs[1] = '{3, 3, 5, 2, 0, 0, 'h2000};
    jobs[2] = '{2, 0, 3, 3, 0, 0, 'h3000};
    jobs[3] = '{0, 3, 6, 4, 0, 0, 'h4000};
    jobs[4] = '{3, 1, 4, 5, 1, 3, 'h3000};
    sys_in_valid = 0; sys_out_ready = 0;
    for (int d = 0; d < 8; d++) sys_in_pkt[d] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (jobs[j]) load_mm(jobs[j]);
    for (int i = 0; i < 12; i++) put(2, 2, 'h200 + 4 * i, spin_word(i));
    put(2, 2, 'h7F0, 0);
    drain();
    t0 = $time;
    foreach (jobs[j]) put(jobs[j].c, jobs[j].r, 'hF000, 0);
    for (int i = 0; i < 17; i++) put(2, 2, 'hF000, 'h200);
    drain();
    // wait for all threads and DMA transfers to finish
    do begin
      automatic bit busy = 0;
      repeat (50) @(posedge clk);
      for (int c = 0; c < 4; c++)
        for (int r = 0; r < 4; r++) if (active[c][r] != 0 || dma_busy[c][r]) busy = 1;
      if (!busy) break;
    end while (1);
    repeat (50) @(posedge clk);
    t_done = ($time - t0) / 10;
    $display("all work done after %0d cycles, %0d packets received at (0,0)", t_done, nrx);
    // results at the support position
    for (int j = 0; j < 4; j++)
      for (int i = 0; i < jobs[j].n * jobs[j].n; i++) begin
        automatic int a = int'(global_addr(0, 0, 16'(jobs[j].toffs + 4 * i)));
        check(rx.exists(a) && rx[a] == u32'(c_elem(jobs[j].seed, jobs[j].n, i / jobs[j].n, i % jobs[j].n)),
              $sformatf("job %0d result word %0d", j, i));
      end
    check(nrx == 16 + 25 + 9 + 36, $sformatf("packets at (0,0): %0d", nrx));
    // result written into cluster (1,3) by cluster (3,1)
    for (int i = 0; i < 16; i++)
      check(dut.g_col[1].g_row[3].g_cl.u_cl.u_pe.u_mem.mem[('h3000 >> 2) + i] ==
            u32'(c_elem(5, 4, i / 4, i % 4)), $sformatf("remote DMA word %0d", i));
    // stack / overflow cluster
    check(ovf[2][2] == 1, $sformatf("thread overflows at (2,2): %0d", ovf[2][2]));
    check(dut.g_col[2].g_row[2].g_cl.u_cl.u_pe.u_mem.mem['h7F0 >> 2] == 0, "stack isolation");
    // mechanisms
    $display("fork=%0d stall_bypass=%0d join=%0d stack_full=%0d replay=%0d dma_remote=%0d forward=%0d backpressure=%0d max_threads=%0d",
             n_fork, n_stall_bypass, n_join, n_full, n_replay, n_dma_remote, n_forward,
             n_backpressure, max_threads);
    check(n_fork == 4, "fork (Activate and Count) at (1,1)");
    check(n_stall_bypass > 0, "stalled thread bypassed");
    check(n_join == 5, $sformatf("joins %0d, expected 5", n_join));
    check(n_full > 0, "stack-full stall");
    check(n_replay > 0, "instruction replay");
    check(n_dma_remote == 16, "DMA packets from (3,1)");
    check(n_forward > 0, "multi-hop forwarding");
    check(n_backpressure > 0, "back-pressure on the support links");
    check(max_threads == 16, "all D slots in use at (2,2)");
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
