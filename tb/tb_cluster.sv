// tb_cluster: one cluster at (1,1) with its eight links. The program and
// data arrive as packets on link 0 (from (0,0)); the main thread is started
// by a packet to the TC; a 3x3 fork-join matrix multiplication runs; the DMA
// engine sends the product toward (3,3), so it must leave on link 7. At the
// same time packets for (2,1) enter on link 3 and must leave on link 6.
module tb_cluster;
  import hpra_pkg::*;
  import rv_asm_pkg::*;
  import mm_prog_pkg::*;
  localparam int N = 3, SEED = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [7:0] in_valid, in_ready, out_valid, out_ready;
  pkt_t in_pkt [8], out_pkt [8];
  logic [15:0] active, stall;
  logic retire_valid, replay_valid, stack_full, dma_busy;
  logic [3:0] retire_tid;
  logic [31:0] ovf;
  int checks = 0, failures = 0, fwd = 0, bad_dir = 0;
  pkt_t res [$];

  cluster #(.MY_COL(4'd1), .MY_ROW(4'd1)) dut (.clk, .rst_n, .in_valid, .in_pkt, .in_ready,
    .out_valid, .out_pkt, .out_ready, .active, .stall, .retire_valid, .retire_tid,
    .replay_valid, .stack_full, .dma_busy, .thread_overflows(ovf));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic send(int link, pkt_t p);
    @(negedge clk);
    in_valid[link] = 1; in_pkt[link] = p;
    do @(posedge clk); while (!in_ready[link]);
    #1 in_valid[link] = 0;
  endtask
  task automatic send_mem(int offs, u32 d);
    send(0, '{addr: global_addr(4'd1, 4'd1, 16'(offs)), data: d, be: 4'hF});
  endtask

  always @(posedge clk) if (rst_n)
    for (int d = 0; d < 8; d++)
      if (out_valid[d] && out_ready[d]) begin
        if (addr_col(out_pkt[d].addr) == 2 && addr_row(out_pkt[d].addr) == 1) begin
          fwd++; if (d != 6) bad_dir++;
        end else begin
          res.push_back(out_pkt[d]); if (d != 7) bad_dir++;
        end
      end
  always @(negedge clk) out_ready = 8'($urandom);

  initial begin
    in_valid = 0;
    for (int d = 0; d < 8; d++) in_pkt[d] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < PROG_WORDS; i++) send_mem(4 * i, mm_word(i));
    send_mem(N_ADDR, N);
    send_mem(TGT_ADDR, global_addr(4'd3, 4'd3, 16'h0200));
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) begin
        send_mem(A_BASE + 4 * (r * N + c), u32'(a_elem(SEED, r, c)));
        send_mem(B_BASE + 4 * (r * N + c), u32'(b_elem(SEED, r, c)));
      end
    send_mem('hF000, 0);
    fork
      for (int i = 0; i < 20; i++)
        send(3, '{addr: global_addr(4'd2, 4'd1, 16'(4 * i)), data: 32'(i), be: 4'hF});
    join_none
    wait (res.size() == N * N);
    repeat (20) @(posedge clk);
    foreach (res[i])
      check(res[i].addr == global_addr(4'd3, 4'd3, 16'h0200 + 16'(4 * i)) &&
            res[i].data == u32'(c_elem(SEED, N, i / N, i % N)), $sformatf("result %0d", i));
    check(fwd == 20, $sformatf("forwarded %0d of 20", fwd));
    check(bad_dir == 0, "packets left on the wrong link");
    check(active == 0, "all threads exited");
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
