// tb_routing_element: random packets enter on the eight links and from the
// PE (core and DMA sources) of the routing element at (1,1). Packets for
// (1,1) must come out of the local delivery port; all others must leave on
// the link one step toward their target. Every packet must come out exactly
// once, and the DI-FIFO must fill up (local port randomly slow) at least once.
module tb_routing_element;
  import hpra_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [7:0] in_valid, in_ready, out_valid, out_ready;
  pkt_t in_pkt [8], out_pkt [8];
  logic loc_valid, loc_ready, core_valid, core_ready, dma_valid, dma_ready;
  pkt_t loc_pkt, core_pkt, dma_pkt;
  int checks = 0, failures = 0, nsent = 0, nrcvd = 0, full_seen = 0;
  int expect_dir [int];   // id -> direction, 8 = local
  bit gin [8], gcore, gdma;

  routing_element #(.FIFO_DEPTH(8), .MY_COL(4'd1), .MY_ROW(4'd1)) dut (.clk, .rst_n,
    .in_valid, .in_pkt, .in_ready, .out_valid, .out_pkt, .out_ready,
    .loc_valid, .loc_pkt, .loc_ready, .core_valid, .core_pkt, .core_ready,
    .dma_valid, .dma_pkt, .dma_ready);

  function automatic int step(int t, int m); return (t > m) ? 1 : (t < m) ? -1 : 0; endfunction
  function automatic pkt_t new_pkt(bit allow_local);
    int c, r, id;
    id = nsent++;
    do begin c = $urandom_range(0, 3); r = $urandom_range(0, 3); end
    while (!allow_local && c == 1 && r == 1);
    expect_dir[id] = (c == 1 && r == 1) ? 8 : int'(dir_index(step(c, 1), step(r, 1)));
    return '{addr: global_addr(4'(c), 4'(r), 16'h20), data: 32'(id), be: 4'hF};
  endfunction

  task automatic got(int id, int d);
    checks++; nrcvd++;
    if (!expect_dir.exists(id) || expect_dir[id] != d) begin
      failures++; $display("FAIL packet %0d out at %0d", id, d);
    end else expect_dir.delete(id);
  endtask

  always @(posedge clk) if (rst_n) begin
    for (int d = 0; d < 8; d++) begin
      if (out_valid[d] && out_ready[d]) got(int'(out_pkt[d].data), d);
      if (in_valid[d] && in_ready[d]) gin[d] = 1;
    end
    if (loc_valid && loc_ready) got(int'(loc_pkt.data), 8);
    if (core_valid && core_ready) gcore = 1;
    if (dma_valid && dma_ready) gdma = 1;
    if (dut.level == 8) full_seen++;
  end

  bit run = 1;
  always @(negedge clk) begin
    out_ready = 8'($urandom) | 8'($urandom);
    loc_ready = 1'($urandom_range(0, 3) == 0);
    for (int d = 0; d < 8; d++)
      if (gin[d] || !in_valid[d]) begin
        gin[d] = 0;
        in_valid[d] = run && 1'($urandom_range(0, 1));
        if (in_valid[d]) in_pkt[d] = new_pkt(1);
      end
    if (gcore || !core_valid) begin
      gcore = 0; core_valid = run && 1'($urandom_range(0, 1));
      if (core_valid) core_pkt = new_pkt(0);
    end
    if (gdma || !dma_valid) begin
      gdma = 0; dma_valid = run && 1'($urandom_range(0, 1));
      if (dma_valid) dma_pkt = new_pkt(0);
    end
  end

  initial begin
    in_valid = 0; core_valid = 0; dma_valid = 0;
    for (int d = 0; d < 8; d++) begin gin[d] = 0; in_pkt[d] = '0; end
    gcore = 0; gdma = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (2000) @(posedge clk);
    run = 0;
    repeat (300) @(posedge clk);
    checks++;
    if (nrcvd != nsent || expect_dir.size() != 0) begin
      failures++; $display("FAIL sent %0d received %0d", nsent, nrcvd);
    end
    checks++;
    if (full_seen == 0) begin failures++; $display("FAIL DI-FIFO never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
