// tb_write_arbiter: three sources send packets to random clusters of a 4x4
// array (never the own cluster (1,1)); outputs are randomly not ready.
// Checks that each packet leaves on the direction one step toward its
// target, exactly once, one cycle after its grant, and that all arrive.
module tb_write_arbiter;
  import hpra_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [2:0] src_valid, src_ready;
  pkt_t src_pkt [3];
  logic [7:0] out_valid, out_ready;
  pkt_t out_pkt [8];
  int checks = 0, failures = 0, nsent = 0, nrcvd = 0, blocked = 0;
  bit granted [3];
  int expect_dir [int];     // packet id -> direction
  int grant_cyc [int], cyc = 0;

  write_arbiter #(.NSRC(3), .MY_COL(4'd1), .MY_ROW(4'd1)) dut (.clk, .rst_n, .src_valid,
    .src_pkt, .src_ready, .out_valid, .out_pkt, .out_ready);

  function automatic int step(int t, int m); return (t > m) ? 1 : (t < m) ? -1 : 0; endfunction

  function automatic pkt_t new_pkt(int id);
    int c, r;
    do begin c = $urandom_range(0, 3); r = $urandom_range(0, 3); end while (c == 1 && r == 1);
    expect_dir[id] = int'(dir_index(step(c, 1), step(r, 1)));
    return '{addr: global_addr(4'(c), 4'(r), 16'h10), data: 32'(id), be: 4'hF};
  endfunction

  always @(posedge clk) if (rst_n) begin
    cyc++;
    for (int d = 0; d < 8; d++)
      if (out_valid[d] && out_ready[d]) begin
        automatic int id = int'(out_pkt[d].data);
        checks++; nrcvd++;
        if (!grant_cyc.exists(id) || grant_cyc[id] >= cyc) begin
          failures++; $display("FAIL packet %0d out before its grant", id);
        end
        if (!expect_dir.exists(id) || expect_dir[id] != d) begin
          failures++; $display("FAIL packet %0d on direction %0d", id, d);
        end else expect_dir.delete(id);
      end
    for (int s = 0; s < 3; s++)
      if (src_valid[s] && src_ready[s]) begin granted[s] = 1; grant_cyc[int'(src_pkt[s].data)] = cyc; end
      else if (src_valid[s]) blocked++;
    checks++;
    if ($countones(src_ready) > 1) begin failures++; $display("FAIL two grants"); end
  end
  always @(negedge clk) begin
    out_ready = 8'($urandom);
    for (int s = 0; s < 3; s++) begin
      if (granted[s] || !src_valid[s]) begin
        granted[s] = 0;
        src_valid[s] = (nsent < 600) && 1'($urandom_range(0, 1));
        if (src_valid[s]) begin src_pkt[s] = new_pkt(nsent); nsent++; end
      end
    end
  end

  initial begin
    src_valid = 0;
    for (int s = 0; s < 3; s++) begin granted[s] = 0; src_pkt[s] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (nsent == 600 && src_valid == 0);
    repeat (20) @(posedge clk);
    checks++;
    if (nrcvd != 600 || expect_dir.size() != 0) begin
      failures++; $display("FAIL sent %0d received %0d", nsent, nrcvd);
    end
    checks++;
    if (blocked == 0) begin failures++; $display("FAIL no back-pressure seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
