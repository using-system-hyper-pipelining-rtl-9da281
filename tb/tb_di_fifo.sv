// tb_di_fifo: random pushes and pops against a queue model; checks order,
// full/empty flags and the fill level.
module tb_di_fifo;
  import hpra_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  pkt_t in_pkt, out_pkt;
  logic [3:0] level;
  pkt_t q [$];
  int checks = 0, failures = 0, fulls = 0;

  di_fifo #(.DEPTH(8)) dut (.clk, .rst_n, .in_valid, .in_pkt, .in_ready, .out_valid, .out_pkt,
                            .out_ready, .level);

  initial begin
    in_valid = 0; out_ready = 0; in_pkt = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      in_valid = 1'($urandom_range(0, 3) != 0) ^ (n > 1500);
      out_ready = 1'($urandom_range(0, 2) == 0) ^ (n > 1500);
      in_pkt = '{addr: $urandom, data: $urandom, be: 4'($urandom)};
      @(posedge clk); #1;
    end
  end
  always @(posedge clk) if (rst_n) begin
    checks++;
    if (32'(level) != q.size() || in_ready != (q.size() < 8) || out_valid != (q.size() > 0)) begin
      failures++; $display("FAIL level %0d model %0d", level, q.size());
    end
    if (out_valid && out_ready) begin
      checks++;
      if (out_pkt !== q[0]) begin failures++; $display("FAIL order"); end
      void'(q.pop_front());
    end
    if (in_valid && in_ready) q.push_back(in_pkt);
    if (!in_ready) fulls++;
  end
  initial begin
    repeat (3100) @(posedge clk);
    checks++;
    if (fulls == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
