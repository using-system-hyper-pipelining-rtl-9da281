// tb_di_arbiter: eight random sources each send a numbered stream; checks
// that exactly one link is granted per accepted cycle, the forwarded packet
// is the granted link's, every stream arrives complete and in order, and
// round-robin keeps every busy link served within eight grants.
module tb_di_arbiter;
  import hpra_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [7:0] in_valid, in_ready;
  pkt_t in_pkt [8];
  logic out_valid, out_ready;
  pkt_t out_pkt;
  int sent [8], rcvd [8], wait_cnt [8];
  bit granted [8];
  int checks = 0, failures = 0, starve = 0;

  di_arbiter #(.N(8)) dut (.clk, .rst_n, .in_valid, .in_pkt, .in_ready, .out_valid, .out_pkt,
                           .out_ready);

  always @(posedge clk) if (rst_n) begin
    checks++;
    if ($countones(in_ready) > 1 || (out_valid && out_ready) != (in_ready != 0) ||
        out_valid != (in_valid != 0)) begin
      failures++; $display("FAIL handshake");
    end
    for (int k = 0; k < 8; k++) begin
      if (in_valid[k] && in_ready[k]) begin
        checks++;
        if (out_pkt !== in_pkt[k] || int'(out_pkt.data) != rcvd[k] || out_pkt.addr != 32'(k)) begin
          failures++; $display("FAIL data link %0d", k);
        end
        rcvd[k]++; sent[k]++; wait_cnt[k] = 0; granted[k] = 1;
      end else if (in_valid[k] && out_ready) begin
        wait_cnt[k]++;
        if (wait_cnt[k] > 8) starve++;
      end
    end
  end

  always @(negedge clk) begin
    out_ready = 1'($urandom_range(0, 3) != 0);
    for (int k = 0; k < 8; k++) begin
      if (!in_valid[k] || granted[k]) in_valid[k] = 1'($urandom_range(0, 1));
      granted[k] = 0;
      in_pkt[k] = '{addr: 32'(k), data: 32'(sent[k]), be: 4'hF};
    end
  end

  initial begin
    in_valid = 0;
    for (int k = 0; k < 8; k++) begin sent[k] = 0; rcvd[k] = 0; wait_cnt[k] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (3000) @(posedge clk);
    checks++;
    if (starve != 0) begin failures++; $display("FAIL starvation %0d", starve); end
    for (int k = 0; k < 8; k++) begin
      checks++;
      if (rcvd[k] < 100) begin failures++; $display("FAIL link %0d served %0d", k, rcvd[k]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
