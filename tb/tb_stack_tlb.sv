// tb_stack_tlb: checks allocation on first touch, hits on the same
// (thread, section), distinct physical sections per owner, the stack-full
// refusal, and release of all of a thread's sections at its exit.
module tb_stack_tlb;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic lk_valid, lk_grant, lk_full, rel_valid;
  logic [3:0] lk_tid, rel_tid;
  logic [7:0] lk_vpn;
  logic [1:0] lk_sec;
  logic [3:0] used;
  int checks = 0, failures = 0;

  stack_tlb #(.D(16), .SECTIONS(4), .VPNW(8)) dut (.clk, .rst_n, .lk_valid, .lk_tid, .lk_vpn,
    .lk_grant, .lk_sec, .lk_full, .rel_valid, .rel_tid, .used);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // one lookup, returns grant and section
  task automatic look(int tid, int vpn, output bit g, output int sec);
    @(negedge clk);
    lk_valid = 1; lk_tid = 4'(tid); lk_vpn = 8'(vpn);
    #1 g = lk_grant; sec = int'(lk_sec);
    @(posedge clk); #1 lk_valid = 0;
  endtask

  initial begin
    bit g; int s, s0, s1, s2, s3;
    lk_valid = 0; rel_valid = 0; lk_tid = 0; lk_vpn = 0; rel_tid = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    look(3, 0, g, s0); check(g, "first touch granted");
    look(3, 0, g, s);  check(g && s == s0, "hit returns same section");
    look(5, 0, g, s1); check(g && s1 != s0, "other thread gets other section");
    look(3, 1, g, s2); check(g && s2 != s0 && s2 != s1, "second section of thread 3");
    look(7, 2, g, s3); check(g && s3 != s0 && s3 != s1 && s3 != s2, "fourth section");
    check(used == 4'hF, "all sections used");
    look(9, 0, g, s);  check(!g, "stack full refuses thread 9");
    @(negedge clk); lk_valid = 1; lk_tid = 9; lk_vpn = 0; #1 check(lk_full, "lk_full flag");
    lk_valid = 0;
    look(5, 0, g, s);  check(g && s == s1, "existing owner still hits when full");
    // thread 3 exits: both its sections become free
    @(negedge clk); rel_valid = 1; rel_tid = 3; @(posedge clk); #1 rel_valid = 0;
    check(used == ((4'h1 << s1) | (4'h1 << s3)), "release of thread 3");
    look(9, 0, g, s);  check(g && (s == s0 || s == s2), "thread 9 granted after release");
    look(9, 0, g, s);  check(g, "thread 9 hit");
    look(3, 0, g, s);  check(g, "thread 3 (restarted) gets the last free section");
    look(11, 0, g, s); check(!g, "full again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
