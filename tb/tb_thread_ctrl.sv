// tb_thread_ctrl: drives the thread controller's SFR ports as threads would
// and checks: activation into the lowest free slot, thread-overflow after D
// activations, round-robin issue with no slot re-issued within C cycles,
// an issue every cycle while at least C threads run, bypass of stalled
// threads and their restart, SID and AC reads, fork (Activate and Count) and
// join (the last forked thread's Exit clears the main thread's stall bit).
module tb_thread_ctrl;
  import hpra_pkg::*;
  localparam int D = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic issue_valid, start_valid, c_valid, c_we, x_valid, x_ready, exit_valid;
  logic [3:0] issue_tid, start_sid, c_tid, exit_tid;
  logic [31:0] start_pc, c_wdata, c_rdata, x_wdata, ovf;
  logic [5:0] c_off, x_off;
  logic [D-1:0] active, stall;
  int checks = 0, failures = 0;

  thread_ctrl #(.D(D)) dut (.clk, .rst_n, .issue_valid, .issue_tid, .start_valid, .start_sid,
    .start_pc, .c_valid, .c_we, .c_tid, .c_off, .c_wdata, .c_rdata, .x_valid, .x_off, .x_wdata,
    .x_ready, .exit_valid, .exit_tid, .active, .stall, .overflow_cnt(ovf));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // issue history
  int last_issue [D];
  int cyc = 0, reissue_bad = 0, idle_with_work = 0, issues [D];
  always @(posedge clk) if (rst_n) begin
    int runnable;
    cyc++;
    runnable = $countones(active & ~stall);
    if (issue_valid) begin
      if (cyc - last_issue[issue_tid] < C_SLOW) reissue_bad++;
      if (!active[issue_tid] || stall[issue_tid]) reissue_bad++;
      last_issue[issue_tid] = cyc;
      issues[issue_tid]++;
    end else if (runnable >= C_SLOW) idle_with_work++;
  end

  task automatic cwrite(int tid, sfr_e off, logic [31:0] data);
    @(negedge clk);
    c_valid = 1; c_we = 1; c_tid = 4'(tid); c_off = off; c_wdata = data;
    @(posedge clk); #1 c_valid = 0;
  endtask
  task automatic cread(int tid, sfr_e off, output logic [31:0] data);
    @(negedge clk);
    c_valid = 1; c_we = 0; c_tid = 4'(tid); c_off = off;
    @(posedge clk); #1 c_valid = 0; data = c_rdata;
  endtask

  initial begin
    logic [31:0] r;
    int n;
    c_valid = 0; c_we = 0; c_tid = 0; c_off = 0; c_wdata = 0;
    x_valid = 0; x_off = 0; x_wdata = 0;
    for (int i = 0; i < D; i++) begin last_issue[i] = -100; issues[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // external activation of thread 0
    @(negedge clk); x_valid = 1; x_off = SFR_ACTIVATE; x_wdata = 32'h100;
    #1 check(start_valid && start_sid == 0 && start_pc == 32'h100, "start of slot 0");
    @(posedge clk); #1 x_valid = 0;
    check(active == 16'h0001, "slot 0 active");
    // thread 0 forks 5 threads (AC), then stalls itself
    for (int i = 0; i < 5; i++) begin
      @(negedge clk);
      c_valid = 1; c_we = 1; c_tid = 0; c_off = SFR_ACT_COUNT; c_wdata = 32'h200 + 32'(i);
      #1 check(start_valid && start_sid == 4'(i + 1), "fork start into next free slot");
      check(!x_ready, "external port waits while the core uses the SFRs");
      @(posedge clk); #1 c_valid = 0;
    end
    cread(0, SFR_ACT_COUNT, r); check(r == 5, "AC counts 5 forked threads");
    cread(3, SFR_SID, r); check(r == 3, "SID read");
    cwrite(0, SFR_STALL_SET, 32'h1);
    check(stall == 16'h0001, "main thread stalled");
    repeat (40) @(posedge clk);
    check(idle_with_work == 0, "issue every cycle while >= C threads are runnable");
    check(issues[0] <= 12, "stalled main thread bypassed");
    // stall thread 2 from thread 1, later clear it from thread 4
    cwrite(1, SFR_STALL_SET, 32'h4);
    n = issues[2];
    repeat (20) @(posedge clk);
    check(issues[2] <= n + 1, "stalled thread 2 not issued");
    cwrite(4, SFR_STALL_CLR, 32'h4);
    repeat (20) @(posedge clk);
    check(issues[2] > n + 2, "thread 2 runs again after the clear");
    cread(5, SFR_STALL, r); check(r == 32'h1, "stall mask read");
    cread(5, SFR_ACTIVE, r); check(r == 32'h3F, "active mask read");
    // forked threads exit; the last one releases the main thread
    for (int i = 1; i <= 5; i++) begin
      check(stall[0], "main thread still stalled before the join");
      @(negedge clk);
      c_valid = 1; c_we = 1; c_tid = 4'(i); c_off = SFR_EXIT; c_wdata = 0;
      #1 check(exit_valid && exit_tid == 4'(i), "exit signalled");
      @(posedge clk); #1 c_valid = 0;
    end
    check(!stall[0] && active == 16'h0001, "join: main thread runs, forked slots free");
    cread(0, SFR_ACT_COUNT, r); check(r == 0, "AC back to 0");
    // fill all D slots, then one more: thread-overflow
    for (int i = 0; i < D; i++) cwrite(0, SFR_ACTIVATE, 32'h300);
    check(active == '1, "all slots active");
    check(ovf == 1, "overflow of the 17th thread counted");
    cread(0, SFR_ACTIVATE, r); check(r == 1, "overflow count read");
    repeat (40) @(posedge clk);
    check(reissue_bad == 0, "no slot issued within C cycles of its last issue");
    for (int i = 0; i < D; i++) check(issues[i] > 0, $sformatf("slot %0d issued", i));
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
