// tb_rv_shp_core: self-checking test of the SHP-ed RV32IM core.
//
// The core runs with its thread controller, PE-RAM, stack TLB and stack
// memory around it. Every thread runs the same program: it reads its own SID,
// exercises ALU, branches, jumps, MUL/MULH, the multi-pass divider (signed,
// unsigned, negative and divide-by-zero cases), byte and word loads/stores,
// its private stack and a store to another cluster, writes its results to a
// region selected by its SID and exits. Expected values are computed here.
// Phase 1 runs one thread and checks the macro-cycle timing: every
// instruction (or divider pass) of a lone thread takes exactly C = 4
// micro-cycles. Phase 2 runs six threads (more than C) with only four stack
// sections and a remote-store link that is randomly not ready, so the
// stack-full stall and the replay of a refused remote store both happen.
module tb_rv_shp_core;
  import hpra_pkg::*;
  import rv_asm_pkg::*;

  localparam int D = 16, MEMW = 4096, SEC = 4, SECW = 64, TW = 4, AW = 12;
  localparam int VPNW = 14 - 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic issue_valid, start_valid, exit_valid;
  logic [TW-1:0] issue_tid, start_sid, exit_tid, s_tid, t_tid, retire_tid;
  logic [31:0] start_pc;
  logic ia_en, d_en, d_we, s_valid, s_we, t_valid, t_grant, k_en, k_we, g_valid, g_ready;
  logic [AW-1:0] ia_addr, d_addr;
  logic [31:0] ia_rdata, d_wdata, b_rdata, s_wdata, s_rdata, k_wdata, k_rdata;
  logic [3:0] d_be, k_be;
  logic [5:0] s_off;
  logic [VPNW-1:0] t_vpn;
  logic [1:0] t_sec;
  logic [7:0] k_addr;
  pkt_t g_pkt;
  logic retire_valid, replay_valid, stack_full, x_valid, x_ready;
  logic [31:0] x_wdata, ovf;
  logic [D-1:0] active, stall;

  thread_ctrl #(.D(D)) u_tc (.clk, .rst_n, .issue_valid, .issue_tid, .start_valid, .start_sid,
    .start_pc, .c_valid(s_valid), .c_we(s_we), .c_tid(s_tid), .c_off(s_off), .c_wdata(s_wdata),
    .c_rdata(s_rdata), .x_valid, .x_off(6'(SFR_ACTIVATE)), .x_wdata, .x_ready,
    .exit_valid, .exit_tid, .active, .stall, .overflow_cnt(ovf));

  rv_shp_core #(.D(D), .MEM_WORDS(MEMW), .SECTIONS(SEC), .SECTION_WORDS(SECW),
                .MY_COL(4'd1), .MY_ROW(4'd1)) dut (
    .clk, .rst_n, .issue_valid, .issue_tid, .start_valid, .start_sid, .start_pc,
    .ia_en, .ia_addr, .ia_rdata, .d_en, .d_we, .d_be, .d_addr, .d_wdata, .d_rdata(b_rdata),
    .s_valid, .s_we, .s_tid, .s_off, .s_wdata, .s_rdata,
    .t_valid, .t_tid, .t_vpn, .t_grant, .t_sec, .k_en, .k_we, .k_be, .k_addr, .k_wdata, .k_rdata,
    .g_valid, .g_pkt, .g_ready, .retire_valid, .retire_tid, .replay_valid);

  stack_tlb #(.D(D), .SECTIONS(SEC), .VPNW(VPNW)) u_tlb (.clk, .rst_n, .lk_valid(t_valid),
    .lk_tid(t_tid), .lk_vpn(t_vpn), .lk_grant(t_grant), .lk_sec(t_sec), .lk_full(stack_full),
    .rel_valid(exit_valid), .rel_tid(exit_tid), .used());
  pe_stack #(.SECTIONS(SEC), .SECTION_WORDS(SECW)) u_stk (.clk, .en(k_en), .we(k_we), .be(k_be),
    .addr(k_addr), .wdata(k_wdata), .rdata(k_rdata));
  pe_mem #(.MEM_WORDS(MEMW)) u_mem (.clk, .a_en(ia_en), .a_addr(ia_addr), .a_rdata(ia_rdata),
    .b_en(d_en), .b_we(d_we), .b_be(d_be), .b_addr(d_addr), .b_wdata(d_wdata), .b_rdata);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- program ----
  u32 prog [50];
  initial begin
    prog[0]  = lui(5, 'hF);          prog[1]  = lw(6, 5, O_SID);
    prog[2]  = slli(7, 6, 6);        prog[3]  = addi(8, 0, 1024);
    prog[4]  = add(8, 8, 8);         prog[5]  = add(7, 7, 8);
    prog[6]  = addi(10, 6, 100);     prog[7]  = addi(11, 0, -7);
    prog[8]  = mul(12, 10, 11);      prog[9]  = sw(12, 7, 0);
    prog[10] = div(13, 12, 10);      prog[11] = sw(13, 7, 4);
    prog[12] = addi(15, 0, 7);       prog[13] = rem(14, 10, 15);
    prog[14] = sw(14, 7, 8);         prog[15] = divu(16, 10, 15);
    prog[16] = sw(16, 7, 12);        prog[17] = div(17, 10, 0);
    prog[18] = sw(17, 7, 16);        prog[19] = mulh(18, 11, 10);
    prog[20] = sw(18, 7, 20);        prog[21] = addi(2, 2, -16);
    prog[22] = sw(10, 2, 0);         prog[23] = sw(11, 2, 4);
    prog[24] = lw(19, 2, 0);         prog[25] = lw(20, 2, 4);
    prog[26] = add(21, 19, 20);      prog[27] = sw(21, 7, 24);
    prog[28] = addi(22, 0, 'h5A);    prog[29] = sb(22, 7, 28);
    prog[30] = lbu(23, 7, 28);       prog[31] = sw(23, 7, 32);
    prog[32] = addi(24, 0, 0);       prog[33] = addi(25, 0, 10);
    prog[34] = add(24, 24, 25);      prog[35] = addi(25, 25, -1);
    prog[36] = bne(25, 0, -8);       prog[37] = sw(24, 7, 36);
    prog[38] = jal(1, 8);            prog[39] = addi(26, 0, 1);
    prog[40] = sw(1, 7, 40);         prog[41] = addi(31, 0, 3);
    prog[42] = rem(30, 11, 31);      prog[43] = sw(30, 7, 44);
    prog[44] = div(30, 11, 31);      prog[45] = sw(30, 7, 48);
    prog[46] = lui(28, 'h12300);     prog[47] = sw(10, 28, 'h10);
    prog[48] = sw(0, 5, O_EXIT);     prog[49] = jal(0, 0);
    for (int i = 0; i < MEMW; i++) u_mem.mem[i] = '0;
    for (int i = 0; i < 50; i++) u_mem.mem[i] = prog[i];
  end

  function automatic u32 expect_word(int s, int k);
    int v = s + 100;
    case (k)
      0: return u32'(-7 * v);
      1: return u32'(-7);
      2: return u32'(v % 7);
      3: return u32'(v / 7);
      4: return 32'hFFFF_FFFF;
      5: return 32'hFFFF_FFFF;
      6: return u32'(v - 7);
      8: return 32'h5A;
      9: return 32'd55;
      10: return 32'd156;
      11: return u32'(-1);
      12: return u32'(-2);
      default: return '0;
    endcase
  endfunction

  // ---- monitors ----
  int retires = 0, replays = 0, full_events = 0, g_sent = 0, g_refused = 0, cyc = 0;
  int last_evt = -1, spacing_bad = 0;
  bit phase1 = 0, rand_ready = 0;
  int g_data_sum = 0;
  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (retire_valid && rst_n) retires <= retires + 1;
    if (replay_valid && rst_n) replays <= replays + 1;
    if (stack_full) full_events <= full_events + 1;
    if (phase1 && (retire_valid || replay_valid)) begin
      if (last_evt >= 0 && cyc - last_evt != C_SLOW) spacing_bad <= spacing_bad + 1;
      last_evt <= cyc;
    end
    if (g_valid && g_ready) begin
      g_sent <= g_sent + 1;
      g_data_sum <= g_data_sum + int'(g_pkt.data);
      if (g_pkt.addr != 32'h1230_0010 || g_pkt.be != 4'hF) begin
        failures++; $display("FAIL: remote store addr %h be %h", g_pkt.addr, g_pkt.be);
      end
    end
    if (g_valid && !g_ready) g_refused <= g_refused + 1;
    g_ready <= rand_ready ? 1'($urandom_range(0, 2) != 0) : 1'b1;
  end

  task automatic activate(u32 pc);
    @(negedge clk);
    x_valid = 1; x_wdata = pc;
    do @(posedge clk); while (!x_ready);
    @(negedge clk);
    x_valid = 0;
  endtask

  task automatic check_results(int nthreads);
    for (int s = 0; s < nthreads; s++)
      for (int k = 0; k <= 12; k++)
        if (k != 7)
          check(u_mem.mem[512 + s*16 + k] === expect_word(s, k),
                $sformatf("sid %0d word %0d = %h expected %h", s, k,
                          u_mem.mem[512 + s*16 + k], expect_word(s, k)));
  endtask

  initial begin
    int r0, p0, c0;
    x_valid = 0; x_wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // phase 1: one thread, timing
    phase1 = 1;
    activate(0);
    wait (active == '0);
    repeat (4) @(posedge clk);
    phase1 = 0;
    check(retires == 75, $sformatf("phase 1 retired %0d instructions, expected 75", retires));
    check(replays == 18, $sformatf("phase 1 divider passes replayed %0d, expected 18", replays));
    check(spacing_bad == 0, $sformatf("%0d events not %0d cycles apart", spacing_bad, C_SLOW));
    check(g_sent == 1, "phase 1 remote store count");
    check_results(1);
    // phase 2: six threads, four stack sections, refused remote stores
    for (int i = 512; i < 1024; i++) u_mem.mem[i] = '0;
    rand_ready = 1;
    r0 = retires; c0 = cyc;
    for (int t = 0; t < 6; t++) activate(0);
    wait (active == '0);
    repeat (4) @(posedge clk);
    check(retires - r0 == 6 * 75, $sformatf("phase 2 retired %0d", retires - r0));
    check(full_events > 0, "stack-full stall never happened");
    check(g_refused > 0, "remote store never refused");
    check(g_sent == 7, $sformatf("remote stores sent %0d, expected 7", g_sent));
    check(g_data_sum == 100 + (100+101+102+103+104+105), "remote store data");
    // six threads share 4 issue slots per macro-cycle: far less than 6x the
    // single-thread time
    check(cyc - c0 < 6 * 95 * 4 / 2, $sformatf("phase 2 took %0d cycles", cyc - c0));
    check_results(6);
    check(ovf == 0, "no thread overflow expected");
    $display("retires=%0d replays=%0d stack_full=%0d refused=%0d", retires, replays,
             full_events, g_refused);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
