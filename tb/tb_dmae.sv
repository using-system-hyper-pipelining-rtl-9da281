// tb_dmae: programs the DMA engine through its SFRs and checks a local copy
// inside a model memory (with a port-B grant that is sometimes withheld),
// a transfer to another cluster as write packets (with back-pressure), that
// programming is ignored while the engine is busy, and the SFR read-back.
module tb_dmae;
  import hpra_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic s_valid, s_we, x_valid, x_ready, m_req, m_we, m_gnt, g_valid, g_ready, busy;
  logic [5:0] s_off, x_off;
  logic [31:0] s_wdata, s_rdata, x_wdata, m_wdata, m_rdata;
  logic [7:0] m_addr;
  pkt_t g_pkt;
  logic [31:0] mem [256];
  int checks = 0, failures = 0, pkts = 0, denied = 0;
  pkt_t got [$];

  dmae #(.MEM_WORDS(256), .MY_COL(4'd2), .MY_ROW(4'd1)) dut (.clk, .rst_n, .s_valid, .s_we,
    .s_off, .s_wdata, .s_rdata, .x_valid, .x_off, .x_wdata, .x_ready, .m_req, .m_we, .m_addr,
    .m_wdata, .m_gnt, .m_rdata, .g_valid, .g_pkt, .g_ready, .busy);

  // model of MEM port B and of the write arbiter
  always @(posedge clk) begin
    if (m_req && m_gnt) begin
      if (m_we) mem[m_addr] <= m_wdata;
      else m_rdata <= mem[m_addr];
    end
    if (m_req && !m_gnt) denied++;
    if (g_valid && g_ready) got.push_back(g_pkt);
  end
  always @(negedge clk) begin
    m_gnt   = 1'($urandom_range(0, 3) != 0);
    g_ready = 1'($urandom_range(0, 2) != 0);
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic sfr_w(sfr_e off, logic [31:0] d);
    @(negedge clk); s_valid = 1; s_we = 1; s_off = off; s_wdata = d;
    @(posedge clk); #1 s_valid = 0;
  endtask
  task automatic sfr_r(sfr_e off, output logic [31:0] d);
    @(negedge clk); s_valid = 1; s_we = 0; s_off = off;
    @(posedge clk); #1 s_valid = 0; d = s_rdata;
  endtask

  initial begin
    logic [31:0] r;
    int t0;
    s_valid = 0; s_we = 0; s_off = 0; s_wdata = 0; x_valid = 0; x_off = 0; x_wdata = 0;
    for (int i = 0; i < 256; i++) mem[i] = 32'hA000_0000 + 32'(i);
    repeat (2) @(posedge clk);
    rst_n = 1;
    // local copy: words 16..25 -> 100..109 (target given as local byte address)
    sfr_w(SFR_DMASA, 16 * 4);
    sfr_w(SFR_DMAL, 10);
    sfr_w(SFR_DMATA, 100 * 4);
    check(busy, "busy after DMATA");
    sfr_w(SFR_DMAL, 99);              // ignored while busy
    sfr_r(SFR_DMABUSY, r); check(r == 1, "DMABUSY reads 1");
    wait (!busy);
    for (int i = 0; i < 10; i++)
      check(mem[100 + i] == 32'hA000_0000 + 32'(16 + i), $sformatf("local copy word %0d", i));
    check(mem[110] == 32'hA000_0000 + 110, "no word past the length");
    check(denied > 0, "port B was sometimes not granted");
    // own cluster given as a global address is a local copy as well
    sfr_w(SFR_DMASA, 0);
    sfr_w(SFR_DMAL, 2);
    sfr_w(SFR_DMATA, global_addr(4'd2, 4'd1, 16'd200 * 4));
    wait (!busy);
    check(mem[200] == 32'hA000_0000 && mem[201] == 32'hA000_0001, "own-cluster global target");
    check(got.size() == 0, "no packets for local copies");
    // remote transfer: 6 words to cluster (3,3), word offset 0x40
    sfr_w(SFR_DMASA, 32 * 4);
    sfr_w(SFR_DMAL, 6);
    t0 = $time;
    sfr_w(SFR_DMATA, global_addr(4'd3, 4'd3, 16'h0100));
    wait (!busy);
    check(got.size() == 6, $sformatf("6 packets, got %0d", got.size()));
    foreach (got[i])
      check(got[i].addr == global_addr(4'd3, 4'd3, 16'h0100 + 16'(4 * i)) &&
            got[i].data == 32'hA000_0000 + 32'(32 + i) && got[i].be == 4'hF,
            $sformatf("packet %0d", i));
    sfr_r(SFR_DMASA, r); check(r == 38 * 4, "DMASA advanced");
    sfr_r(SFR_DMAL, r);  check(r == 0, "DMAL counted down");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
