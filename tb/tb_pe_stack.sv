// tb_pe_stack: checks the PE-STACK memory against a reference array: random byte-masked
// writes and reads on its single port with one cycle of read latency.
module tb_pe_stack;
  localparam int W = 512;
  logic clk = 0;
  always #5 clk = ~clk;
  logic en, we;
  logic [8:0] addr;
  logic [3:0] be;
  logic [31:0] wdata, rdata;
  logic [31:0] ref_mem [W];
  int checks = 0, failures = 0;

  pe_stack #(.SECTIONS(8), .SECTION_WORDS(64)) dut (.clk, .en, .we, .be, .addr, .wdata, .rdata);

  initial begin
    logic [31:0] e;
    en = 0; we = 0; addr = 0; be = 0; wdata = 0;
    for (int i = 0; i < W; i++) begin
      @(negedge clk);
      en = 1; we = 1; be = 4'hF; addr = 9'(i); wdata = $urandom; ref_mem[i] = wdata;
    end
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      en = 1; we = 1'($urandom); addr = 9'($urandom); be = 4'($urandom); wdata = $urandom;
      e = ref_mem[addr];
      if (we) for (int i = 0; i < 4; i++) if (be[i]) ref_mem[addr][8*i +: 8] = wdata[8*i +: 8];
      @(posedge clk); #1;
      if (!we) begin
        checks++;
        if (rdata !== e) begin failures++; $display("FAIL addr %0d got %h exp %h", addr, rdata, e); end
      end
    end
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
