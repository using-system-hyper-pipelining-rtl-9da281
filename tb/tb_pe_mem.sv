// tb_pe_mem: checks the PE-RAM against a reference array: random byte-masked
// writes on port B, reads on both ports with one cycle of read latency.
module tb_pe_mem;
  localparam int W = 256;
  logic clk = 0;
  always #5 clk = ~clk;
  logic a_en, b_en, b_we;
  logic [7:0] a_addr, b_addr;
  logic [3:0] b_be;
  logic [31:0] b_wdata, a_rdata, b_rdata;
  logic [31:0] ref_mem [W];
  int checks = 0, failures = 0;

  pe_mem #(.MEM_WORDS(W)) dut (.clk, .a_en, .a_addr, .a_rdata, .b_en, .b_we, .b_be, .b_addr,
                               .b_wdata, .b_rdata);

  initial begin
    logic [31:0] ea, eb;
    a_en = 0; b_en = 0; b_we = 0; a_addr = 0; b_addr = 0; b_be = 0; b_wdata = 0;
    // fill through port B
    for (int i = 0; i < W; i++) begin
      @(negedge clk);
      b_en = 1; b_we = 1; b_be = 4'hF; b_addr = 8'(i); b_wdata = $urandom; ref_mem[i] = b_wdata;
    end
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      a_en = 1; a_addr = 8'($urandom);
      b_en = 1; b_we = 1'($urandom); b_addr = 8'($urandom); b_be = 4'($urandom);
      b_wdata = $urandom;
      ea = ref_mem[a_addr]; eb = ref_mem[b_addr];
      if (b_we) for (int i = 0; i < 4; i++) if (b_be[i]) ref_mem[b_addr][8*i +: 8] = b_wdata[8*i +: 8];
      @(posedge clk); #1;
      // data of the address presented in this cycle, one cycle later
      checks++;
      if (a_rdata !== ea && !(b_we && a_addr == b_addr)) begin
        failures++; $display("FAIL A addr %0d got %h exp %h", a_addr, a_rdata, ea);
      end
      if (!b_we) begin
        checks++;
        if (b_rdata !== eb) begin failures++; $display("FAIL B addr %0d", b_addr); end
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
