// pe_stack: the PE-STACK, one stack memory shared by all threads of a PE.
//
// Giving every thread its own stack range would cost D times the stack
// memory, so the threads share this RAM dynamically: it is cut into SECTIONS
// sections of SECTION_WORDS words each, and the stack TLB hands sections to
// threads on demand. This module is only the storage: a single-port RAM with
// byte enables and a synchronous read (data in the cycle after the address).
// Its address is {section, word in section} as produced by the TLB.
//
// The paper gives neither the size nor the section size; 8 sections of 64
// words (2 KiB) are this design's choice.
module pe_stack #(
  parameter int unsigned SECTIONS      = 8,
  parameter int unsigned SECTION_WORDS = 64,
  localparam int unsigned AW = $clog2(SECTIONS * SECTION_WORDS)
) (
  input  logic          clk,
  input  logic          en,
  input  logic          we,
  input  logic [3:0]    be,
  input  logic [AW-1:0] addr,
  input  logic [31:0]   wdata,
  output logic [31:0]   rdata
);
  logic [31:0] mem [SECTIONS * SECTION_WORDS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) begin
        for (int i = 0; i < 4; i++)
          if (be[i]) mem[addr][8*i +: 8] <= wdata[8*i +: 8];
      end else begin
        rdata <= mem[addr];
      end
    end
  end
endmodule
