// pe_mem: the PE-RAM ("MEM" in the cluster figure).
//
// One RAM per programming element holds the instructions and the data of all
// threads of that PE; every thread can execute any code in it and read or
// write all of it. Other PEs and the DMA engine write into it through the
// routing element.
//
// Port A is a read-only port used by the core's instruction fetch. Port B is a
// read/write port with byte enables shared (through an arbiter in the PE) by
// the core's loads and stores, the DMA engine and writes arriving from the
// routing element. Both ports read synchronously: the word addressed in one
// cycle is on rdata in the next cycle. A write and a read on port B in the
// same cycle are not issued (one request per cycle).
//
// The paper gives no RAM size; MEM_WORDS = 4096 (16 KiB) is this design's
// choice. Two ports fit one Virtex-6 block RAM port pair.
module pe_mem #(
  parameter int unsigned MEM_WORDS = 4096,
  localparam int unsigned AW = $clog2(MEM_WORDS)
) (
  input  logic          clk,
  // port A: instruction fetch
  input  logic          a_en,
  input  logic [AW-1:0] a_addr,
  output logic [31:0]   a_rdata,
  // port B: data
  input  logic          b_en,
  input  logic          b_we,
  input  logic [3:0]    b_be,
  input  logic [AW-1:0] b_addr,
  input  logic [31:0]   b_wdata,
  output logic [31:0]   b_rdata
);
  logic [31:0] mem [MEM_WORDS];

  always_ff @(posedge clk) begin
    if (a_en) a_rdata <= mem[a_addr];
  end

  always_ff @(posedge clk) begin
    if (b_en) begin
      if (b_we) begin
        for (int i = 0; i < 4; i++)
          if (b_be[i]) mem[b_addr][8*i +: 8] <= b_wdata[8*i +: 8];
      end else begin
        b_rdata <= mem[b_addr];
      end
    end
  end
endmodule
