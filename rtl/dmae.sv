// dmae: the direct memory access engine (DMAE) of a PE.
//
// Three SFRs program a transfer: DMASA holds the source byte address in the
// PE's own MEM, DMAL the length in 32-bit words, and writing the target byte
// address to DMATA starts the transfer. While a transfer runs the engine
// ignores further writes to its SFRs (it "can only be programmed when not
// active"); DMABUSY reads 1 meanwhile. The target may be this PE's MEM (a
// local address, or a global address of the own cluster) or any other
// cluster; there the words travel as write packets through the routing
// element, so a stream of data can run through the array without the
// threads' involvement.
//
// Each word takes a read of MEM port B (granted by the PE only when no
// thread instruction uses the port), one cycle for the data, and then either
// a write of port B or one packet accepted by the write arbiter.
//
// SFR names and function follow the paper; the word-count unit of DMAL, the
// address formats and the one-word-at-a-time sequence are this design's
// choices. SFR reads return data in the cycle after the request.
module dmae
  import hpra_pkg::*;
#(
  parameter int unsigned MEM_WORDS = 4096,
  parameter logic [3:0]  MY_COL    = 4'd1,
  parameter logic [3:0]  MY_ROW    = 4'd1,
  localparam int unsigned AW = $clog2(MEM_WORDS)
) (
  input  logic          clk,
  input  logic          rst_n,
  // SFR access by a thread
  input  logic          s_valid,
  input  logic          s_we,
  input  logic [5:0]    s_off,
  input  logic [31:0]   s_wdata,
  output logic [31:0]   s_rdata,
  // SFR write from the routing element
  input  logic          x_valid,
  input  logic [5:0]    x_off,
  input  logic [31:0]   x_wdata,
  output logic          x_ready,
  // MEM port B
  output logic          m_req,
  output logic          m_we,
  output logic [AW-1:0] m_addr,
  output logic [31:0]   m_wdata,
  input  logic          m_gnt,
  input  logic [31:0]   m_rdata,
  // writes to other clusters
  output logic          g_valid,
  output pkt_t          g_pkt,
  input  logic          g_ready,
  output logic          busy
);
  typedef enum logic [1:0] {IDLE, READ, WAIT, WRITE} state_e;
  state_e      state;
  logic [31:0] sa, ta, len, data;
  logic        tgt_local, w_en, step;
  logic [5:0]  w_off;
  logic [31:0] w_data;

  assign busy      = (state != IDLE);
  assign x_ready   = !s_valid;
  assign w_en      = (s_valid && s_we) || (x_valid && x_ready);
  assign w_off     = (s_valid && s_we) ? s_off : x_off;
  assign w_data    = (s_valid && s_we) ? s_wdata : x_wdata;
  assign tgt_local = addr_class(ta) == AC_LOCAL ||
                     (addr_class(ta) == AC_GLOBAL && addr_col(ta) == MY_COL && addr_row(ta) == MY_ROW);

  always_comb begin
    m_req = 1'b0; m_we = 1'b0; m_addr = sa[AW+1:2]; m_wdata = data;
    g_valid = 1'b0;
    g_pkt   = '{addr: {ta[31:2], 2'b00}, data: data, be: 4'hF};
    step    = 1'b0;
    case (state)
      READ:  m_req = 1'b1;
      WRITE: begin
        if (tgt_local) begin
          m_req = 1'b1; m_we = 1'b1; m_addr = ta[AW+1:2];
          step  = m_gnt;
        end else begin
          g_valid = 1'b1;
          step    = g_ready;
        end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; sa <= '0; ta <= '0; len <= '0; data <= '0; s_rdata <= '0;
    end else begin
      case (state)
        IDLE: if (w_en) begin
          case (w_off)
            SFR_DMASA: sa  <= w_data;
            SFR_DMAL:  len <= w_data;
            SFR_DMATA: begin ta <= w_data; if (len != 0) state <= READ; end
            default: ;
          endcase
        end
        READ:  if (m_gnt) state <= WAIT;
        WAIT:  begin data <= m_rdata; state <= WRITE; end
        WRITE: if (step) begin
          sa  <= sa + 32'd4;
          ta  <= ta + 32'd4;
          len <= len - 1;
          state <= (len == 1) ? IDLE : READ;
        end
      endcase
      if (s_valid && !s_we) begin
        case (s_off)
          SFR_DMASA:   s_rdata <= sa;
          SFR_DMAL:    s_rdata <= len;
          SFR_DMATA:   s_rdata <= ta;
          SFR_DMABUSY: s_rdata <= 32'(busy);
          default:     s_rdata <= '0;
        endcase
      end
    end
  end
endmodule
