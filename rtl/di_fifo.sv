// di_fifo: the data-in FIFO of a routing element.
//
// A synchronous first-in first-out buffer of DEPTH packets between the DI
// arbiter and the split into local delivery and forwarding. Push when
// in_valid and in_ready (not full); pop when out_valid and out_ready. The
// head packet is presented combinationally (first-word fall-through), so a
// packet written in one cycle can leave in the next.
//
// The paper names this block only; DEPTH = 8 is this design's choice.
module di_fifo
  import hpra_pkg::*;
#(
  parameter int unsigned DEPTH = 8,
  localparam int unsigned PW = $clog2(DEPTH)
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  pkt_t  in_pkt,
  output logic  in_ready,
  output logic  out_valid,
  output pkt_t  out_pkt,
  input  logic  out_ready,
  output logic [PW:0] level
);
  pkt_t        buffer [DEPTH];
  logic [PW-1:0] rp, wp;
  logic        push, pop;

  assign in_ready  = (level != (PW+1)'(DEPTH));
  assign out_valid = (level != '0);
  assign out_pkt   = buffer[rp];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; wp <= '0; level <= '0;
    end else begin
      if (push) wp <= (32'(wp) == DEPTH - 1) ? '0 : wp + 1'b1;
      if (pop)  rp <= (32'(rp) == DEPTH - 1) ? '0 : rp + 1'b1;
      level <= level + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  always_ff @(posedge clk) if (push) buffer[wp] <= in_pkt;

  assert property (@(posedge clk) disable iff (!rst_n) 32'(level) <= DEPTH);
endmodule
