// di_arbiter: the data-in (DI) arbiter of a routing element.
//
// Packets arrive from the eight neighbouring clusters, one link per
// direction (valid/ready handshake, a transfer when both are high). Each
// cycle the arbiter grants one requesting link, in round-robin order after
// the last granted one, and passes its packet on to the DI-FIFO; the other
// links wait with ready low. The DI-FIFO's ready is the arbiter's out_ready.
//
// The paper names this block only; round-robin, one packet per cycle and
// the valid/ready links are this design's choices.
module di_arbiter
  import hpra_pkg::*;
#(
  parameter int unsigned N = 8,
  localparam int unsigned IW = $clog2(N)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] in_valid,
  input  pkt_t         in_pkt [N],
  output logic [N-1:0] in_ready,
  output logic         out_valid,
  output pkt_t         out_pkt,
  input  logic         out_ready
);
  logic [IW-1:0] last, sel;

  always_comb begin
    logic [IW-1:0] cand;
    out_valid = 1'b0;
    sel       = '0;
    for (int k = N; k >= 1; k--) begin
      cand = IW'((32'(last) + k) % N);
      if (in_valid[cand]) begin
        out_valid = 1'b1;
        sel       = cand;
      end
    end
    out_pkt  = in_pkt[sel];
    in_ready = '0;
    if (out_valid && out_ready) in_ready[sel] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last <= IW'(N - 1);
    else if (out_valid && out_ready) last <= sel;
  end
endmodule
