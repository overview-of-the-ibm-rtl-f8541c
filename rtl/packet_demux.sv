// packet_demux: hands each packet that the router delivers to this node to
// the receiver of its protocol.
//
// The header flit's protocol field (proto_e in inc_pkg) selects output k:
// 0 Internal Ethernet, 1 Postmaster, 2 NetTunnel, 3 Bridge FIFO.  The choice
// is held until the flit marked last has passed.  Flits pass combinationally
// on valid/ready; a receiver that is not ready stalls the router's local
// output.  A protocol number with no output (k >= N) is drained and dropped.
// Following the paper, the demux separates the protocols; the field and the
// stalling behaviour are this design's.
module packet_demux
  import inc_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  flit_t        in_flit,
  output logic [N-1:0] out_valid,
  input  logic [N-1:0] out_ready,
  output flit_t        out_flit [N]
);
  localparam int unsigned SW = 2;

  logic          locked_q;
  logic [SW-1:0] sel_q, cur;
  pkt_hdr_t      h;
  logic          hit;

  always_comb begin
    h   = pkt_hdr_t'(in_flit.data);
    cur = locked_q ? sel_q : SW'(h.proto);
    hit = int'(cur) < N;
    out_valid = '0;
    for (int k = 0; k < N; k++) begin
      out_flit[k] = in_flit;
      if (hit && int'(cur) == k) out_valid[k] = in_valid;
    end
    // A packet with no receiver is drained and dropped.
    in_ready = hit ? out_ready[32'(cur) % N] : 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked_q <= 1'b0;
      sel_q    <= '0;
    end else if (in_valid && in_ready) begin
      locked_q <= !in_flit.last;
      sel_q    <= cur;
    end
  end
endmodule
