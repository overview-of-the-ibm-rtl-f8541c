// bridge_fifo_mux: merges up to 32 Bridge FIFO transmit units onto the one
// Bridge FIFO input of the packet mux.
//
// Input k is channel k.  Whole packets are passed one at a time, chosen in
// rotating order when no packet is in progress; the header flit leaves with
// its 5-bit channel field set to k so that the receiving node's
// bridge_fifo_demux can find the matching receive unit.  Flits pass
// combinationally on valid/ready.  The limit of 32 channels per mux follows
// the paper; the arbitration policy is this design's.
module bridge_fifo_mux
  import inc_pkg::*;
#(
  parameter int unsigned N = 2   // 1..32 channels
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] in_valid,
  output logic [N-1:0] in_ready,
  input  flit_t        in_flit [N],
  output logic         out_valid,
  input  logic         out_ready,
  output flit_t        out_flit
);
  localparam int unsigned SW = (N > 1) ? $clog2(N) : 1;

  logic          locked_q;
  logic [SW-1:0] sel_q, rr_q, pick, cur;
  logic          any_valid;

  // First valid input at or after the round-robin pointer.
  always_comb begin
    int unsigned j;
    pick      = rr_q;
    any_valid = 1'b0;
    for (int k = N - 1; k >= 0; k--) begin
      j = (int'(rr_q) + k) % N;  // below N
      if (in_valid[j]) begin
        pick      = SW'(j);
        any_valid = 1'b1;
      end
    end
  end

  assign cur = locked_q ? sel_q : pick;

  always_comb begin
    pkt_hdr_t h;
    h         = pkt_hdr_t'(in_flit[cur].data);
    out_valid = (locked_q || any_valid) && in_valid[cur];
    out_flit  = in_flit[cur];
    if (!locked_q) begin
      h.chan = 5'(cur);
      out_flit.data = DATA_W'(h);
    end
  end

  always_comb begin
    in_ready      = '0;
    in_ready[cur] = out_ready && (locked_q || any_valid);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      locked_q <= 1'b0;
      sel_q    <= '0;
      rr_q     <= '0;
    end else if (out_valid && out_ready) begin
      if (out_flit.last) begin
        locked_q <= 1'b0;
        rr_q     <= (cur == SW'(N - 1)) ? '0 : cur + 1'b1;
      end else begin
        locked_q <= 1'b1;
        sel_q    <= cur;
      end
    end
  end

  initial assert (N >= 1 && N <= 32) else $fatal(1, "bridge_fifo_mux: 1..32 channels");
  in_range: assert property (@(posedge clk) disable iff (!rst_n) int'(cur) < N)
    else $error("bridge_fifo_mux: select out of range");
endmodule
