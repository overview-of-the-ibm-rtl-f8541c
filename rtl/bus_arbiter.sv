// bus_arbiter: shares the node's one memory port among N bus masters of the
// FPGA logic (ring bus station, NetTunnel target, Postmaster and Internal
// Ethernet DMA engines).
//
// Every master uses the bus_req_t/bus_rsp_t protocol of inc_pkg: it holds
// req (with we, addr, wdata) until it sees ack, which carries read data.  The
// arbiter picks one requesting master in rotating order, forwards its request
// unchanged to the memory port and holds the choice until the memory acks;
// the ack is returned to that master only.  The paper says the node memory
// is reached from processor and FPGA alike; the policy is this design's.
module bus_arbiter
  import inc_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t m_req [N],
  output bus_rsp_t m_rsp [N],
  output bus_req_t s_req,
  input  bus_rsp_t s_rsp
);
  localparam int unsigned SW = (N > 1) ? $clog2(N) : 1;

  logic          busy_q;
  logic [SW-1:0] sel_q, rr_q, pick, cur;
  logic          any;

  always_comb begin
    int unsigned j;
    pick = rr_q;
    any  = 1'b0;
    for (int k = N - 1; k >= 0; k--) begin
      j = (int'(rr_q) + k) % N;  // below N
      if (m_req[j].req) begin
        pick = SW'(j);
        any  = 1'b1;
      end
    end
    cur   = busy_q ? sel_q : pick;
    s_req = (busy_q || any) ? m_req[cur] : '0;
    for (int k = 0; k < N; k++) begin
      m_rsp[k].rdata = s_rsp.rdata;
      m_rsp[k].ack   = s_rsp.ack && (busy_q || any) && int'(cur) == k;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q <= 1'b0;
      sel_q  <= '0;
      rr_q   <= '0;
    end else if (s_req.req) begin
      if (s_rsp.ack) begin
        busy_q <= 1'b0;
        rr_q   <= (cur == SW'(N - 1)) ? '0 : cur + 1'b1;
      end else begin
        busy_q <= 1'b1;
        sel_q  <= cur;
      end
    end
  end

  hold_req: assert property (@(posedge clk) disable iff (!rst_n) busy_q |-> m_req[sel_q].req)
    else $error("bus_arbiter: master dropped req before ack");
endmodule
