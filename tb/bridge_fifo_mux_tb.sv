// bridge_fifo_mux_tb: 5 inputs each send 12 packets of random length with random gaps
// into the bridge_fifo_mux, and the output is randomly stalled.  Checks that every
// packet leaves whole (no interleaving), that its header carries the input
// number in the chan field, that each input's packets keep their order, and
// that all packets arrive.
`timescale 1ns/1ps
`include "tb_common.svh"
module bridge_fifo_mux_tb;
  import inc_pkg::*;
  localparam int N = 5, K = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  `TB_WATCHDOG(50000)

  logic [N-1:0] in_valid, in_ready;
  flit_t in_flit [N];
  logic out_valid, out_ready;
  flit_t out_flit;
  bridge_fifo_mux #(.N(N)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_flit, .out_valid, .out_ready, .out_flit);

  flit_t inq [N][$];
  logic [N-1:0] gap;
  always_comb for (int p = 0; p < N; p++) begin
    in_valid[p] = inq[p].size() > 0 && !gap[p];
    in_flit[p]  = inq[p].size() > 0 ? inq[p][0] : '0;
  end
  always_ff @(posedge clk) begin
    out_ready <= ($urandom % 4) != 0;
    for (int p = 0; p < N; p++) gap[p] <= ($urandom % 5) == 0;
  end

  int cur_src, cur_pkt, next_pkt [N], got;
  logic in_pkt;
  always_ff @(posedge clk) if (rst_n) begin
    for (int p = 0; p < N; p++) if (in_valid[p] && in_ready[p]) void'(inq[p].pop_front());
    if (out_valid && out_ready) begin
      if (!in_pkt) begin
        pkt_hdr_t h;
        h = pkt_hdr_t'(out_flit.data);
        cur_src = int'(h.chan);
        cur_pkt = int'(h.len);  // the tb puts the packet number in len
        `CHECK(cur_src < N, "field in range")
        `CHECK(cur_src < N && cur_pkt == next_pkt[cur_src], "packet order per input")
        if (cur_src < N) next_pkt[cur_src] = cur_pkt + 1;
        in_pkt <= 1'b1;
      end else begin
        `CHECK(out_flit.data[31:16] == 16'(cur_src) && out_flit.data[15:8] == 8'(cur_pkt),
               "flit belongs to the packet in progress")
        if (out_flit.last) begin in_pkt <= 1'b0; got <= got + 1; end
      end
    end
  end

  initial begin
    in_pkt = 0; got = 0;
    for (int p = 0; p < N; p++) next_pkt[p] = 0;
    for (int p = 0; p < N; p++)
      for (int q = 0; q < K; q++) begin
        int n;
        pkt_hdr_t h;
        n = 1 + $urandom % 5;
        h = make_hdr('0, '0, 1'b0, PROTO_ETH, 5'd0, 8'(q));
        h.chan = '1 ^ h.chan;   // wrong value, must be overwritten
        inq[p].push_back('{last: 1'b0, data: DATA_W'(h)});
        for (int k = 0; k < n; k++) inq[p].push_back('{last: k == n - 1, data: 64'((p << 16) | (q << 8) | k)});
      end
    repeat (3) @(posedge clk); rst_n = 1;
    wait (got == N * K);
    repeat (5) @(posedge clk);
    `CHECK(got == N * K, "all packets out")
    `TB_FINISH
  end
endmodule
