// packet_demux_tb: a stream of PP packets with random proto values, some with no
// receiver, goes into the packet_demux while every output is randomly stalled.
// Checks that each packet comes out whole on the output its proto field
// names, in order, and that packets without a receiver are dropped.
`timescale 1ns/1ps
`include "tb_common.svh"
module packet_demux_tb;
  import inc_pkg::*;
  localparam int N = 3, PP = 60;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  `TB_WATCHDOG(50000)

  logic in_valid, in_ready;
  flit_t in_flit;
  logic [N-1:0] out_valid, out_ready;
  flit_t out_flit [N];
  packet_demux #(.N(N)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_flit, .out_valid, .out_ready, .out_flit);

  flit_t inq [$];
  flit_t exp_q [N][$];
  assign in_valid = inq.size() > 0;
  assign in_flit  = in_valid ? inq[0] : '0;
  always_ff @(posedge clk) for (int p = 0; p < N; p++) out_ready[p] <= ($urandom % 3) != 0;

  int got;
  always_ff @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) void'(inq.pop_front());
    for (int p = 0; p < N; p++) if (out_valid[p] && out_ready[p]) begin
      `CHECK(exp_q[p].size() > 0 && out_flit[p] == exp_q[p][0], $sformatf("flit on output %0d", p))
      if (exp_q[p].size() > 0) void'(exp_q[p].pop_front());
      got <= got + 1;
    end
  end

  initial begin
    int want;
    got = 0; want = 0;
    for (int q = 0; q < PP; q++) begin
      int n, f;
      pkt_hdr_t h;
      n = 1 + $urandom % 4;
      f = $urandom % (N + 1);
      h = make_hdr('0, '0, 1'b0, PROTO_ETH, 5'd0, 8'(q));
      h.proto = proto_e'(f);
      inq.push_back('{last: 1'b0, data: DATA_W'(h)});
      if (f < N) begin exp_q[f].push_back('{last: 1'b0, data: DATA_W'(h)}); want += n + 1; end
      for (int k = 0; k < n; k++) begin
        inq.push_back('{last: k == n - 1, data: 64'((q << 8) | k)});
        if (f < N) exp_q[f].push_back('{last: k == n - 1, data: 64'((q << 8) | k)});
      end
    end
    repeat (3) @(posedge clk); rst_n = 1;
    wait (inq.size() == 0);
    repeat (40) @(posedge clk);
    `CHECK(got == want, $sformatf("%0d of %0d flits delivered", got, want))
    for (int p = 0; p < N; p++) `CHECK(exp_q[p].size() == 0, "output drained")
    `TB_FINISH
  end
endmodule
