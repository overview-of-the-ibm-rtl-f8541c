// packet_router_tb: a router at (4,1,1) of an 8x3x3 system.  Checks the
// minimum-hop output choice (single-span for 1-2 hops, multi-span for 3),
// delivery to the local port, the adaptive choice of a free productive link
// when the first is busy, the broadcast forwarding rules from the local port
// and from X and Z links, and that packets sharing an output arrive whole.
`timescale 1ns/1ps
`include "tb_common.svh"
module packet_router_tb;
  import inc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  `TB_WATCHDOG(20000)

  logic [NPORTS-1:0] in_valid, in_ready, out_valid, out_ready, hold;
  flit_t in_flit [NPORTS];
  flit_t out_flit [NPORTS];
  logic ev_detour, ev_bcast, ev_multi;
  int n_detour = 0, n_bcast = 0, n_multi = 0;
  coord_t me;
  assign me = '{x: 5'd4, y: 5'd1, z: 5'd1};

  packet_router #(.SYS_X(8), .SYS_Y(3), .SYS_Z(3)) dut (.clk, .rst_n, .my_pos(me),
    .in_valid, .in_ready, .in_flit, .out_valid, .out_ready, .out_flit, .ev_detour, .ev_bcast, .ev_multi);

  flit_t inq  [NPORTS][$];
  flit_t outq [NPORTS][$];
  always_comb for (int p = 0; p < NPORTS; p++) begin
    in_valid[p] = inq[p].size() > 0;
    in_flit[p]  = in_valid[p] ? inq[p][0] : '0;
  end
  assign out_ready = ~hold;
  always_ff @(posedge clk) if (rst_n) begin
    for (int p = 0; p < NPORTS; p++) begin
      if (in_valid[p] && in_ready[p]) void'(inq[p].pop_front());
      if (out_valid[p] && out_ready[p]) outq[p].push_back(out_flit[p]);
    end
    n_detour <= n_detour + int'(ev_detour);
    n_bcast  <= n_bcast + int'(ev_bcast);
    n_multi  <= n_multi + int'(ev_multi);
  end

  task automatic inject(int port, int x, int y, int z, bit bc, int n, int tag);
    pkt_hdr_t h;
    h = make_hdr('{x: 5'(x), y: 5'(y), z: 5'(z)}, '0, bc, PROTO_BRIDGE, 5'd0, 8'(n));
    inq[port].push_back('{last: 1'b0, data: DATA_W'(h)});
    for (int k = 0; k < n; k++) inq[port].push_back('{last: k == n - 1, data: 64'(tag * 256 + k)});
  endtask

  // Packets (whole, in order, with the expected tag) seen at each port.
  function automatic int npk(int port);
    int c = 0;
    foreach (outq[port][i]) if (outq[port][i].last) c++;
    return c;
  endfunction
  function automatic bit whole(int port, int tag, int n);
    if (outq[port].size() < n + 1) return 0;
    for (int k = 0; k < n; k++)
      if (outq[port][k+1].data != 64'(tag * 256 + k) || outq[port][k+1].last != (k == n - 1)) return 0;
    return 1;
  endfunction
  task automatic settle(); repeat (30) @(posedge clk); endtask
  task automatic clear(); for (int p = 0; p < NPORTS; p++) outq[p].delete(); endtask
  task automatic expect_only(logic [NPORTS-1:0] m, int tag, int n, string what);
    for (int p = 0; p < NPORTS; p++)
      if (m[p]) `CHECK(npk(p) == 1 && whole(p, tag, n), $sformatf("%s: packet on port %0d", what, p))
      else      `CHECK(npk(p) == 0, $sformatf("%s: nothing on port %0d", what, p))
  endtask

  initial begin
    hold = '0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    inject(P_LOCAL, 7, 1, 1, 0, 3, 1); settle(); expect_only(13'(1 << P_MXP), 1, 3, "3 hops +X uses multi-span"); clear();
    `CHECK(n_multi == 1, "multi-span event")
    inject(P_LOCAL, 5, 1, 1, 0, 2, 2); settle(); expect_only(13'(1 << P_XP), 2, 2, "1 hop +X"); clear();
    inject(P_LOCAL, 6, 1, 1, 0, 1, 12); settle(); expect_only(13'(1 << P_XP), 12, 1, "2 hops +X single-span"); clear();
    inject(P_XM, 4, 1, 1, 0, 4, 3); settle(); expect_only(13'(1 << P_LOCAL), 3, 4, "own address to local"); clear();
    inject(P_YP, 1, 1, 1, 0, 2, 4); settle(); expect_only(13'(1 << P_MXM), 4, 2, "3 hops -X"); clear();
    inject(P_LOCAL, 4, 0, 0, 0, 2, 5); settle(); expect_only(13'(1 << P_YM), 5, 2, "lowest free of -Y/-Z"); clear();
    // adaptive choice: +Y busy, second packet takes -Z
    hold[P_YP] = 1'b1;
    inject(P_ZP, 4, 2, 1, 0, 3, 6); settle();
    inject(P_XP, 4, 2, 0, 0, 2, 7); settle();
    `CHECK(npk(P_ZM) == 1 && whole(P_ZM, 7, 2), "detour to free productive link -Z")
    `CHECK(npk(P_YP) == 0, "+Y held")
    `CHECK(n_detour == 1, "detour event counted")
    hold[P_YP] = 1'b0; settle();
    `CHECK(npk(P_YP) == 1 && whole(P_YP, 6, 3), "held packet delivered after release"); clear();
    // broadcasts
    inject(P_LOCAL, 0, 0, 0, 1, 2, 8); settle();
    expect_only(13'h7E, 8, 2, "broadcast from source: all six single-span"); clear();
    inject(P_XM, 0, 0, 0, 1, 2, 9); settle();
    expect_only(13'((1 << P_XP) | (1 << P_YP) | (1 << P_YM) | (1 << P_ZP) | (1 << P_ZM) | 1), 9, 2,
                "broadcast arriving on -X link"); clear();
    inject(P_YM, 0, 0, 0, 1, 1, 13); settle();
    expect_only(13'((1 << P_YP) | (1 << P_ZP) | (1 << P_ZM) | 1), 13, 1, "broadcast arriving on -Y link"); clear();
    inject(P_ZP, 0, 0, 0, 1, 1, 10); settle();
    expect_only(13'((1 << P_ZM) | 1), 10, 1, "broadcast arriving on +Z link"); clear();
    `CHECK(n_bcast == 4, "broadcast events")
    // two packets for one output: both whole, one after the other
    inject(P_XM, 4, 1, 1, 0, 6, 20); inject(P_YM, 4, 1, 1, 0, 6, 21); settle();
    `CHECK(npk(P_LOCAL) == 2, "two packets to local")
    begin
      bit ok;
      int t0;
      ok = 1;
      t0 = int'(outq[P_LOCAL][1].data[15:8]);
      for (int k = 0; k < 6; k++) if (outq[P_LOCAL][k+1].data[15:8] != 8'(t0)) ok = 0;
      for (int k = 0; k < 6; k++) if (outq[P_LOCAL][k+8].data[15:8] == 8'(t0)) ok = 0;
      `CHECK(ok, "packets not interleaved")
    end
    `TB_FINISH
  end
endmodule
