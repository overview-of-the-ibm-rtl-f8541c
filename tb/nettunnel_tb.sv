// nettunnel_tb: two NetTunnel units, each with a memory model, joined back
// to back as if by the network.  Checks a remote write, a remote read that
// returns the written value, reads in both directions at once (responses and
// requests sharing each outgoing port), and that a broadcast write leaves as
// a broadcast packet and is carried out at the receiver.
`timescale 1ns/1ps
`include "tb_common.svh"
module nettunnel_tb;
  import inc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  `TB_WATCHDOG(20000)

  coord_t pa, pb;
  assign pa = '{x: 5'd0, y: 5'd0, z: 5'd0};
  assign pb = '{x: 5'd1, y: 5'd0, z: 5'd0};
  logic cv [2], cr [2], rv [2];
  logic [1:0] op [2];
  coord_t dst [2];
  logic [31:0] addr [2];
  logic [63:0] wd [2], rd [2];
  logic ov [2], ordy [2];
  flit_t of [2];
  bus_req_t breq [2];
  bus_rsp_t brsp [2];
  int writes [2];
  logic [1:0] stall;

  for (genvar i = 0; i < 2; i++) begin : g
    nettunnel u (.clk, .rst_n, .my_pos(i == 0 ? pa : pb),
      .cmd_valid(cv[i]), .cmd_ready(cr[i]), .cmd_op(op[i]), .cmd_dst(dst[i]), .cmd_addr(addr[i]), .cmd_wdata(wd[i]),
      .rsp_valid(rv[i]), .rsp_data(rd[i]),
      .out_valid(ov[i]), .out_ready(ordy[i]), .out_flit(of[i]),
      .in_valid(ov[1-i]), .in_ready(ordy[1-i]), .in_flit(of[1-i]),
      .bus_req(breq[i]), .bus_rsp(brsp[i]));
    mem_model #(.WORDS(256), .LAT(2)) m (.clk, .rst_n, .req(breq[i]), .rsp(brsp[i]), .writes(writes[i]));
  end
  pkt_hdr_t h0;
  assign h0 = pkt_hdr_t'(of[0].data);
  assign stall = '0;

  int n_bc_pkts;
  logic [63:0] last_rsp [2];
  always_ff @(posedge clk) if (rst_n) for (int i = 0; i < 2; i++) begin
    if (rv[i]) last_rsp[i] <= rd[i];
  end
  always_ff @(posedge clk) if (rst_n && ov[0] && ordy[0] && !stall[0] && !g[0].u.own_m_q && !g[0].u.own_t_q &&
                               h0.bcast) n_bc_pkts <= n_bc_pkts + 1;

  task automatic cmd(int i, logic [1:0] o, coord_t d, logic [31:0] a, logic [63:0] w);
    @(negedge clk);
    cv[i] = 1; op[i] = o; dst[i] = d; addr[i] = a; wd[i] = w;
    @(posedge clk); while (!cr[i]) @(posedge clk);
    @(negedge clk); cv[i] = 0;
  endtask
  task automatic read(int i, coord_t d, logic [31:0] a, output logic [63:0] r);
    cmd(i, 2'd1, d, a, 0);
    while (!rv[i]) @(posedge clk);
    r = rd[i];
  endtask

  initial begin
    logic [63:0] r0, r1;
    for (int i = 0; i < 2; i++) begin cv[i] = 0; op[i] = 0; dst[i] = '0; addr[i] = 0; wd[i] = 0; end
    n_bc_pkts = 0;
    g[0].m.mem[5] = 64'h1111_2222;
    repeat (3) @(posedge clk); rst_n = 1;
    cmd(0, 2'd0, pb, 32'h40, 64'hCAFE_F00D);
    repeat (30) @(posedge clk);
    `CHECK(g[1].m.mem[8] == 64'hCAFE_F00D, "remote write")
    read(0, pb, 32'h40, r0);
    `CHECK(r0 == 64'hCAFE_F00D, "remote read returns the written value")
    fork
      read(0, pb, 32'h40, r0);
      read(1, pa, 32'h28, r1);
    join
    `CHECK(r0 == 64'hCAFE_F00D && r1 == 64'h1111_2222, "reads in both directions at once")
    cmd(0, 2'd2, pa, 32'h10, 64'hB0B0);
    repeat (30) @(posedge clk);
    `CHECK(n_bc_pkts == 1, "broadcast write sent as a broadcast packet")
    `CHECK(g[1].m.mem[2] == 64'hB0B0, "broadcast write carried out")
    `CHECK(writes[0] == 0 && writes[1] == 2, "write counts")
    `TB_FINISH
  end
endmodule
