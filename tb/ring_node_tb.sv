// ring_node_tb: a ring of five stations, each with its own memory model.
// Stations 0 and 2 act as initiators at the same time: each writes random
// words to random stations, reads them back through the ring and compares,
// and station 0 sends broadcast writes that must reach every memory exactly
// once (the write counters tell).  Passing traffic, local bus work and
// responses therefore meet on the same links.
`timescale 1ns/1ps
`include "tb_common.svh"
module ring_node_tb;
  import inc_pkg::*;
  localparam int N = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  `TB_WATCHDOG(200000)

  ring_msg_t r_out [N];
  logic      r_in_ready [N];
  logic      cmd_valid [N], cmd_ready [N], rsp_valid [N];
  ring_op_e  cmd_op [N];
  logic [4:0]  cmd_dst [N];
  logic [31:0] cmd_addr [N];
  logic [63:0] cmd_wdata [N], rsp_data [N];
  bus_req_t breq [N];
  bus_rsp_t brsp [N];
  int       writes [N];

  for (genvar i = 0; i < N; i++) begin : g
    ring_node #(.NODES(N)) u (
      .clk, .rst_n, .my_id(5'(i)),
      .ring_in(r_out[(i + N - 1) % N]), .ring_in_ready(r_in_ready[i]),
      .ring_out(r_out[i]), .ring_out_ready(r_in_ready[(i + 1) % N]),
      .cmd_valid(cmd_valid[i]), .cmd_ready(cmd_ready[i]), .cmd_op(cmd_op[i]),
      .cmd_dst(cmd_dst[i]), .cmd_addr(cmd_addr[i]), .cmd_wdata(cmd_wdata[i]),
      .rsp_valid(rsp_valid[i]), .rsp_data(rsp_data[i]),
      .bus_req(breq[i]), .bus_rsp(brsp[i]));
    mem_model #(.WORDS(64), .LAT(1 + i % 3)) m (.clk, .rst_n, .req(breq[i]), .rsp(brsp[i]), .writes(writes[i]));
    initial begin cmd_valid[i] = 0; cmd_op[i] = RING_WRITE; cmd_dst[i] = 0; cmd_addr[i] = 0; cmd_wdata[i] = 0; end
  end

  task automatic issue(int s, ring_op_e op, int dst, logic [31:0] a, logic [63:0] d);
    @(negedge clk);
    cmd_valid[s] = 1; cmd_op[s] = op; cmd_dst[s] = 5'(dst); cmd_addr[s] = a; cmd_wdata[s] = d;
    @(posedge clk);
    while (!cmd_ready[s]) @(posedge clk);
    @(negedge clk);
    cmd_valid[s] = 0;
  endtask
  task automatic read(int s, int dst, logic [31:0] a, output logic [63:0] d);
    issue(s, RING_READ, dst, a, '0);
    @(posedge clk);
    while (!rsp_valid[s]) @(posedge clk);
    d = rsp_data[s];
  endtask

  // station 0 uses word addresses 0..15, station 2 uses 16..31, broadcasts 32..47
  task automatic initiator(int s, int base);
    logic [63:0] d, got;
    int dst;
    logic [31:0] a;
    for (int k = 0; k < 12; k++) begin
      dst = $urandom_range(N - 1);
      a   = 32'((base + k) * 8);
      d   = {$urandom, $urandom};
      issue(s, RING_WRITE, dst, a, d);
      read(s, dst, a, got);
      `CHECK(got == d, $sformatf("station %0d read back from %0d", s, dst))
    end
  endtask

  logic [63:0] bc [4];
  int w0 [N];
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    fork
      initiator(0, 0);
      initiator(2, 16);
    join
    repeat (50) @(posedge clk);
    for (int i = 0; i < N; i++) w0[i] = writes[i];
    for (int b = 0; b < 4; b++) begin
      bc[b] = {$urandom, $urandom};
      issue(0, RING_BCAST, 0, 32'((32 + b) * 8), bc[b]);
    end
    repeat (100) @(posedge clk);
    for (int i = 0; i < N; i++) begin
      `CHECK(writes[i] - w0[i] == 4, $sformatf("station %0d got %0d broadcast writes", i, writes[i] - w0[i]))
      for (int b = 0; b < 4; b++) begin
        logic [63:0] v;
        case (i)
          0: v = g[0].m.mem[32 + b];
          1: v = g[1].m.mem[32 + b];
          2: v = g[2].m.mem[32 + b];
          3: v = g[3].m.mem[32 + b];
          default: v = g[4].m.mem[32 + b];
        endcase
        `CHECK(v == bc[b], $sformatf("broadcast %0d at station %0d", b, i))
      end
    end
    `TB_FINISH
  end
endmodule
