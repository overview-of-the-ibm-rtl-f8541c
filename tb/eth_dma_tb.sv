// eth_dma_tb: the Internal Ethernet device with a memory model.  Transmit:
// a descriptor handed over by setting OWN causes the frame to be read from
// memory and sent to the descriptor's node, after which OWN is clear; two
// descriptors are served in ring order.  Receive: a frame is written into
// the free buffer, its descriptor gets DONE, length and source, and the
// interrupt rises and clears; a frame that finds no free buffer is dropped.
`timescale 1ns/1ps
`include "tb_common.svh"
module eth_dma_tb;
  import inc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  `TB_WATCHDOG(20000)

  coord_t me;
  assign me = '{x: 5'd1, y: 5'd1, z: 5'd1};
  logic csr_we, irq, out_valid, out_ready, in_valid, in_ready;
  logic [7:0] csr_addr;
  logic [63:0] csr_wdata, csr_rdata;
  flit_t out_flit, in_flit;
  bus_req_t bus_req;
  bus_rsp_t bus_rsp;
  int writes;
  eth_dma dut (.clk, .rst_n, .my_pos(me), .csr_we, .csr_addr, .csr_wdata, .csr_rdata, .irq,
    .out_valid, .out_ready, .out_flit, .in_valid, .in_ready, .in_flit, .bus_req, .bus_rsp);
  mem_model #(.WORDS(1024), .LAT(3)) mem (.clk, .rst_n, .req(bus_req), .rsp(bus_rsp), .writes);

  flit_t outq [$];
  flit_t inq [$];
  assign in_valid = inq.size() > 0;
  assign in_flit  = in_valid ? inq[0] : '0;
  always_ff @(posedge clk) out_ready <= ($urandom % 3) != 0;
  always_ff @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) outq.push_back(out_flit);
    if (in_valid && in_ready) void'(inq.pop_front());
  end

  task automatic csr_write(logic [7:0] a, logic [63:0] d);
    @(negedge clk); csr_we = 1; csr_addr = a; csr_wdata = d;
    @(negedge clk); csr_we = 0;
  endtask
  task automatic csr_read(logic [7:0] a, output logic [63:0] d);
    @(negedge clk); csr_addr = a; #1 d = csr_rdata;
  endtask

  initial begin
    logic [63:0] d;
    pkt_hdr_t h;
    coord_t far;
    far = '{x: 5'd2, y: 5'd0, z: 5'd1};
    csr_we = 0; csr_addr = 0; csr_wdata = 0;
    for (int k = 0; k < 4; k++) mem.mem[64 + k] = 64'hE000 + 64'(k);   // frame at 0x200
    for (int k = 0; k < 2; k++) mem.mem[96 + k] = 64'hF000 + 64'(k);   // frame at 0x300
    repeat (3) @(posedge clk); rst_n = 1;
    csr_write(8'h00, 64'h200);
    csr_write(8'h10, 64'h300);
    csr_write(8'h18, {1'b1, 16'd0, far, 32'd0} | 64'd2);
    csr_write(8'h08, {1'b1, 16'd0, far, 32'd0} | 64'd4);
    repeat (80) @(posedge clk);
    `CHECK(outq.size() == 5 + 3, $sformatf("two frames sent (%0d flits)", outq.size()))
    h = pkt_hdr_t'(outq[0].data);
    `CHECK(h.dst == far && h.src == me && h.proto == PROTO_ETH && h.len == 4, "first frame header")
    `CHECK(outq[1].data == 64'hE000 && outq[4].data == 64'hE003 && outq[4].last, "first frame read from memory")
    `CHECK(outq[6].data == 64'hF000 && outq[7].last, "second descriptor served next")
    csr_read(8'h08, d);
    `CHECK(!d[63], "OWN cleared after transmit")
    // receive
    csr_write(8'h40, 64'h400);
    csr_write(8'h48, 64'h8000_0000_0000_0000);
    csr_write(8'h80, 64'd1);
    `CHECK(!irq, "no interrupt before a frame")
    inq.push_back('{last: 1'b0, data: DATA_W'(make_hdr(me, far, 1'b0, PROTO_ETH, 5'd0, 8'd3))});
    for (int k = 0; k < 3; k++) inq.push_back('{last: k == 2, data: 64'hAB00 + 64'(k)});
    repeat (40) @(posedge clk);
    `CHECK(mem.mem[128] == 64'hAB00 && mem.mem[130] == 64'hAB02, "frame written to the receive buffer")
    csr_read(8'h48, d);
    `CHECK(!d[63] && d[62] && d[7:0] == 8'd3 && coord_t'(d[46:32]) == far, "receive descriptor DONE, length, source")
    `CHECK(irq, "receive interrupt")
    csr_write(8'h88, 0);
    `CHECK(!irq, "interrupt cleared")
    // no free buffer: dropped
    inq.push_back('{last: 1'b0, data: DATA_W'(make_hdr(me, far, 1'b0, PROTO_ETH, 5'd0, 8'd2))});
    for (int k = 0; k < 2; k++) inq.push_back('{last: k == 1, data: 64'hCD00 + 64'(k)});
    repeat (40) @(posedge clk);
    `CHECK(inq.size() == 0 && !irq && writes == 3, "frame without a buffer dropped")
    `TB_FINISH
  end
endmodule
