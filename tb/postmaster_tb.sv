// postmaster_tb: one Postmaster unit with a memory model.  Transmit: words
// written to the queue register leave as one packet to the DEST node when
// SEND is written, and a packet closes by itself at MAX_WORDS words.
// Receive: packets from several initiators are stored one after the other,
// header word first, each contiguous, wrapping to BASE when a packet would
// not fit; WPTR and RXCNT are checked.
`timescale 1ns/1ps
`include "tb_common.svh"
module postmaster_tb;
  import inc_pkg::*;
  localparam int MW = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  `TB_WATCHDOG(20000)

  coord_t me;
  assign me = '{x: 5'd3, y: 5'd0, z: 5'd1};
  logic csr_we, csr_ready, out_valid, out_ready, in_valid, in_ready;
  logic [7:0] csr_addr;
  logic [63:0] csr_wdata, csr_rdata;
  flit_t out_flit, in_flit;
  bus_req_t bus_req;
  bus_rsp_t bus_rsp;
  int writes;
  postmaster #(.MAX_WORDS(MW)) dut (.clk, .rst_n, .my_pos(me), .csr_we, .csr_addr, .csr_wdata, .csr_rdata, .csr_ready,
    .out_valid, .out_ready, .out_flit, .in_valid, .in_ready, .in_flit, .bus_req, .bus_rsp);
  mem_model #(.WORDS(1024), .LAT(2)) mem (.clk, .rst_n, .req(bus_req), .rsp(bus_rsp), .writes);

  flit_t outq [$];
  flit_t inq [$];
  assign in_valid = inq.size() > 0;
  assign in_flit  = in_valid ? inq[0] : '0;
  assign out_ready = 1'b1;
  always_ff @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) outq.push_back(out_flit);
    if (in_valid && in_ready) void'(inq.pop_front());
  end

  task automatic csr_write(logic [7:0] a, logic [63:0] d);
    @(negedge clk);
    csr_we = 1; csr_addr = a; csr_wdata = d;
    while (!csr_ready) @(negedge clk);
    @(negedge clk);
    csr_we = 0;
  endtask
  task automatic csr_read(logic [7:0] a, output logic [63:0] d);
    @(negedge clk);
    csr_addr = a; #1 d = csr_rdata;
  endtask

  pkt_hdr_t hdrs [5];
  task automatic rx_pkt(int i, int n, coord_t src);
    hdrs[i] = make_hdr(me, src, 1'b0, PROTO_POST, 5'd0, 8'(n));
    inq.push_back('{last: 1'b0, data: DATA_W'(hdrs[i])});
    for (int k = 0; k < n; k++) inq.push_back('{last: k == n - 1, data: 64'((i << 8) | k)});
  endtask
  function automatic logic [63:0] m(int byte_addr); return mem.mem[byte_addr / 8]; endfunction
  function automatic bit stored(int byte_addr, int i, int n);
    if (m(byte_addr) != DATA_W'(hdrs[i])) return 0;
    for (int k = 0; k < n; k++) if (m(byte_addr + 8 + 8 * k) != 64'((i << 8) | k)) return 0;
    return 1;
  endfunction

  initial begin
    logic [63:0] d;
    pkt_hdr_t h;
    csr_we = 0; csr_addr = 0; csr_wdata = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // transmit
    csr_write(8'h00, 64'({5'd2, 5'd1, 5'd0}));
    for (int k = 0; k < 3; k++) csr_write(8'h08, 64'h1000 + 64'(k));
    repeat (5) @(posedge clk);
    `CHECK(outq.size() == 0, "nothing sent before SEND")
    csr_write(8'h10, 0);
    repeat (10) @(posedge clk);
    h = pkt_hdr_t'(outq[0].data);
    `CHECK(outq.size() == 4 && h.dst == coord_t'({5'd2, 5'd1, 5'd0}) && h.src == me && h.len == 3 &&
           h.proto == PROTO_POST, "packet of three words to DEST")
    `CHECK(outq.size() == 4 && outq[1].data == 64'h1000 && outq[3].data == 64'h1002 && outq[3].last, "queued words in order")
    outq.delete();
    for (int k = 0; k < MW; k++) csr_write(8'h08, 64'h2000 + 64'(k));
    repeat (30) @(posedge clk);
    h = pkt_hdr_t'(outq[0].data);
    `CHECK(outq.size() == MW + 1 && h.len == MW && outq[MW].last, "packet closes at MAX_WORDS")
    // receive
    csr_write(8'h18, 64'h100);
    csr_write(8'h20, 64'h100);
    rx_pkt(0, 3, '{x: 5'd1, y: 5'd0, z: 5'd0});
    rx_pkt(1, 5, '{x: 5'd0, y: 5'd2, z: 5'd2});
    rx_pkt(2, 10, '{x: 5'd1, y: 5'd0, z: 5'd0});
    rx_pkt(3, 8, '{x: 5'd4, y: 5'd1, z: 5'd0});
    wait (inq.size() == 0);
    repeat (40) @(posedge clk);
    `CHECK(stored(32'h100, 0, 3), "packet 0 stored at BASE")
    `CHECK(stored(32'h120, 1, 5), "packet 1 follows contiguously")
    rx_pkt(4, 4, '{x: 5'd0, y: 5'd2, z: 5'd2});
    wait (inq.size() == 0);
    repeat (40) @(posedge clk);
    `CHECK(stored(32'h150, 2, 10), "packet 2 follows contiguously")
    `CHECK(stored(32'h1A8, 3, 8), "packet 3 follows contiguously")
    `CHECK(stored(32'h100, 4, 4), "packet 4 does not fit and starts again at BASE")
    csr_read(8'h28, d);
    `CHECK(d == 64'h28, $sformatf("WPTR %h", d))
    csr_read(8'h30, d);
    `CHECK(d == 64'd5, "RXCNT")
    `CHECK(writes == 3 + 5 + 10 + 8 + 4 + 5, "memory writes")
    `TB_FINISH
  end
endmodule
