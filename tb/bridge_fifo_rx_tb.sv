// bridge_fifo_rx_tb: a 16-bit, 8-deep Bridge FIFO receive unit.  Checks
// that headers are dropped and words come out in order, that the unit stops
// accepting flits when its FIFO is full (no word lost), and that a
// header-only packet is consumed.
`timescale 1ns/1ps
`include "tb_common.svh"
module bridge_fifo_rx_tb;
  import inc_pkg::*;
  localparam int W = 16, D = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  `TB_WATCHDOG(20000)

  logic in_valid, in_ready, rd_en, empty;
  flit_t in_flit;
  logic [W-1:0] rd_data;
  logic [$clog2(D+1)-1:0] count;
  bridge_fifo_rx #(.WIDTH(W), .DEPTH(D)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_flit, .rd_en, .rd_data, .empty, .count);

  flit_t inq [$];
  logic [W-1:0] exp_q [$];
  assign in_valid = inq.size() > 0;
  assign in_flit  = in_valid ? inq[0] : '0;
  always_ff @(posedge clk) if (rst_n && in_valid && in_ready) void'(inq.pop_front());

  task automatic pkt(int n, int base);
    inq.push_back('{last: n == 0, data: 64'hDEAD_0000_0000_0000});
    for (int k = 0; k < n; k++) begin
      inq.push_back('{last: k == n - 1, data: 64'hFFFF_0000 | 64'(base + k)});
      exp_q.push_back(W'(base + k));
    end
  endtask

  initial begin
    int got;
    rd_en = 0; got = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    pkt(5, 100); pkt(0, 0); pkt(6, 200);
    repeat (30) @(posedge clk);
    `CHECK(count == D, "FIFO filled to its depth")
    `CHECK(!in_ready && inq.size() == 3, "input held back while full")
    while (got < 11) begin
      @(negedge clk);
      rd_en = 0;
      if (!empty && ($urandom % 2) == 1) begin
        `CHECK(rd_data == exp_q[0], "word order")
        void'(exp_q.pop_front());
        got++;
        rd_en = 1;
      end
    end
    @(negedge clk) rd_en = 0;
    repeat (5) @(posedge clk);
    `CHECK(empty && inq.size() == 0 && exp_q.size() == 0, "all words read")
    `TB_FINISH
  end
endmodule
