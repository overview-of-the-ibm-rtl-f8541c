// link_port_tb: two link ports joined by a DELAY-cycle wire in each
// direction.  Checks that flits arrive complete and in order under random
// back-pressure, that a stalled receiver lets exactly BUF_FLITS flits (its
// advertised credit) across and no more, and that with a free receiver the
// link reaches at least half a flit per cycle.
`timescale 1ns/1ps
`include "tb_common.svh"
module link_port_tb;
  import inc_pkg::*;
  localparam int BUF = 16, DELAY = 4, NF = 300;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  `TB_WATCHDOG(20000)

  logic a_tx_valid, a_tx_ready, b_rx_valid, b_rx_ready;
  flit_t a_tx_flit, b_rx_flit;
  logic a_rx_valid, b_tx_ready, b_tx_valid;
  flit_t a_rx_flit, b_tx_flit;
  link_word_t a_out, b_out, a_in, b_in;
  link_word_t ab [DELAY];
  link_word_t ba [DELAY];
  logic [15:0] a_cred, b_cred;

  link_port #(.BUF_FLITS(BUF)) u_a (.clk, .rst_n, .tx_valid(a_tx_valid), .tx_ready(a_tx_ready), .tx_flit(a_tx_flit),
    .rx_valid(a_rx_valid), .rx_ready(1'b1), .rx_flit(a_rx_flit), .link_out(a_out), .link_in(a_in), .credits(a_cred));
  link_port #(.BUF_FLITS(BUF)) u_b (.clk, .rst_n, .tx_valid(b_tx_valid), .tx_ready(b_tx_ready), .tx_flit(b_tx_flit),
    .rx_valid(b_rx_valid), .rx_ready(b_rx_ready), .rx_flit(b_rx_flit), .link_out(b_out), .link_in(b_in), .credits(b_cred));

  assign b_tx_valid = 1'b0;
  assign b_tx_flit  = '0;
  always_ff @(posedge clk) begin
    ab[0] <= rst_n ? a_out : '0; ba[0] <= rst_n ? b_out : '0;
    for (int i = 1; i < DELAY; i++) begin ab[i] <= ab[i-1]; ba[i] <= ba[i-1]; end
  end
  initial for (int i = 0; i < DELAY; i++) begin ab[i] = '0; ba[i] = '0; end
  assign b_in = ab[DELAY-1];
  assign a_in = ba[DELAY-1];

  int sent, rcvd, mode;  // mode 0 random ready, 1 stalled, 2 free
  logic [63:0] expect_q [$];
  always_ff @(posedge clk) if (rst_n && b_rx_valid && b_rx_ready) begin
    rcvd <= rcvd + 1;
    `CHECK(expect_q.size() > 0 && b_rx_flit.data == expect_q[0], "flit order/content")
    if (expect_q.size() > 0) void'(expect_q.pop_front());
  end
  always_comb case (mode)
    1: b_rx_ready = 1'b0;
    2: b_rx_ready = 1'b1;
    default: b_rx_ready = rnd_ready;
  endcase
  logic rnd_ready;
  always_ff @(posedge clk) rnd_ready <= ($urandom % 3) != 0;

  task automatic push(int n);
    for (int k = 0; k < n; k++) begin
      a_tx_valid <= 1'b1;
      a_tx_flit  <= '{last: 1'b0, data: 64'(sent) ^ 64'hA5A5_0000_0000_0000};
      @(posedge clk);
      while (!a_tx_ready) @(posedge clk);
      expect_q.push_back(64'(sent) ^ 64'hA5A5_0000_0000_0000);
      sent++;
    end
    a_tx_valid <= 1'b0;
  endtask

  initial begin
    int t0, r0;
    a_tx_valid = 0; a_tx_flit = '0; sent = 0; rcvd = 0; mode = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    push(NF);
    repeat (60) @(posedge clk);
    `CHECK(rcvd == NF, "all flits delivered under random back-pressure")
    // stalled receiver: exactly BUF flits cross
    mode = 1;
    r0 = rcvd;
    repeat (40) @(posedge clk);
    fork push(BUF + 8); join_none
    repeat (100) @(posedge clk);
    `CHECK(sent - NF == BUF, $sformatf("stalled receiver accepted %0d flits, credit %0d", sent - NF, BUF))
    `CHECK(a_cred == 0, "no credit left while stalled")
    mode = 2;
    wait (sent == NF + BUF + 8);
    repeat (60) @(posedge clk);
    `CHECK(rcvd == NF + BUF + 8, "flits held back by credit delivered after release")
    // throughput with a free receiver
    t0 = $time / 10; r0 = rcvd;
    push(200);
    `CHECK(($time / 10 - t0) < 400, $sformatf("200 flits took %0d cycles", $time / 10 - t0))
    repeat (60) @(posedge clk);
    `CHECK(expect_q.size() == 0, "queue drained")
    `TB_FINISH
  end
endmodule
