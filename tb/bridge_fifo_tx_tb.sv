// bridge_fifo_tx_tb: a 12-bit Bridge FIFO transmit unit.  Checks that a
// burst of words leaves as packets of MAX_WORDS words to the configured
// destination, words in order and zero-extended; that a lone word is sent
// within a few cycles; and that full rises after 2*MAX_WORDS words while the
// network is stalled and no word is lost.
`timescale 1ns/1ps
`include "tb_common.svh"
module bridge_fifo_tx_tb;
  import inc_pkg::*;
  localparam int W = 12, MW = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  `TB_WATCHDOG(20000)

  coord_t me, dst;
  logic wr_en, full, out_valid, out_ready;
  logic [W-1:0] wr_data;
  flit_t out_flit;
  assign me  = '{x: 5'd1, y: 5'd2, z: 5'd0};
  assign dst = '{x: 5'd7, y: 5'd3, z: 5'd2};
  bridge_fifo_tx #(.WIDTH(W), .MAX_WORDS(MW)) dut (.clk, .rst_n, .my_pos(me), .dst, .wr_en, .wr_data, .full,
    .out_valid, .out_ready, .out_flit);

  int nword, npkt, left, lens [$];
  logic [W-1:0] exp_q [$];
  int hdr_time;
  always_ff @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (left == 0) begin
      pkt_hdr_t h;
      h = pkt_hdr_t'(out_flit.data);
      `CHECK(h.dst == dst && h.src == me && !h.bcast && h.len >= 1 && h.len <= MW, "header")
      left <= int'(h.len);
      lens.push_back(int'(h.len));
      hdr_time <= $time / 10;
      npkt <= npkt + 1;
    end else begin
      `CHECK(exp_q.size() > 0 && out_flit.data == 64'(exp_q[0]), "word order, zero extension")
      `CHECK(out_flit.last == (left == 1), "last flag")
      void'(exp_q.pop_front());
      left <= left - 1;
      nword <= nword + 1;
    end
  end

  task automatic write(logic [W-1:0] d);
    wr_en <= 1; wr_data <= d; exp_q.push_back(d);
    @(posedge clk);
    wr_en <= 0;
  endtask

  initial begin
    int t0;
    wr_en = 0; wr_data = 0; out_ready = 1; nword = 0; npkt = 0; left = 0; hdr_time = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(posedge clk);
    for (int k = 0; k < 16; k++) begin wr_en <= 1; wr_data <= W'(12'hF00 + k); exp_q.push_back(W'(12'hF00 + k)); @(posedge clk); end
    wr_en <= 0;
    repeat (40) @(posedge clk);
    `CHECK(npkt == 2 && lens[0] == MW && lens[1] == MW, "a burst of 16 words forms two full packets")
    t0 = $time / 10;
    write(12'h0AB);
    repeat (20) @(posedge clk);
    `CHECK(npkt == 3 && lens[2] == 1, "a lone word is sent on its own")
    `CHECK(hdr_time - t0 <= 4, $sformatf("lone word header after %0d cycles", hdr_time - t0))
    // stalled network: full after 2*MW words
    out_ready = 0;
    for (int k = 0; k < 2 * MW; k++) begin
      `CHECK(!full, "not full before 2*MAX_WORDS words")
      wr_en <= 1; wr_data <= W'(k); exp_q.push_back(W'(k)); @(posedge clk);
    end
    wr_en <= 0;
    @(posedge clk);
    `CHECK(full, "full while the network is stalled")
    `CHECK(exp_q.size() == 2 * MW, $sformatf("%0d words accepted before full", exp_q.size()))
    out_ready = 1;
    repeat (60) @(posedge clk);
    `CHECK(exp_q.size() == 0 && nword == 16 + 1 + 2 * MW, "all words sent")
    `TB_FINISH
  end
endmodule
