// bus_arbiter_tb: four masters share one memory model through the arbiter.
// Each master writes random words to its own region and reads them back at
// random moments, all four competing.  Checked: every read returns what that
// master wrote (no transfer goes to the wrong master or mixes two masters'
// fields), and rotating priority keeps any wait below N transfers' time.
`timescale 1ns/1ps
`include "tb_common.svh"
module bus_arbiter_tb;
  import inc_pkg::*;
  localparam int N = 4, LAT = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  `TB_WATCHDOG(100000)

  bus_req_t m_req [N];
  bus_rsp_t m_rsp [N];
  bus_req_t s_req;
  bus_rsp_t s_rsp;
  int writes;
  bus_arbiter #(.N(N)) dut (.clk, .rst_n, .m_req, .m_rsp, .s_req, .s_rsp);
  mem_model #(.WORDS(256), .LAT(LAT)) mem (.clk, .rst_n, .req(s_req), .rsp(s_rsp), .writes);

  int max_wait = 0, acks = 0;
  always_ff @(posedge clk) if (rst_n) for (int i = 0; i < N; i++) if (m_rsp[i].ack) acks <= acks + 1;

  task automatic xfer(int i, logic we, logic [31:0] a, logic [63:0] d, output logic [63:0] q);
    int w = 0;
    @(negedge clk);
    m_req[i] = '{req: 1'b1, we: we, addr: a, wdata: d};
    @(posedge clk);
    while (!m_rsp[i].ack) begin w++; @(posedge clk); end
    q = m_rsp[i].rdata;
    if (w > max_wait) max_wait = w;
    @(negedge clk);
    m_req[i] = '0;
  endtask

  task automatic master(int i);
    logic [63:0] d [16];
    logic [63:0] q;
    for (int k = 0; k < 16; k++) begin
      d[k] = {$urandom, $urandom};
      xfer(i, 1'b1, 32'((i * 64 + k) * 8), d[k], q);
      repeat ($urandom_range(2)) @(posedge clk);
    end
    for (int k = 0; k < 16; k++) begin
      xfer(i, 1'b0, 32'((i * 64 + k) * 8), '0, q);
      `CHECK(q == d[k], $sformatf("master %0d word %0d", i, k))
    end
  endtask

  initial begin
    for (int i = 0; i < N; i++) m_req[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      master(0); master(1); master(2); master(3);
    join
    `CHECK(writes == N * 16, "write count")
    `CHECK(acks == N * 32, "ack count")
    `CHECK(max_wait <= N * LAT, $sformatf("longest wait %0d cycles", max_wait))
    $display("longest wait %0d cycles", max_wait);
    `TB_FINISH
  end
endmodule
