// inc_node_tb: two complete node controllers, A at (0,0,0) and B at
// (1,0,0) of a 2x1x1 system, joined by their X single-span links and by a
// two-station ring.  Each has a memory model.  Exercised end to end through
// router, protocol mux/demux and link credit logic:
//   * Bridge FIFO words A->A (0 hops) and A->B (1 hop), order and latency;
//   * a Postmaster message A->B, found in B's receive buffer;
//   * NetTunnel write and read of B's memory from A;
//   * Ring Bus write and read of B's memory from A;
//   * an internal Ethernet frame A->B with B's receive interrupt.
`timescale 1ns/1ps
`include "tb_common.svh"
module inc_node_tb;
  import inc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  `TB_WATCHDOG(100000)

  localparam int CH = 2;
  coord_t pos [2];
  assign pos[0] = '{x: 5'd0, y: 5'd0, z: 5'd0};
  assign pos[1] = '{x: 5'd1, y: 5'd0, z: 5'd0};

  link_word_t lo [2][12];
  link_word_t li [2][12];
  ring_msg_t  ro [2];
  logic       rir [2];
  logic       csr_we [2], csr_ready [2], irq [2];
  logic [8:0] csr_addr [2];
  logic [63:0] csr_wdata [2], csr_rdata [2];
  logic        hr_valid [2], hr_ready [2], hr_rsp_v [2];
  ring_op_e    hr_op [2];
  logic [4:0]  hr_dst [2];
  logic [31:0] hr_addr [2];
  logic [63:0] hr_wdata [2], hr_rsp_d [2];
  logic        ht_valid [2], ht_ready [2], ht_rsp_v [2];
  logic [1:0]  ht_op [2];
  coord_t      ht_dst [2];
  logic [31:0] ht_addr [2];
  logic [63:0] ht_wdata [2], ht_rsp_d [2];
  coord_t      bf_dst [2][CH];
  logic [CH-1:0] bf_wr_en [2], bf_full [2], bf_rd_en [2], bf_empty [2];
  logic [63:0] bf_wr_data [2][CH];
  logic [63:0] bf_rd_data [2][CH];
  bus_req_t    mreq [2];
  bus_rsp_t    mrsp [2];
  logic        evd [2], evb [2], evm [2];
  int          writes [2];

  always_comb begin
    for (int n = 0; n < 2; n++) for (int i = 0; i < 12; i++) li[n][i] = '0;
    li[1][1] = lo[0][0];  // A +X -> B -X
    li[0][0] = lo[1][1];  // B -X -> A +X
  end

  for (genvar n = 0; n < 2; n++) begin : g
    inc_node #(.SYS_X(2), .SYS_Y(1), .SYS_Z(1), .BRIDGE_CH(CH)) u (
      .clk, .rst_n, .my_pos(pos[n]), .ring_id(5'(n)),
      .link_out(lo[n]), .link_in(li[n]),
      .ring_in(ro[1 - n]), .ring_in_ready(rir[n]), .ring_out(ro[n]), .ring_out_ready(rir[1 - n]),
      .csr_we(csr_we[n]), .csr_addr(csr_addr[n]), .csr_wdata(csr_wdata[n]), .csr_rdata(csr_rdata[n]),
      .csr_ready(csr_ready[n]), .eth_irq(irq[n]),
      .host_ring_valid(hr_valid[n]), .host_ring_ready(hr_ready[n]), .host_ring_op(hr_op[n]),
      .host_ring_dst(hr_dst[n]), .host_ring_addr(hr_addr[n]), .host_ring_wdata(hr_wdata[n]),
      .host_ring_rsp_valid(hr_rsp_v[n]), .host_ring_rsp_data(hr_rsp_d[n]),
      .host_tun_valid(ht_valid[n]), .host_tun_ready(ht_ready[n]), .host_tun_op(ht_op[n]),
      .host_tun_dst(ht_dst[n]), .host_tun_addr(ht_addr[n]), .host_tun_wdata(ht_wdata[n]),
      .host_tun_rsp_valid(ht_rsp_v[n]), .host_tun_rsp_data(ht_rsp_d[n]),
      .bf_dst(bf_dst[n]), .bf_wr_en(bf_wr_en[n]), .bf_wr_data(bf_wr_data[n]), .bf_full(bf_full[n]),
      .bf_rd_en(bf_rd_en[n]), .bf_rd_data(bf_rd_data[n]), .bf_empty(bf_empty[n]),
      .mem_req(mreq[n]), .mem_rsp(mrsp[n]),
      .ev_detour(evd[n]), .ev_bcast(evb[n]), .ev_multi(evm[n]));
    mem_model #(.WORDS(1024), .LAT(2)) m (.clk, .rst_n, .req(mreq[n]), .rsp(mrsp[n]), .writes(writes[n]));
    initial begin
      csr_we[n] = 0; csr_addr[n] = 0; csr_wdata[n] = 0;
      hr_valid[n] = 0; hr_op[n] = RING_WRITE; hr_dst[n] = 0; hr_addr[n] = 0; hr_wdata[n] = 0;
      ht_valid[n] = 0; ht_op[n] = 0; ht_dst[n] = '0; ht_addr[n] = 0; ht_wdata[n] = 0;
      bf_wr_en[n] = 0; bf_rd_en[n] = 0;
      for (int c = 0; c < CH; c++) begin bf_dst[n][c] = '0; bf_wr_data[n][c] = 0; end
    end
  end

  function automatic logic [63:0] memw(int n, int byte_addr);
    return n == 0 ? g[0].m.mem[byte_addr / 8] : g[1].m.mem[byte_addr / 8];
  endfunction

  task automatic csr_write(int n, logic [8:0] a, logic [63:0] d);
    @(negedge clk);
    csr_we[n] = 1; csr_addr[n] = a; csr_wdata[n] = d;
    #1 while (!csr_ready[n]) @(negedge clk);
    @(negedge clk);
    csr_we[n] = 0;
  endtask
  task automatic csr_read(int n, logic [8:0] a, output logic [63:0] d);
    @(negedge clk);
    csr_addr[n] = a; #1 d = csr_rdata[n];
  endtask

  // Bridge FIFO: send k words from A channel c to node dst, return the cycles
  // from the first write to the first word readable at the receiver.
  task automatic bridge(int dn, int c, int k, output int lat);
    logic [63:0] w [$];
    int t0, t;
    bf_dst[0][c] = pos[dn];
    @(negedge clk);
    t0 = 0;
    for (int i = 0; i < k; i++) begin
      w.push_back({$urandom, $urandom});
      bf_wr_en[0][c] = 1; bf_wr_data[0][c] = w[i];
      @(negedge clk);
    end
    bf_wr_en[0][c] = 0;
    t = k;
    while (dn == 0 ? bf_empty[0][c] : bf_empty[1][c]) begin @(negedge clk); t++; end
    lat = t - t0;
    for (int i = 0; i < k; i++) begin
      while (dn == 0 ? bf_empty[0][c] : bf_empty[1][c]) @(negedge clk);
      `CHECK((dn == 0 ? bf_rd_data[0][c] : bf_rd_data[1][c]) == w[i], $sformatf("bridge word %0d to node %0d ch %0d", i, dn, c))
      bf_rd_en[dn][c] = 1;
      @(negedge clk);
      bf_rd_en[dn][c] = 0;
    end
  endtask

  logic [63:0] d, q;
  pkt_hdr_t ph;
  int lat0, lat1;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (10) @(posedge clk);

    // Bridge FIFO, single word so the latency is that of one packet
    bridge(0, 0, 1, lat0);
    bridge(1, 1, 1, lat1);
    $display("bridge latency: 0 hops %0d cycles, 1 hop %0d cycles", lat0, lat1);
    `CHECK(lat1 > lat0, "one hop takes longer than none")
    `CHECK(lat0 < 20 && lat1 < 40, "bridge latency bound")
    bridge(1, 0, 20, lat1);

    // Postmaster A -> B: B's buffer at 0x1000, 256 bytes
    csr_write(1, 9'h018, 64'h1000);
    csr_write(1, 9'h020, 64'h100);
    csr_write(0, 9'h000, 64'(pos[1]));
    for (int i = 0; i < 3; i++) csr_write(0, 9'h008, 64'hA0 + i);
    csr_write(0, 9'h010, 0);
    repeat (200) @(posedge clk);
    ph = pkt_hdr_t'(memw(1, 32'h1000));
    `CHECK(ph.src == pos[0], "postmaster header in B's buffer")
    for (int i = 0; i < 3; i++) `CHECK(memw(1, 32'h1008 + 8 * i) == 64'hA0 + i, "postmaster word in B's buffer")
    csr_read(1, 9'h028, d);
    `CHECK(d == 32, "postmaster write pointer")

    // NetTunnel write and read of B's memory
    @(negedge clk);
    ht_valid[0] = 1; ht_op[0] = 2'd0; ht_dst[0] = pos[1]; ht_addr[0] = 32'h200; ht_wdata[0] = 64'hFEED_0001;
    @(posedge clk); while (!ht_ready[0]) @(posedge clk);
    @(negedge clk); ht_valid[0] = 0;
    repeat (100) @(posedge clk);
    `CHECK(memw(1, 32'h200) == 64'hFEED_0001, "NetTunnel write reached B")
    @(negedge clk);
    ht_valid[0] = 1; ht_op[0] = 2'd1;
    @(posedge clk); while (!ht_ready[0]) @(posedge clk);
    @(negedge clk); ht_valid[0] = 0;
    while (!ht_rsp_v[0]) @(posedge clk);
    `CHECK(ht_rsp_d[0] == 64'hFEED_0001, "NetTunnel read from B")

    // Ring Bus write and read of B's memory
    @(negedge clk);
    hr_valid[0] = 1; hr_op[0] = RING_WRITE; hr_dst[0] = 5'd1; hr_addr[0] = 32'h208; hr_wdata[0] = 64'hBEEF_0002;
    @(posedge clk); while (!hr_ready[0]) @(posedge clk);
    @(negedge clk); hr_op[0] = RING_READ;
    @(posedge clk); while (!hr_ready[0]) @(posedge clk);
    @(negedge clk); hr_valid[0] = 0;
    while (!hr_rsp_v[0]) @(posedge clk);
    `CHECK(hr_rsp_d[0] == 64'hBEEF_0002, "Ring Bus read from B")
    `CHECK(memw(1, 32'h208) == 64'hBEEF_0002, "Ring Bus write reached B")

    // Internal Ethernet A -> B: frame of 3 words at A 0x300, B buffer 0x800
    for (int i = 0; i < 3; i++) g[0].m.mem[(32'h300 >> 3) + i] = 64'hE000 + i;
    csr_write(1, 9'h140, 64'h800);
    csr_write(1, 9'h148, 64'h8000_0000_0000_0000);
    csr_write(1, 9'h180, 64'd1);
    csr_write(0, 9'h100, 64'h300);
    csr_write(0, 9'h108, {1'b1, 16'd0, 15'(pos[1]), 32'd0} | 64'd3);
    for (int t = 0; t < 300 && !irq[1]; t++) @(posedge clk);
    `CHECK(irq[1], "Ethernet receive interrupt at B")
    for (int i = 0; i < 3; i++) `CHECK(memw(1, 32'h800 + 8 * i) == 64'hE000 + i, "Ethernet frame word at B")
    csr_read(1, 9'h148, d);
    `CHECK(d[62] && d[7:0] == 3 && coord_t'(d[46:32]) == pos[0], "receive descriptor done")
    csr_read(0, 9'h108, d);
    `CHECK(!d[63], "transmit descriptor returned")
    csr_write(1, 9'h188, 0);
    @(negedge clk);
    `CHECK(!irq[1], "interrupt cleared")
    `TB_FINISH
  end
endmodule
