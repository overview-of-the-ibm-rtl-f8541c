// inc_card_tb: two complete INC cards at their full default size, in a
// 12x12x3 system: card A at origin (0,0,0) and card B at (3,0,0), joined
// by the single-span links across their common face and by the X multi-span
// links, which run from every node of A to the node three places on in B.
// Every other link that leaves a card ends in a link_sink.  Each of the 54
// nodes has its own memory model.  The test drives:
//   * Bridge FIFO latency from node 000 over 0, 1, 3 and 6 hops on card A
//     (the cases of the latency table) and a cross-card transfer;
//   * many Bridge FIFO streams at once from card A to card B, one of them
//     against a receiver that does not read, until the sender sees full;
//   * a Postmaster message and an internal Ethernet frame between cards;
//   * NetTunnel write, read and broadcast write from the host port of
//     node 000; Ring Bus write, read and broadcast write on card A.
// It counts each mechanism (multi-span hop, adaptive detour, broadcast
// fan-out, credit stall, Bridge FIFO back-pressure, Ring and NetTunnel
// operations, Postmaster delivery, Ethernet interrupt) and counts a failure
// for any that never happened.
`timescale 1ns/1ps
`include "tb_common.svh"
module inc_card_tb;
  import inc_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  `TB_WATCHDOG(20000)

  localparam int CH = 2;
  coord_t origin [2];
  assign origin[0] = '{x: 5'd0, y: 5'd0, z: 5'd0};
  assign origin[1] = '{x: 5'd3, y: 5'd0, z: 5'd0};

  link_word_t  lo [2][27][12];
  link_word_t  li [2][27][12];
  logic [26:0] csr_we [2], csr_ready [2], irq [2];
  logic [8:0]  csr_addr [2][27];
  logic [63:0] csr_wdata [2][27];
  logic [63:0] csr_rdata [2][27];
  bus_req_t    mreq [2][27];
  bus_rsp_t    mrsp [2][27];
  coord_t      bf_dst [2][27][CH];
  logic [CH-1:0] bf_wr_en [2][27], bf_full [2][27], bf_rd_en [2][27], bf_empty [2][27];
  logic [63:0] bf_wr_data [2][27][CH];
  logic [63:0] bf_rd_data [2][27][CH];
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
  logic [26:0] evd [2], evb [2], evm [2];

  // memory words watched for the broadcast checks
  localparam int W_TBC = 32'h300 / 8, W_RBC = 32'h308 / 8;
  logic [63:0] peek_tbc [2][27];
  logic [63:0] peek_rbc [2][27];
  logic [26:0] stall [2];

  for (genvar c = 0; c < 2; c++) begin : g_c
    inc_card u_card (
      .clk, .rst_n, .card_origin(origin[c]),
      .ext_link_out(lo[c]), .ext_link_in(li[c]),
      .csr_we(csr_we[c]), .csr_addr(csr_addr[c]), .csr_wdata(csr_wdata[c]), .csr_rdata(csr_rdata[c]),
      .csr_ready(csr_ready[c]), .eth_irq(irq[c]), .mem_req(mreq[c]), .mem_rsp(mrsp[c]),
      .bf_dst(bf_dst[c]), .bf_wr_en(bf_wr_en[c]), .bf_wr_data(bf_wr_data[c]), .bf_full(bf_full[c]),
      .bf_rd_en(bf_rd_en[c]), .bf_rd_data(bf_rd_data[c]), .bf_empty(bf_empty[c]),
      .host_ring_valid(hr_valid[c]), .host_ring_ready(hr_ready[c]), .host_ring_op(hr_op[c]),
      .host_ring_dst(hr_dst[c]), .host_ring_addr(hr_addr[c]), .host_ring_wdata(hr_wdata[c]),
      .host_ring_rsp_valid(hr_rsp_v[c]), .host_ring_rsp_data(hr_rsp_d[c]),
      .host_tun_valid(ht_valid[c]), .host_tun_ready(ht_ready[c]), .host_tun_op(ht_op[c]),
      .host_tun_dst(ht_dst[c]), .host_tun_addr(ht_addr[c]), .host_tun_wdata(ht_wdata[c]),
      .host_tun_rsp_valid(ht_rsp_v[c]), .host_tun_rsp_data(ht_rsp_d[c]),
      .ev_detour(evd[c]), .ev_bcast(evb[c]), .ev_multi(evm[c]));
    for (genvar n = 0; n < 27; n++) begin : g_n
      localparam int LX = n / 9;
      mem_model #(.WORDS(1024), .LAT(2)) m (.clk, .rst_n, .req(mreq[c][n]), .rsp(mrsp[c][n]), .writes());
      assign peek_tbc[c][n] = m.mem[W_TBC];
      assign peek_rbc[c][n] = m.mem[W_RBC];
      logic [11:0] st;
      for (genvar i = 0; i < 12; i++) begin : g_i
        // links joining the cards: A's +X face to B's -X face, X multi-span
        localparam bit A_TO_B = (c == 0) && ((i == 0 && LX == 2) || i == 6);
        localparam bit B_TO_A = (c == 1) && ((i == 1 && LX == 0) || i == 7);
        localparam int PN = (i < 6) ? ((c == 0) ? n - 18 : n + 18) : n;
        localparam int PI = (i % 2 == 0) ? i + 1 : i - 1;
        if (A_TO_B || B_TO_A) begin : g_x
          assign li[c][n][i] = lo[1 - c][PN][PI];
        end else begin : g_s
          link_sink u_sink (.clk, .rst_n, .link_in(lo[c][n][i]), .link_out(li[c][n][i]), .flits());
        end
        // a packet holds this output but the link has no credit for its next flit
        assign st[i] = u_card.g_node[n].u_node.u_router.locked[i + 1] &&
                       u_card.g_node[n].u_node.g_link[i].u_link.credits < 16'(FLIT_BYTES);
      end
      assign stall[c][n] = |st;
    end
    initial begin
      csr_we[c] = '0; bf_wr_en[c] = '{default: '0}; bf_rd_en[c] = '{default: '0};
      for (int n = 0; n < 27; n++) begin
        csr_addr[c][n] = 0; csr_wdata[c][n] = 0;
        for (int k = 0; k < CH; k++) begin bf_dst[c][n][k] = '0; bf_wr_data[c][n][k] = 0; end
      end
      hr_valid[c] = 0; hr_op[c] = RING_WRITE; hr_dst[c] = 0; hr_addr[c] = 0; hr_wdata[c] = 0;
      ht_valid[c] = 0; ht_op[c] = 0; ht_dst[c] = '0; ht_addr[c] = 0; ht_wdata[c] = 0;
    end
  end

  // ------------------------------------------------------- mechanism counters
  int n_multi = 0, n_detour = 0, n_bcast = 0, n_stall = 0, n_bp = 0;
  int n_ring_wr = 0, n_ring_rd = 0, n_ring_bc = 0, n_tun_wr = 0, n_tun_rd = 0, n_tun_bc = 0;
  int n_post = 0, n_eth = 0, n_bridge = 0;
  always_ff @(posedge clk) if (rst_n) begin
    n_multi  <= n_multi  + $countones(evm[0]) + $countones(evm[1]);
    n_detour <= n_detour + $countones(evd[0]) + $countones(evd[1]);
    n_bcast  <= n_bcast  + $countones(evb[0]) + $countones(evb[1]);
    n_stall  <= n_stall  + $countones(stall[0]) + $countones(stall[1]);
  end

  function automatic int node_of(coord_t p);  // index within its card
    return 9 * (p.x % 3) + 3 * p.y + p.z;
  endfunction
  function automatic int card_of(coord_t p);
    return p.x / 3;
  endfunction
  function automatic coord_t at(int c, int n);
    return '{x: 5'(3 * c + n / 9), y: 5'((n / 3) % 3), z: 5'(n % 3)};
  endfunction

  task automatic csr_write(int c, int n, logic [8:0] a, logic [63:0] d);
    @(negedge clk);
    csr_we[c][n] = 1; csr_addr[c][n] = a; csr_wdata[c][n] = d;
    #1 while (!csr_ready[c][n]) @(negedge clk);
    @(negedge clk);
    csr_we[c][n] = 0;
  endtask
  task automatic csr_read(int c, int n, logic [8:0] a, output logic [63:0] d);
    @(negedge clk);
    csr_addr[c][n] = a; #1 d = csr_rdata[c][n];
  endtask

  // one Bridge FIFO word from A node 000 channel 0 to p: cycles until readable
  task automatic bridge_latency(coord_t p, output int lat);
    int c, n;
    logic [63:0] w;
    c = card_of(p); n = node_of(p);
    w = {$urandom, $urandom};
    @(negedge clk);
    bf_dst[0][0][0] = p; bf_wr_en[0][0][0] = 1; bf_wr_data[0][0][0] = w;
    @(negedge clk);
    bf_wr_en[0][0][0] = 0;
    lat = 1;
    while (bf_empty[c][n][0]) begin @(negedge clk); lat++; end
    `CHECK(bf_rd_data[c][n][0] == w, $sformatf("bridge word to node %0d of card %0d", n, c))
    bf_rd_en[c][n][0] = 1;
    @(negedge clk);
    bf_rd_en[c][n][0] = 0;
    n_bridge++;
  endtask

  // stream of k words from A node s channel 1 to B node t channel 1
  task automatic stream(int s, int t, int k, bit hold_reader);
    logic [63:0] w [$];
    int got = 0;
    bit saw_full = 0;
    fork
      begin
        for (int i = 0; i < k; i++) begin
          @(negedge clk);
          while (bf_full[0][s][1]) begin saw_full = 1; bf_wr_en[0][s][1] = 0; @(negedge clk); end
          w.push_back({32'(s), 32'(i)});
          bf_dst[0][s][1] = at(1, t); bf_wr_en[0][s][1] = 1; bf_wr_data[0][s][1] = {32'(s), 32'(i)};
        end
        @(negedge clk);
        bf_wr_en[0][s][1] = 0;
      end
      begin
        if (hold_reader) begin
          // keep the reader stopped until the whole path has filled up
          while (!saw_full) @(negedge clk);
          repeat (1000) @(negedge clk);
          n_bp++;
        end
        while (got < k) begin
          @(negedge clk);
          bf_rd_en[1][t][1] = 0;
          if (!bf_empty[1][t][1] && got < w.size()) begin
            `CHECK(bf_rd_data[1][t][1] == w[got], $sformatf("stream %0d->%0d word %0d", s, t, got))
            bf_rd_en[1][t][1] = 1;
            got++;
          end
        end
        @(negedge clk);
        bf_rd_en[1][t][1] = 0;
        n_bridge++;
      end
    join
  endtask

  task automatic tun(logic [1:0] op, coord_t dst, logic [31:0] a, logic [63:0] d, output logic [63:0] q);
    @(negedge clk);
    ht_valid[0] = 1; ht_op[0] = op; ht_dst[0] = dst; ht_addr[0] = a; ht_wdata[0] = d;
    @(posedge clk); while (!ht_ready[0]) @(posedge clk);
    @(negedge clk); ht_valid[0] = 0;
    q = '0;
    if (op == 2'd1) begin
      while (!ht_rsp_v[0]) @(posedge clk);
      q = ht_rsp_d[0];
    end
  endtask
  task automatic ring(ring_op_e op, int dst, logic [31:0] a, logic [63:0] d, output logic [63:0] q);
    @(negedge clk);
    hr_valid[0] = 1; hr_op[0] = op; hr_dst[0] = 5'(dst); hr_addr[0] = a; hr_wdata[0] = d;
    @(posedge clk); while (!hr_ready[0]) @(posedge clk);
    @(negedge clk); hr_valid[0] = 0;
    q = '0;
    if (op == RING_READ) begin
      while (!hr_rsp_v[0]) @(posedge clk);
      q = hr_rsp_d[0];
    end
  endtask

  int lat [4];
  logic [63:0] d, q, bcv, rbv;
  int ok;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (20) @(posedge clk);

    // ---- Bridge FIFO latency table, on card A from node 000
    bridge_latency(at(0, 0), lat[0]);
    bridge_latency(at(0, 9), lat[1]);   // (1,0,0)
    bridge_latency(at(0, 13), lat[2]);  // (1,1,1)
    bridge_latency(at(0, 26), lat[3]);  // (2,2,2)
    $display("bridge latency in cycles: 0 hops %0d, 1 hop %0d, 3 hops %0d, 6 hops %0d", lat[0], lat[1], lat[2], lat[3]);
    `CHECK(lat[0] < lat[1] && lat[1] < lat[2] && lat[2] < lat[3], "latency grows with hops")
    `CHECK(2 * (lat[3] - lat[1]) == 5 * (lat[2] - lat[1]), "equal cost per hop")
    bridge_latency(at(1, 13), d[31:0]);  // across the cards, multi-span

    // ---- many streams from card A to card B at once, one against a stalled reader
    fork
      stream(0, 0, 200, 1'b1);
      stream(4, 1, 40, 1'b0);
      stream(9, 4, 40, 1'b0);
      stream(13, 22, 40, 1'b0);
      stream(18, 2, 40, 1'b0);
      stream(22, 13, 40, 1'b0);
      stream(26, 26, 40, 1'b0);
      stream(2, 8, 40, 1'b0);
    join

    // ---- Postmaster from A 5 to B 13: buffer at 0x1000
    csr_write(1, 13, 9'h018, 64'h1000);
    csr_write(1, 13, 9'h020, 64'h400);
    csr_write(0, 5, 9'h000, 64'(at(1, 13)));
    for (int i = 0; i < 4; i++) csr_write(0, 5, 9'h008, 64'hC0DE_0000 + i);
    csr_write(0, 5, 9'h010, 0);
    for (int t = 0; t < 2000; t++) begin
      @(posedge clk);
      if (g_c[1].g_n[13].m.mem[(32'h1000 >> 3) + 4] == 64'hC0DE_0003) break;
    end
    ok = 1;
    for (int i = 0; i < 4; i++) if (g_c[1].g_n[13].m.mem[(32'h1008 >> 3) + i] != 64'hC0DE_0000 + i) ok = 0;
    `CHECK(ok, "Postmaster message stored at the target")
    if (ok) n_post++;

    // ---- internal Ethernet from B 20 to A 7, receive interrupt
    for (int i = 0; i < 5; i++) g_c[1].g_n[20].m.mem[(32'h2000 >> 3) + i] = 64'hE7E7_0000 + i;
    csr_write(0, 7, 9'h140, 64'h1800);
    csr_write(0, 7, 9'h148, 64'h8000_0000_0000_0000);
    csr_write(0, 7, 9'h180, 64'd1);
    csr_write(1, 20, 9'h100, 64'h2000);
    csr_write(1, 20, 9'h108,
                             {1'b1, 16'd0, 15'(at(0, 7)), 32'd0} | 64'd5);
    for (int t = 0; t < 3000 && !irq[0][7]; t++) @(posedge clk);
    `CHECK(irq[0][7], "Ethernet receive interrupt")
    ok = 1;
    for (int i = 0; i < 5; i++) if (g_c[0].g_n[7].m.mem[(32'h1800 >> 3) + i] != 64'hE7E7_0000 + i) ok = 0;
    `CHECK(ok, "Ethernet frame stored at the receiver")
    if (ok && irq[0][7]) n_eth++;
    csr_write(0, 7, 9'h188, 0);

    // ---- NetTunnel from the host port of node 000
    d = {$urandom, $urandom};
    tun(2'd0, at(1, 17), 32'h200, d, q);
    tun(2'd1, at(1, 17), 32'h200, '0, q);
    `CHECK(q == d, "NetTunnel write then read of a node on card B")
    n_tun_wr++;
    if (q == d) n_tun_rd++;
    bcv = {$urandom, $urandom};
    tun(2'd2, '0, 32'h300, bcv, q);
    repeat (3000) @(posedge clk);
    ok = 1;
    // every node but the sender (the broadcast does not loop back to it)
    for (int c = 0; c < 2; c++) for (int n = 0; n < 27; n++)
      if ((peek_tbc[c][n] == bcv) != (c != 0 || n != 0)) begin
        ok = 0; $display("broadcast wrong at card %0d node %0d", c, n);
      end
    `CHECK(ok, "NetTunnel broadcast write reached the 53 other nodes")
    if (ok) n_tun_bc++;

    // ---- Ring Bus on card A
    d = {$urandom, $urandom};
    ring(RING_WRITE, 14, 32'h208, d, q);
    ring(RING_READ, 14, 32'h208, '0, q);
    `CHECK(q == d, "Ring Bus write then read")
    n_ring_wr++;
    if (q == d) n_ring_rd++;
    rbv = {$urandom, $urandom};
    ring(RING_BCAST, 0, 32'h308, rbv, q);
    repeat (300) @(posedge clk);
    ok = 1;
    for (int n = 0; n < 27; n++) if (peek_rbc[0][n] != rbv) ok = 0;
    for (int n = 0; n < 27; n++) if (peek_rbc[1][n] == rbv) ok = 0;  // stays on its card
    `CHECK(ok, "Ring Bus broadcast reached every node of card A only")
    if (ok) n_ring_bc++;

    $display("mechanisms: multi-span %0d, detour %0d, broadcast %0d, credit stall %0d, back-pressure %0d",
             n_multi, n_detour, n_bcast, n_stall, n_bp);
    $display("            bridge %0d, postmaster %0d, ethernet %0d, tunnel wr/rd/bc %0d/%0d/%0d, ring wr/rd/bc %0d/%0d/%0d",
             n_bridge, n_post, n_eth, n_tun_wr, n_tun_rd, n_tun_bc, n_ring_wr, n_ring_rd, n_ring_bc);
    `CHECK(n_multi > 0, "multi-span hop happened")
    `CHECK(n_detour > 0, "adaptive detour happened")
    `CHECK(n_bcast > 0, "broadcast fan-out happened")
    `CHECK(n_stall > 0, "credit stall happened")
    `CHECK(n_bp > 0, "Bridge FIFO back-pressure happened")
    `CHECK(n_bridge > 0 && n_post > 0 && n_eth > 0, "data paths used")
    `CHECK(n_tun_wr > 0 && n_tun_rd > 0 && n_tun_bc > 0, "NetTunnel operations")
    `CHECK(n_ring_wr > 0 && n_ring_rd > 0 && n_ring_bc > 0, "Ring Bus operations")
    `TB_FINISH
  end
endmodule
