// inc_node: the network logic in the FPGA fabric of one INC node.
//
// A node is a Zynq device (ARM processor and FPGA on one die) with its own
// DRAM.  All access to the node's twelve links passes through this logic:
// six single-span links to the nearest neighbours and six multi-span links
// to the nodes SPAN positions away, each ending in a link_port with credit
// flow control.  The packet_router switches packets between the links and
// the node itself.  On the node side a packet_mux and a packet_demux let
// four protocols share the router: the Internal Ethernet device (eth_dma),
// Postmaster DMA (postmaster), NetTunnel (nettunnel) and BRIDGE_CH Bridge
// FIFO channels (bridge_fifo_tx/rx behind bridge_fifo_mux/demux).  A
// ring_node station joins the card's side-band Ring Bus.  The ring station,
// the NetTunnel target and the two DMA engines reach the node's memory space
// through one bus_arbiter and the mem_req/mem_rsp port, which stands for the
// Zynq's AXI path to processor and DRAM (not modelled here).
//
// Interfaces: link_out/link_in[i] is router port i+1 (order +X -X +Y -Y +Z
// -Z single span, then the same for multi span).  csr_* is the processor's
// register port: addresses below 0x100 are the Postmaster registers, from
// 0x100 the Internal Ethernet registers.  host_ring_* and host_tun_* are the
// command ports a host interface (PCIe) uses on a controller node; elsewhere
// they are tied off.  bf_* are the user-side Bridge FIFO ports.  ev_* are
// router event pulses for monitoring.  The split into these units follows the
// paper's figures; the address map and the widths are this design's.
module inc_node
  import inc_pkg::*;
#(
  parameter int unsigned SYS_X     = 12,
  parameter int unsigned SYS_Y     = 12,
  parameter int unsigned SYS_Z     = 3,
  parameter int unsigned BRIDGE_CH = 2,
  parameter int unsigned BF_WIDTH  = 64,
  parameter int unsigned LINK_BUF  = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  coord_t      my_pos,
  input  logic [4:0]  ring_id,
  // links (router ports 1..12)
  output link_word_t  link_out [12],
  input  link_word_t  link_in  [12],
  // ring bus
  input  ring_msg_t   ring_in,
  output logic        ring_in_ready,
  output ring_msg_t   ring_out,
  input  logic        ring_out_ready,
  // processor register port
  input  logic        csr_we,
  input  logic [8:0]  csr_addr,
  input  logic [63:0] csr_wdata,
  output logic [63:0] csr_rdata,
  output logic        csr_ready,
  output logic        eth_irq,
  // host command ports
  input  logic        host_ring_valid,
  output logic        host_ring_ready,
  input  ring_op_e    host_ring_op,
  input  logic [4:0]  host_ring_dst,
  input  logic [31:0] host_ring_addr,
  input  logic [63:0] host_ring_wdata,
  output logic        host_ring_rsp_valid,
  output logic [63:0] host_ring_rsp_data,
  input  logic        host_tun_valid,
  output logic        host_tun_ready,
  input  logic [1:0]  host_tun_op,
  input  coord_t      host_tun_dst,
  input  logic [31:0] host_tun_addr,
  input  logic [63:0] host_tun_wdata,
  output logic        host_tun_rsp_valid,
  output logic [63:0] host_tun_rsp_data,
  // Bridge FIFO user ports
  input  coord_t                bf_dst     [BRIDGE_CH],
  input  logic [BRIDGE_CH-1:0]  bf_wr_en,
  input  logic [BF_WIDTH-1:0]   bf_wr_data [BRIDGE_CH],
  output logic [BRIDGE_CH-1:0]  bf_full,
  input  logic [BRIDGE_CH-1:0]  bf_rd_en,
  output logic [BF_WIDTH-1:0]   bf_rd_data [BRIDGE_CH],
  output logic [BRIDGE_CH-1:0]  bf_empty,
  // memory port
  output bus_req_t    mem_req,
  input  bus_rsp_t    mem_rsp,
  // monitoring
  output logic        ev_detour,
  output logic        ev_bcast,
  output logic        ev_multi
);
  // router ports
  logic [NPORTS-1:0] r_in_valid, r_in_ready, r_out_valid, r_out_ready;
  flit_t             r_in_flit [NPORTS];
  flit_t             r_out_flit [NPORTS];

  for (genvar i = 0; i < 12; i++) begin : g_link
    link_port #(.BUF_FLITS(LINK_BUF)) u_link (
      .clk, .rst_n,
      .tx_valid(r_out_valid[i+1]), .tx_ready(r_out_ready[i+1]), .tx_flit(r_out_flit[i+1]),
      .rx_valid(r_in_valid[i+1]),  .rx_ready(r_in_ready[i+1]),  .rx_flit(r_in_flit[i+1]),
      .link_out(link_out[i]), .link_in(link_in[i]), .credits()
    );
  end

  packet_router #(.SYS_X(SYS_X), .SYS_Y(SYS_Y), .SYS_Z(SYS_Z)) u_router (
    .clk, .rst_n, .my_pos,
    .in_valid(r_in_valid), .in_ready(r_in_ready), .in_flit(r_in_flit),
    .out_valid(r_out_valid), .out_ready(r_out_ready), .out_flit(r_out_flit),
    .ev_detour, .ev_bcast, .ev_multi
  );

  // protocol mux / demux: 0 Ethernet, 1 Postmaster, 2 NetTunnel, 3 Bridge FIFO
  logic [3:0] p_tx_valid, p_tx_ready, p_rx_valid, p_rx_ready;
  flit_t      p_tx_flit [4];
  flit_t      p_rx_flit [4];

  packet_mux #(.N(4)) u_pmux (
    .clk, .rst_n, .in_valid(p_tx_valid), .in_ready(p_tx_ready), .in_flit(p_tx_flit),
    .out_valid(r_in_valid[P_LOCAL]), .out_ready(r_in_ready[P_LOCAL]), .out_flit(r_in_flit[P_LOCAL])
  );
  packet_demux #(.N(4)) u_pdemux (
    .clk, .rst_n, .in_valid(r_out_valid[P_LOCAL]), .in_ready(r_out_ready[P_LOCAL]),
    .in_flit(r_out_flit[P_LOCAL]),
    .out_valid(p_rx_valid), .out_ready(p_rx_ready), .out_flit(p_rx_flit)
  );

  // memory masters: 0 ring, 1 NetTunnel, 2 Postmaster, 3 Ethernet
  bus_req_t b_req [4];
  bus_rsp_t b_rsp [4];
  bus_arbiter #(.N(4)) u_arb (.clk, .rst_n, .m_req(b_req), .m_rsp(b_rsp), .s_req(mem_req), .s_rsp(mem_rsp));

  // register port split
  logic        pm_we, eth_we;
  logic [63:0] pm_rdata, eth_rdata;
  logic        pm_ready;
  assign pm_we     = csr_we && !csr_addr[8];
  assign eth_we    = csr_we &&  csr_addr[8];
  assign csr_rdata = csr_addr[8] ? eth_rdata : pm_rdata;
  assign csr_ready = csr_addr[8] ? 1'b1 : pm_ready;

  eth_dma u_eth (
    .clk, .rst_n, .my_pos,
    .csr_we(eth_we), .csr_addr(csr_addr[7:0]), .csr_wdata, .csr_rdata(eth_rdata), .irq(eth_irq),
    .out_valid(p_tx_valid[PROTO_ETH]), .out_ready(p_tx_ready[PROTO_ETH]), .out_flit(p_tx_flit[PROTO_ETH]),
    .in_valid(p_rx_valid[PROTO_ETH]), .in_ready(p_rx_ready[PROTO_ETH]), .in_flit(p_rx_flit[PROTO_ETH]),
    .bus_req(b_req[3]), .bus_rsp(b_rsp[3])
  );

  postmaster u_post (
    .clk, .rst_n, .my_pos,
    .csr_we(pm_we), .csr_addr(csr_addr[7:0]), .csr_wdata, .csr_rdata(pm_rdata), .csr_ready(pm_ready),
    .out_valid(p_tx_valid[PROTO_POST]), .out_ready(p_tx_ready[PROTO_POST]), .out_flit(p_tx_flit[PROTO_POST]),
    .in_valid(p_rx_valid[PROTO_POST]), .in_ready(p_rx_ready[PROTO_POST]), .in_flit(p_rx_flit[PROTO_POST]),
    .bus_req(b_req[2]), .bus_rsp(b_rsp[2])
  );

  nettunnel u_tun (
    .clk, .rst_n, .my_pos,
    .cmd_valid(host_tun_valid), .cmd_ready(host_tun_ready), .cmd_op(host_tun_op),
    .cmd_dst(host_tun_dst), .cmd_addr(host_tun_addr), .cmd_wdata(host_tun_wdata),
    .rsp_valid(host_tun_rsp_valid), .rsp_data(host_tun_rsp_data),
    .out_valid(p_tx_valid[PROTO_TUNNEL]), .out_ready(p_tx_ready[PROTO_TUNNEL]), .out_flit(p_tx_flit[PROTO_TUNNEL]),
    .in_valid(p_rx_valid[PROTO_TUNNEL]), .in_ready(p_rx_ready[PROTO_TUNNEL]), .in_flit(p_rx_flit[PROTO_TUNNEL]),
    .bus_req(b_req[1]), .bus_rsp(b_rsp[1])
  );

  ring_node u_ring (
    .clk, .rst_n, .my_id(ring_id),
    .ring_in, .ring_in_ready, .ring_out, .ring_out_ready,
    .cmd_valid(host_ring_valid), .cmd_ready(host_ring_ready), .cmd_op(host_ring_op),
    .cmd_dst(host_ring_dst), .cmd_addr(host_ring_addr), .cmd_wdata(host_ring_wdata),
    .rsp_valid(host_ring_rsp_valid), .rsp_data(host_ring_rsp_data),
    .bus_req(b_req[0]), .bus_rsp(b_rsp[0])
  );

  // Bridge FIFO channels
  logic [BRIDGE_CH-1:0] bt_valid, bt_ready, br_valid, br_ready;
  flit_t                bt_flit [BRIDGE_CH];
  flit_t                br_flit [BRIDGE_CH];

  for (genvar c = 0; c < BRIDGE_CH; c++) begin : g_bf
    bridge_fifo_tx #(.WIDTH(BF_WIDTH)) u_tx (
      .clk, .rst_n, .my_pos, .dst(bf_dst[c]),
      .wr_en(bf_wr_en[c]), .wr_data(bf_wr_data[c]), .full(bf_full[c]),
      .out_valid(bt_valid[c]), .out_ready(bt_ready[c]), .out_flit(bt_flit[c])
    );
    bridge_fifo_rx #(.WIDTH(BF_WIDTH)) u_rx (
      .clk, .rst_n, .in_valid(br_valid[c]), .in_ready(br_ready[c]), .in_flit(br_flit[c]),
      .rd_en(bf_rd_en[c]), .rd_data(bf_rd_data[c]), .empty(bf_empty[c]), .count()
    );
  end

  bridge_fifo_mux #(.N(BRIDGE_CH)) u_bmux (
    .clk, .rst_n, .in_valid(bt_valid), .in_ready(bt_ready), .in_flit(bt_flit),
    .out_valid(p_tx_valid[PROTO_BRIDGE]), .out_ready(p_tx_ready[PROTO_BRIDGE]), .out_flit(p_tx_flit[PROTO_BRIDGE])
  );
  bridge_fifo_demux #(.N(BRIDGE_CH)) u_bdemux (
    .clk, .rst_n, .in_valid(p_rx_valid[PROTO_BRIDGE]), .in_ready(p_rx_ready[PROTO_BRIDGE]),
    .in_flit(p_rx_flit[PROTO_BRIDGE]),
    .out_valid(br_valid), .out_ready(br_ready), .out_flit(br_flit)
  );
endmodule
