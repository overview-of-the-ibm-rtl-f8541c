// inc_card: one INC card, the building block of the machine: 27 nodes in a
// 3 x 3 x 3 cube of the system's 3D mesh, with the card's Ring Bus.
//
// Node n of the card sits at local position (lx,ly,lz) with n = 9*lx + 3*ly
// + lz; its system coordinates are card_origin plus that position, so node 0
// is the card's (000) corner, the controller node with the host (PCIe)
// interface.  Single-span links between neighbours on the card are wired
// here.  Links that leave the card (single-span links on the faces of the
// cube, and all multi-span links, which join nodes three apart and therefore
// always end on another card) appear on ext_link_out/ext_link_in[n][i],
// where i is the node's link number (router port i+1: +X -X +Y -Y +Z -Z
// single span, then multi span).  For a link that stays on the card the
// ext_link_out entry is zero and ext_link_in is not used.  A backplane (or a
// testbench) joins cards by wiring these ports; links at the edge of the
// SYS_X x SYS_Y x SYS_Z system are never used by the routers.  With 54
// single-span and 162 multi-span links leaving, 432 unidirectional
// connections cross the card edge, the count the paper gives.
//
// The Ring Bus joins the 27 ring_node stations in the order n = 0..26 and
// back to 0.  Node 0's host command ports (ring bus and NetTunnel) are the
// card's host_* ports; the other nodes' are tied off.  Each node's processor
// register port, Internal Ethernet interrupt, memory port and Bridge FIFO
// user ports are brought out per node, since processor, DRAM and user logic
// are outside this design.
//
// Every flip-flop of the card resets asynchronously on rst_n low.  Verilator
// reports rst_n as used both asynchronously and synchronously: the
// synchronous use is the disable condition of the handshake assertions in
// the sub-blocks, which is not hardware, so the warning stands.
//
// The 3x3x3 cube, single-span and multi-span links and the 27-link ring
// follow the paper; the node numbering, the ring order and the port
// arrangement are this design's.
module inc_card
  import inc_pkg::*;
#(
  parameter int unsigned SYS_X     = 12,
  parameter int unsigned SYS_Y     = 12,
  parameter int unsigned SYS_Z     = 3,
  parameter int unsigned BRIDGE_CH = 2,
  parameter int unsigned BF_WIDTH  = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  coord_t      card_origin,
  // off-card links
  output link_word_t  ext_link_out [27][12],
  input  link_word_t  ext_link_in  [27][12],
  // per-node processor register ports and memory ports
  input  logic [26:0] csr_we,
  input  logic [8:0]  csr_addr   [27],
  input  logic [63:0] csr_wdata  [27],
  output logic [63:0] csr_rdata  [27],
  output logic [26:0] csr_ready,
  output logic [26:0] eth_irq,
  output bus_req_t    mem_req    [27],
  input  bus_rsp_t    mem_rsp    [27],
  // per-node Bridge FIFO user ports
  input  coord_t               bf_dst     [27][BRIDGE_CH],
  input  logic [BRIDGE_CH-1:0] bf_wr_en   [27],
  input  logic [BF_WIDTH-1:0]  bf_wr_data [27][BRIDGE_CH],
  output logic [BRIDGE_CH-1:0] bf_full    [27],
  input  logic [BRIDGE_CH-1:0] bf_rd_en   [27],
  output logic [BF_WIDTH-1:0]  bf_rd_data [27][BRIDGE_CH],
  output logic [BRIDGE_CH-1:0] bf_empty   [27],
  // host command ports of the controller node (000)
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
  // router events per node
  output logic [26:0] ev_detour,
  output logic [26:0] ev_bcast,
  output logic [26:0] ev_multi
);
  link_word_t n_out [27][12];
  link_word_t n_in  [27][12];
  ring_msg_t  r_msg [27];
  logic [26:0] r_ready;
  logic [26:0] hr_ready, hr_rsp_v, ht_ready, ht_rsp_v;
  logic [63:0] hr_rsp_d [27];
  logic [63:0] ht_rsp_d [27];

  // Index of the neighbour across single-span link i of node n, or -1 if the
  // link leaves the card.
  function automatic int neighbour(int n, int i);
    int lx, ly, lz;
    lx = n / 9; ly = (n / 3) % 3; lz = n % 3;
    unique case (i)
      0: return (lx < 2) ? n + 9 : -1;
      1: return (lx > 0) ? n - 9 : -1;
      2: return (ly < 2) ? n + 3 : -1;
      3: return (ly > 0) ? n - 3 : -1;
      4: return (lz < 2) ? n + 1 : -1;
      5: return (lz > 0) ? n - 1 : -1;
      default: return -1;
    endcase
  endfunction

  for (genvar n = 0; n < 27; n++) begin : g_node
    localparam int LX = n / 9, LY = (n / 3) % 3, LZ = n % 3;
    coord_t pos;
    assign pos = '{x: card_origin.x + COORD_W'(LX), y: card_origin.y + COORD_W'(LY),
                   z: card_origin.z + COORD_W'(LZ)};

    for (genvar i = 0; i < 12; i++) begin : g_l
      localparam int NB = neighbour(n, i);
      // the link that points back is the partner of the same dimension
      localparam int BACK = (i % 2 == 0) ? i + 1 : i - 1;
      if (NB >= 0) begin : g_on
        assign n_in[n][i]         = n_out[NB][BACK];
        assign ext_link_out[n][i] = '0;
      end else begin : g_off
        assign n_in[n][i]         = ext_link_in[n][i];
        assign ext_link_out[n][i] = n_out[n][i];
      end
    end

    inc_node #(.SYS_X(SYS_X), .SYS_Y(SYS_Y), .SYS_Z(SYS_Z),
               .BRIDGE_CH(BRIDGE_CH), .BF_WIDTH(BF_WIDTH)) u_node (
      .clk, .rst_n, .my_pos(pos), .ring_id(5'(n)),
      .link_out(n_out[n]), .link_in(n_in[n]),
      .ring_in(r_msg[(n + 26) % 27]), .ring_in_ready(r_ready[(n + 26) % 27]),
      .ring_out(r_msg[n]), .ring_out_ready(r_ready[n]),
      .csr_we(csr_we[n]), .csr_addr(csr_addr[n]), .csr_wdata(csr_wdata[n]),
      .csr_rdata(csr_rdata[n]), .csr_ready(csr_ready[n]), .eth_irq(eth_irq[n]),
      .host_ring_valid(n == 0 ? host_ring_valid : 1'b0),
      .host_ring_ready(hr_ready[n]), .host_ring_op(host_ring_op), .host_ring_dst(host_ring_dst),
      .host_ring_addr(host_ring_addr), .host_ring_wdata(host_ring_wdata),
      .host_ring_rsp_valid(hr_rsp_v[n]), .host_ring_rsp_data(hr_rsp_d[n]),
      .host_tun_valid(n == 0 ? host_tun_valid : 1'b0),
      .host_tun_ready(ht_ready[n]), .host_tun_op(host_tun_op), .host_tun_dst(host_tun_dst),
      .host_tun_addr(host_tun_addr), .host_tun_wdata(host_tun_wdata),
      .host_tun_rsp_valid(ht_rsp_v[n]), .host_tun_rsp_data(ht_rsp_d[n]),
      .bf_dst(bf_dst[n]), .bf_wr_en(bf_wr_en[n]), .bf_wr_data(bf_wr_data[n]), .bf_full(bf_full[n]),
      .bf_rd_en(bf_rd_en[n]), .bf_rd_data(bf_rd_data[n]), .bf_empty(bf_empty[n]),
      .mem_req(mem_req[n]), .mem_rsp(mem_rsp[n]),
      .ev_detour(ev_detour[n]), .ev_bcast(ev_bcast[n]), .ev_multi(ev_multi[n])
    );
  end

  // the controller node's host responses; the other nodes' are not used
  assign host_ring_ready     = hr_ready[0];
  assign host_ring_rsp_valid = hr_rsp_v[0];
  assign host_ring_rsp_data  = hr_rsp_d[0];
  assign host_tun_ready      = ht_ready[0];
  assign host_tun_rsp_valid  = ht_rsp_v[0];
  assign host_tun_rsp_data   = ht_rsp_d[0];
endmodule
