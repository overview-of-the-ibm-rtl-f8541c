// inc_pkg: types and constants shared by the node network logic of the
// INC machine.
//
// Every node is a point (x,y,z) of a 3D mesh.  Traffic between nodes moves as
// packets of 65-bit flits: 64 data bits plus a "last" marker on the final flit.
// The first flit of every packet is a header (pkt_hdr_t) with the destination
// and source coordinates, a broadcast flag, the protocol that owns the packet
// (Internal Ethernet, Postmaster, NetTunnel, Bridge FIFO), a 5-bit channel for
// the Bridge FIFO mux/demux and a payload length in flits.  The header layout,
// the flit width and the local-bus bundle are choices of this design; the
// paper names the protocols and the mesh but gives no bit formats.
package inc_pkg;

  localparam int unsigned COORD_W    = 5;   // up to 32 nodes per dimension
  localparam int unsigned DATA_W     = 64;  // flit payload and local bus width
  localparam int unsigned FLIT_BYTES = DATA_W / 8;
  localparam int unsigned ADDR_W     = 32;  // 4 GB node address space
  localparam int unsigned NPORTS     = 13;  // local + 6 single-span + 6 multi-span

  // Router port numbering.  Ports 1..6 are single-span links, 7..12 the
  // multi-span links, in the order +X -X +Y -Y +Z -Z.
  localparam int unsigned P_LOCAL = 0;
  localparam int unsigned P_XP = 1, P_XM = 2, P_YP = 3, P_YM = 4, P_ZP = 5, P_ZM = 6;
  localparam int unsigned P_MXP = 7, P_MXM = 8, P_MYP = 9, P_MYM = 10, P_MZP = 11, P_MZM = 12;

  typedef enum logic [1:0] {
    PROTO_ETH    = 2'd0,
    PROTO_POST   = 2'd1,
    PROTO_TUNNEL = 2'd2,
    PROTO_BRIDGE = 2'd3
  } proto_e;

  typedef struct packed {
    logic [COORD_W-1:0] x;
    logic [COORD_W-1:0] y;
    logic [COORD_W-1:0] z;
  } coord_t;

  // 64-bit header flit.
  typedef struct packed {
    logic [17:0] rsvd;     // free for protocol use (NetTunnel opcode)
    logic [7:0]  len;      // payload flits that follow the header
    logic [4:0]  chan;     // Bridge FIFO channel
    proto_e      proto;
    logic        bcast;
    coord_t      src;
    coord_t      dst;
  } pkt_hdr_t;

  typedef struct packed {
    logic              last;
    logic [DATA_W-1:0] data;
  } flit_t;

  // One word per cycle on a link direction: a data flit or a credit grant
  // (data[15:0] = bytes of buffer space freed by the sender of the word).
  typedef struct packed {
    logic  valid;
    logic  is_credit;
    flit_t flit;
  } link_word_t;

  // Local bus: a master holds req until ack; rdata is valid with ack.
  typedef struct packed {
    logic              req;
    logic              we;
    logic [ADDR_W-1:0] addr;
    logic [DATA_W-1:0] wdata;
  } bus_req_t;

  typedef struct packed {
    logic              ack;
    logic [DATA_W-1:0] rdata;
  } bus_rsp_t;

  // Ring bus message.
  typedef enum logic [1:0] {
    RING_WRITE = 2'd0,
    RING_READ  = 2'd1,
    RING_RESP  = 2'd2,
    RING_BCAST = 2'd3
  } ring_op_e;

  typedef struct packed {
    logic              valid;
    ring_op_e          op;
    logic [4:0]        dst;
    logic [4:0]        src;
    logic [ADDR_W-1:0] addr;
    logic [DATA_W-1:0] data;
  } ring_msg_t;

  function automatic pkt_hdr_t make_hdr(coord_t dst, coord_t src, logic bcast,
                                        proto_e proto, logic [4:0] chan, logic [7:0] len);
    pkt_hdr_t h;
    h = '0;
    h.dst = dst; h.src = src; h.bcast = bcast; h.proto = proto; h.chan = chan; h.len = len;
    return h;
  endfunction

endpackage
