// nettunnel: remote read and write of any node's 32-bit address space over
// the packet network, the network counterpart of the ring bus.
//
// Initiator: a command (cmd_op 0 write, 1 read, 2 broadcast write; node
// cmd_dst, address, write data) is taken when cmd_valid and cmd_ready are
// both high and sent as a NetTunnel packet: header (opcode in the header's
// spare bits), address flit, and for writes a data flit.  A broadcast write
// is sent as a broadcast packet and reaches every node of the system, as used
// to load one image into all nodes at once.  A write completes when it has
// been sent; a read waits for the response packet and returns its data on
// rsp_valid/rsp_data.  One command is outstanding at a time.
//
// Target: a request packet from any node is queued (RQ_DEPTH entries) and
// carried out on the local bus (bus_req held until bus_rsp.ack); a read is
// answered with a response packet to the requesting node.  Response packets
// bypass the queue, so two nodes reading each other at once cannot block.
// More than RQ_DEPTH requests arriving together stall the network input.  Responses and new requests share the outgoing
// packet port one whole packet at a time.
//
// The paper describes the function (Ring Bus-like access carried by the
// network, spanning the whole system); packet formats, the one-outstanding
// rule and the port arbitration are this design's.
module nettunnel
  import inc_pkg::*;
#(
  parameter int unsigned RQ_DEPTH = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  coord_t      my_pos,
  // commands from the local initiator (PCIe host interface, processor)
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  logic [1:0]  cmd_op,
  input  coord_t      cmd_dst,
  input  logic [31:0] cmd_addr,
  input  logic [63:0] cmd_wdata,
  output logic        rsp_valid,
  output logic [63:0] rsp_data,
  // packets
  output logic        out_valid,
  input  logic        out_ready,
  output flit_t       out_flit,
  input  logic        in_valid,
  output logic        in_ready,
  input  flit_t       in_flit,
  // local bus master
  output bus_req_t    bus_req,
  input  bus_rsp_t    bus_rsp
);
  localparam logic [1:0] OP_WR = 2'd0, OP_RD = 2'd1, OP_BC = 2'd2, OP_RSP = 2'd3;

  // ------------------------------------------------------------ initiator
  typedef enum logic [2:0] {M_IDLE, M_HDR, M_ADDR, M_DATA, M_WAIT} mstate_e;
  mstate_e     m_q;
  logic [1:0]  mop_q;
  coord_t      mdst_q;
  logic [31:0] maddr_q;
  logic [63:0] mdata_q;

  // --------------------------------------------------------------- target
  // Incoming packets are parsed by the I_* machine: responses go straight to
  // the initiator, requests into a RQ_DEPTH-entry queue worked off by the
  // T_* machine, so a response is never stuck behind this node's own work.
  typedef enum logic [1:0] {I_HDR, I_ADDR, I_DATA, I_RSP} istate_e;
  typedef enum logic [1:0] {T_IDLE, T_BUS, T_RHDR, T_RDAT} tstate_e;
  typedef struct packed {
    logic [1:0]  op;
    coord_t      src;
    logic [31:0] addr;
    logic [63:0] data;
  } treq_t;

  istate_e     i_q;
  tstate_e     t_q;
  treq_t       ireq_q, rq_head, rq_new;
  logic        rq_full, rq_empty, rq_push, rq_pop;
  logic [63:0] tdata_q;
  pkt_hdr_t    ih;

  logic        m_sending, t_sending, own_m_q, own_t_q;

  assign ih        = pkt_hdr_t'(in_flit.data);
  assign cmd_ready = (m_q == M_IDLE);
  assign m_sending = (m_q == M_HDR || m_q == M_ADDR || m_q == M_DATA) && !own_t_q &&
                     (own_m_q || !(t_q == T_RHDR));
  assign t_sending = (t_q == T_RHDR || t_q == T_RDAT) && !m_sending;

  always_comb begin
    pkt_hdr_t h;
    out_valid = m_sending || t_sending;
    out_flit  = '0;
    h         = '0;
    if (m_sending) begin
      unique case (m_q)
        M_HDR: begin
          h = make_hdr(mdst_q, my_pos, mop_q == OP_BC, PROTO_TUNNEL, 5'd0,
                       (mop_q == OP_RD) ? 8'd1 : 8'd2);
          h.rsvd[1:0] = (mop_q == OP_BC) ? OP_WR : mop_q;
          out_flit.data = DATA_W'(h);
        end
        M_ADDR: begin
          out_flit.data = 64'(maddr_q);
          out_flit.last = (mop_q == OP_RD);
        end
        default: begin
          out_flit.data = mdata_q;
          out_flit.last = 1'b1;
        end
      endcase
    end else if (t_sending) begin
      if (t_q == T_RHDR) begin
        h = make_hdr(rq_head.src, my_pos, 1'b0, PROTO_TUNNEL, 5'd0, 8'd1);
        h.rsvd[1:0] = OP_RSP;
        out_flit.data = DATA_W'(h);
      end else begin
        out_flit.data = tdata_q;
        out_flit.last = 1'b1;
      end
    end
  end

  // the last flit of a request needs room in the queue
  assign in_ready = !(in_flit.last && (i_q == I_ADDR || i_q == I_DATA) && rq_full);
  assign rq_push  = in_valid && in_ready && in_flit.last && (i_q == I_ADDR || i_q == I_DATA);
  always_comb begin
    rq_new = ireq_q;
    if (i_q == I_ADDR) rq_new.addr = in_flit.data[31:0];
    else               rq_new.data = in_flit.data;
  end
  assign rq_pop   = (t_q == T_BUS && bus_rsp.ack && rq_head.op != OP_RD) ||
                    (t_q == T_RDAT && t_sending && out_ready);
  assign bus_req  = '{req: t_q == T_BUS, we: rq_head.op != OP_RD, addr: rq_head.addr, wdata: rq_head.data};

  sync_fifo #(.W($bits(treq_t)), .DEPTH(RQ_DEPTH)) u_rq (
    .clk, .rst_n, .push(rq_push), .wdata(rq_new), .pop(rq_pop),
    .rdata(rq_head), .full(rq_full), .empty(rq_empty), .count()
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_q <= M_IDLE; mop_q <= '0; mdst_q <= '0; maddr_q <= '0; mdata_q <= '0;
      i_q <= I_HDR; t_q <= T_IDLE; ireq_q <= '0; tdata_q <= '0;
      own_m_q <= 1'b0; own_t_q <= 1'b0;
      rsp_valid <= 1'b0; rsp_data <= '0;
    end else begin
      rsp_valid <= 1'b0;
      // packet ownership of the output
      if (out_valid && out_ready) begin
        own_m_q <= m_sending && !out_flit.last;
        own_t_q <= t_sending && !out_flit.last;
      end

      unique case (m_q)
        M_IDLE: if (cmd_valid) begin
          mop_q <= cmd_op; mdst_q <= cmd_dst; maddr_q <= cmd_addr; mdata_q <= cmd_wdata;
          m_q   <= M_HDR;
        end
        M_HDR:  if (m_sending && out_ready) m_q <= M_ADDR;
        M_ADDR: if (m_sending && out_ready) m_q <= (mop_q == OP_RD) ? M_WAIT : M_DATA;
        M_DATA: if (m_sending && out_ready) m_q <= M_IDLE;
        M_WAIT: ;  // left when the response arrives (below)
        default: m_q <= M_IDLE;
      endcase

      unique case (i_q)
        I_HDR: if (in_valid) begin
          ireq_q.src <= ih.src;
          ireq_q.op  <= ih.rsvd[1:0];
          if (!in_flit.last) i_q <= (ih.rsvd[1:0] == OP_RSP) ? I_RSP : I_ADDR;
        end
        I_ADDR: if (in_valid && in_ready) begin
          ireq_q.addr <= in_flit.data[31:0];
          i_q <= in_flit.last ? I_HDR : I_DATA;
        end
        I_DATA: if (in_valid && in_ready) begin
          ireq_q.data <= in_flit.data;
          if (in_flit.last) i_q <= I_HDR;
        end
        I_RSP: if (in_valid) begin
          rsp_data  <= in_flit.data;
          rsp_valid <= 1'b1;
          if (m_q == M_WAIT) m_q <= M_IDLE;
          if (in_flit.last) i_q <= I_HDR;
        end
        default: i_q <= I_HDR;
      endcase

      unique case (t_q)
        T_IDLE: if (!rq_empty) t_q <= T_BUS;
        T_BUS: if (bus_rsp.ack) begin
          tdata_q <= bus_rsp.rdata;
          t_q     <= (rq_head.op == OP_RD) ? T_RHDR : T_IDLE;
        end
        T_RHDR: if (t_sending && out_ready) t_q <= T_RDAT;
        T_RDAT: if (t_sending && out_ready) t_q <= T_IDLE;
        default: t_q <= T_IDLE;
      endcase
    end
  end

  one_owner: assert property (@(posedge clk) disable iff (!rst_n) !(m_sending && t_sending))
    else $error("nettunnel: two packets on one port");
endmodule
