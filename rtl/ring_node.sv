// ring_node: one station of the card's Ring Bus, a side-band channel that
// joins the nodes of a card (27 on an INC card) in a ring of unidirectional
// point-to-point links, independent of the packet network.
//
// Messages (ring_msg_t: op, destination and source station, 32-bit address,
// 64-bit data) move one station per cycle at best.  Each station looks at
// what arrives on ring_in:
//   * a write or read for this station is carried out on the local bus; a
//     read is answered with a response message sent on round the ring to the
//     requester;
//   * a response for this station is handed to the local initiator
//     (rsp_valid/rsp_data);
//   * a broadcast write is written locally and passed on, except at the
//     station that sent it, which writes it and takes it off the ring, so
//     every station on the ring is written exactly once;
//   * anything else is passed on unchanged.
// The local initiator (on the controller node, the PCIe host) issues
// commands with cmd_valid/cmd_ready; one read is outstanding at a time, a
// write is finished when it leaves the station.  Each ring link is
// valid/ready; ring_out is a register that accepts a new message only once
// the previous one has been taken.  Passing traffic goes first, then a
// local read response, then a new local command.
//
// The ring topology, forwarding through intervening nodes, broadcast writes
// and hardware-only routing follow the paper.  The message format, the
// handshake and the removal rule for broadcasts are this design's.
module ring_node
  import inc_pkg::*;
#(
  parameter int unsigned NODES = 27
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [4:0]  my_id,
  input  ring_msg_t   ring_in,
  output logic        ring_in_ready,
  output ring_msg_t   ring_out,
  input  logic        ring_out_ready,
  // local initiator
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  ring_op_e    cmd_op,
  input  logic [4:0]  cmd_dst,
  input  logic [31:0] cmd_addr,
  input  logic [63:0] cmd_wdata,
  output logic        rsp_valid,
  output logic [63:0] rsp_data,
  // local bus master
  output bus_req_t    bus_req,
  input  bus_rsp_t    bus_rsp
);
  typedef enum logic [1:0] {E_IDLE, E_BUS, E_RESP} estate_e;

  estate_e     e_q;
  ring_op_e    eop_q;
  logic [4:0]  esrc_q;
  logic [31:0] eaddr_q;
  logic [63:0] edata_q;
  logic        waiting_q;

  logic slot_free, is_mine, home_bcast, need_engine, need_fwd, accept, fwd;
  logic send_resp, send_cmd;

  // The ready of the next station is not passed back combinationally, which
  // would close a loop around the ring; a message therefore moves on every
  // other cycle at most.
  assign slot_free  = !ring_out.valid;
  assign is_mine    = ring_in.dst == my_id;
  assign home_bcast = ring_in.op == RING_BCAST && ring_in.src == my_id;

  always_comb begin
    need_engine = 1'b0;
    need_fwd    = 1'b0;
    unique case (ring_in.op)
      RING_WRITE, RING_READ: begin need_engine = is_mine; need_fwd = !is_mine; end
      RING_RESP:             need_fwd = !is_mine;
      default: begin         need_engine = 1'b1; need_fwd = !home_bcast; end
    endcase
    accept = ring_in.valid && (!need_engine || e_q == E_IDLE) && (!need_fwd || slot_free);
    fwd    = accept && need_fwd;
  end

  assign ring_in_ready = accept;
  assign send_resp     = !fwd && slot_free && e_q == E_RESP;
  assign send_cmd      = !fwd && !send_resp && slot_free && cmd_valid && !waiting_q;
  assign cmd_ready     = send_cmd;
  assign bus_req       = '{req: e_q == E_BUS, we: eop_q != RING_READ, addr: eaddr_q, wdata: edata_q};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ring_out  <= '0;
      e_q       <= E_IDLE;
      eop_q     <= RING_WRITE;
      esrc_q    <= '0;
      eaddr_q   <= '0;
      edata_q   <= '0;
      waiting_q <= 1'b0;
      rsp_valid <= 1'b0;
      rsp_data  <= '0;
    end else begin
      rsp_valid <= 1'b0;
      if (fwd)
        ring_out <= ring_in;
      else if (send_resp)
        ring_out <= '{valid: 1'b1, op: RING_RESP, dst: esrc_q, src: my_id, addr: eaddr_q, data: edata_q};
      else if (send_cmd)
        ring_out <= '{valid: 1'b1, op: cmd_op, dst: cmd_dst, src: my_id, addr: cmd_addr, data: cmd_wdata};
      else if (ring_out.valid && ring_out_ready)
        ring_out.valid <= 1'b0;

      if (send_cmd && cmd_op == RING_READ) waiting_q <= 1'b1;
      if (accept && ring_in.op == RING_RESP && is_mine) begin
        rsp_valid <= 1'b1;
        rsp_data  <= ring_in.data;
        waiting_q <= 1'b0;
      end

      unique case (e_q)
        E_IDLE: if (accept && need_engine) begin
          eop_q   <= ring_in.op;
          esrc_q  <= ring_in.src;
          eaddr_q <= ring_in.addr;
          edata_q <= ring_in.data;
          e_q     <= E_BUS;
        end
        E_BUS: if (bus_rsp.ack) begin
          edata_q <= bus_rsp.rdata;
          e_q     <= (eop_q == RING_READ) ? E_RESP : E_IDLE;
        end
        E_RESP: if (send_resp) e_q <= E_IDLE;
        default: e_q <= E_IDLE;
      endcase
    end
  end

  id_range: assert property (@(posedge clk) disable iff (!rst_n) 32'(my_id) < NODES)
    else $error("ring_node: station id out of range");
endmodule
