// postmaster: the Postmaster DMA channel, a light-weight way to send small
// pieces of data to a queue in another node's memory.
//
// Transmit: the processor or an FPGA module writes 64-bit words to a queue
// register at a fixed address (QUEUE, 0x08) of the register port.  Words
// written since the last packet are sent as one packet to the node in the DEST
// register (0x00) when SEND (0x10) is written or MAX_WORDS words have been
// queued.  csr_ready is low while the queue cannot take a word.
//
// Receive: a Postmaster packet from any initiator is first collected whole in
// a local buffer, then a DMA engine writes it to a linear buffer in system
// memory (BASE 0x18, SIZE 0x20 bytes) at the write pointer (WPTR 0x28, an
// offset): first the packet's header word, which tells the reader the source
// node and the length, then the payload words.  Packets are therefore stored
// in arrival order, and each one in contiguous locations; one that would run
// past the end of the buffer starts again at BASE.  RXCNT (0x30) counts
// stored packets.  Registers are read combinationally on csr_rdata.
//
// The queue-at-a-fixed-address model, arrival-order storage and contiguity
// follow the paper.  The register map, the header word in memory, the send
// rule and the wrap are this design's.  Memory writes use bus_req/bus_rsp
// (req held until ack), one 64-bit word each.
module postmaster
  import inc_pkg::*;
#(
  parameter int unsigned MAX_WORDS = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  coord_t      my_pos,
  // register port
  input  logic        csr_we,
  input  logic [7:0]  csr_addr,
  input  logic [63:0] csr_wdata,
  output logic [63:0] csr_rdata,
  output logic        csr_ready,
  // packets out (to the packet mux) and in (from the packet demux)
  output logic        out_valid,
  input  logic        out_ready,
  output flit_t       out_flit,
  input  logic        in_valid,
  output logic        in_ready,
  input  flit_t       in_flit,
  // memory port
  output bus_req_t    bus_req,
  input  bus_rsp_t    bus_rsp
);
  localparam logic [7:0] A_DEST = 8'h00, A_QUEUE = 8'h08, A_SEND = 8'h10,
                         A_BASE = 8'h18, A_SIZE = 8'h20, A_WPTR = 8'h28, A_RXCNT = 8'h30;
  localparam int unsigned QD  = 2 * MAX_WORDS;
  localparam int unsigned QCW = $clog2(QD + 1);
  localparam int unsigned RD  = 2 * MAX_WORDS;          // one packet plus its header
  localparam int unsigned RCW = $clog2(RD + 1);

  // ---------------------------------------------------------------- transmit
  typedef struct packed { coord_t dst; logic [7:0] len; } job_t;

  coord_t     dest_q;
  logic [7:0] open_q;        // words queued for the packet being built
  logic       q_full, q_empty, q_pop, q_push;
  logic [63:0] q_head;
  logic [QCW-1:0] q_count;
  logic       j_full, j_empty, j_push, j_pop;
  job_t       j_head, j_new;
  logic [7:0] left_q;
  logic       t_hdr_q, t_busy_q;
  logic       close;

  assign q_push    = csr_we && csr_addr == A_QUEUE && !q_full && !j_full;
  assign csr_ready = !(csr_addr == A_QUEUE && (q_full || j_full));
  assign close     = !j_full && ((csr_we && csr_addr == A_SEND && open_q != 0) ||
                                 (q_push && open_q == 8'(MAX_WORDS - 1)));
  assign j_new     = '{dst: dest_q, len: (csr_addr == A_SEND) ? open_q : open_q + 1'b1};
  assign j_push    = close;

  sync_fifo #(.W(64), .DEPTH(QD)) u_txq (
    .clk, .rst_n, .push(q_push), .wdata(csr_wdata), .pop(q_pop),
    .rdata(q_head), .full(q_full), .empty(q_empty), .count(q_count)
  );
  sync_fifo #(.W($bits(job_t)), .DEPTH(4)) u_jobs (
    .clk, .rst_n, .push(j_push), .wdata(j_new), .pop(j_pop),
    .rdata(j_head), .full(j_full), .empty(j_empty), .count()
  );

  always_comb begin
    out_flit  = '0;
    out_valid = 1'b0;
    q_pop     = 1'b0;
    j_pop     = 1'b0;
    if (t_busy_q && t_hdr_q) begin
      out_valid     = 1'b1;
      out_flit.data = DATA_W'(make_hdr(j_head.dst, my_pos, 1'b0, PROTO_POST, 5'd0, j_head.len));
    end else if (t_busy_q) begin
      out_valid     = !q_empty;
      out_flit.data = q_head;
      out_flit.last = (left_q == 8'd1);
      q_pop         = out_ready && !q_empty;
      j_pop         = q_pop && left_q == 8'd1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dest_q   <= '0;
      open_q   <= '0;
      t_busy_q <= 1'b0;
      t_hdr_q  <= 1'b0;
      left_q   <= '0;
    end else begin
      if (csr_we && csr_addr == A_DEST) dest_q <= coord_t'(csr_wdata[3*COORD_W-1:0]);
      if (close)       open_q <= '0;
      else if (q_push) open_q <= open_q + 1'b1;
      if (!t_busy_q && !j_empty) begin
        t_busy_q <= 1'b1;
        t_hdr_q  <= 1'b1;
      end else if (t_busy_q && t_hdr_q && out_ready) begin
        t_hdr_q <= 1'b0;
        left_q  <= j_head.len;
      end else if (q_pop) begin
        left_q <= left_q - 1'b1;
        if (left_q == 8'd1) t_busy_q <= 1'b0;
      end
    end
  end

  // ----------------------------------------------------------------- receive
  typedef enum logic [1:0] {R_COLLECT, R_PLACE, R_WRITE} rstate_e;

  rstate_e        r_state_q;
  logic [31:0]    base_q, size_q, wptr_q, rxcnt_q;
  logic [RCW-1:0] r_count;
  logic           r_full, r_empty, r_push, r_pop;
  logic [63:0]    r_head;
  logic [31:0]    need;

  assign in_ready = (r_state_q == R_COLLECT) && !r_full;
  assign r_push   = in_valid && in_ready;
  assign need     = 32'(r_count) * 32'd8;

  sync_fifo #(.W(64), .DEPTH(RD)) u_rxbuf (
    .clk, .rst_n, .push(r_push), .wdata(in_flit.data), .pop(r_pop),
    .rdata(r_head), .full(r_full), .empty(r_empty), .count(r_count)
  );

  assign bus_req = '{req: (r_state_q == R_WRITE) && !r_empty, we: 1'b1,
                     addr: base_q + wptr_q, wdata: r_head};
  assign r_pop   = bus_req.req && bus_rsp.ack;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_state_q <= R_COLLECT;
      base_q    <= '0;
      size_q    <= 32'h1000;
      wptr_q    <= '0;
      rxcnt_q   <= '0;
    end else begin
      if (csr_we && csr_addr == A_BASE) base_q <= csr_wdata[31:0];
      if (csr_we && csr_addr == A_SIZE) size_q <= csr_wdata[31:0];
      if (csr_we && csr_addr == A_WPTR) wptr_q <= csr_wdata[31:0];
      unique case (r_state_q)
        R_COLLECT: if (r_push && in_flit.last) r_state_q <= R_PLACE;
        R_PLACE: begin
          // keep the whole packet contiguous
          if (wptr_q + need > size_q) wptr_q <= '0;
          r_state_q <= R_WRITE;
        end
        R_WRITE: begin
          if (r_pop) wptr_q <= wptr_q + 32'd8;
          if (r_pop && r_count == RCW'(1)) begin
            rxcnt_q   <= rxcnt_q + 1'b1;
            r_state_q <= R_COLLECT;
          end
        end
        default: r_state_q <= R_COLLECT;
      endcase
    end
  end

  always_comb begin
    unique case (csr_addr)
      A_DEST:  csr_rdata = 64'(dest_q);
      A_BASE:  csr_rdata = 64'(base_q);
      A_SIZE:  csr_rdata = 64'(size_q);
      A_WPTR:  csr_rdata = 64'(wptr_q);
      A_RXCNT: csr_rdata = 64'(rxcnt_q);
      default: csr_rdata = {32'd0, 16'(q_count), 8'(open_q), 8'd0};
    endcase
  end

  pkt_fits: assert property (@(posedge clk) disable iff (!rst_n)
                             !(in_valid && r_full && r_state_q == R_COLLECT))
    else $error("postmaster: received packet longer than MAX_WORDS");
endmodule
