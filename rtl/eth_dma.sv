// eth_dma: the FPGA side of the node's virtual internal Ethernet interface.
//
// The Linux driver on the node's processor sees an Ethernet-like device with
// NDESC transmit and NDESC receive buffer descriptors, here held as
// registers of the device.  Transmit descriptor i is TXA (0x00+16i, buffer
// address) and TXC (0x08+16i: bit 63 OWN, bits 46:32 destination node, bits
// 7:0 length in 64-bit words).  The driver fills a frame into memory, writes
// TXA and then TXC with OWN set; that status bit tells the hardware the frame
// is ready.  The transmit engine serves the descriptors in ring order: it
// reads the frame word by word from memory (the AXI-HP path of the Zynq,
// here bus_req/bus_rsp), sends it as an Internal Ethernet packet and clears
// OWN.  Receive descriptor i is RXA (0x40+16i) and RXC (0x48+16i: bit 63 OWN
// = the buffer is free for the hardware, bit 62 DONE, bits 46:32 source
// node, bits 7:0 length).  A received packet is written into the next
// descriptor's buffer; then OWN is cleared, DONE set and, if enabled by IE
// (0x80 bit 0), irq is raised until cleared by writing 0x88.  The driver may
// instead poll DONE, which the paper notes is better under heavy traffic.
// A packet that finds no free receive buffer is dropped, as an Ethernet
// device does.  Each received flit is held in a register while it is
// written, so in_ready never depends on in_valid.  Frames longer than a buffer are cut to RXLEN_MAX words.
//
// From the paper: descriptors with size and location of frames, a status
// bit set by the driver, DMA from DRAM into the fabric and back, interrupt or
// polling.  Register map, descriptor fields and the explicit destination
// node per frame (address resolution left to software) are this design's.
module eth_dma
  import inc_pkg::*;
#(
  parameter int unsigned NDESC     = 4,
  parameter int unsigned RXLEN_MAX = 255
) (
  input  logic        clk,
  input  logic        rst_n,
  input  coord_t      my_pos,
  input  logic        csr_we,
  input  logic [7:0]  csr_addr,
  input  logic [63:0] csr_wdata,
  output logic [63:0] csr_rdata,
  output logic        irq,
  output logic        out_valid,
  input  logic        out_ready,
  output flit_t       out_flit,
  input  logic        in_valid,
  output logic        in_ready,
  input  flit_t       in_flit,
  output bus_req_t    bus_req,
  input  bus_rsp_t    bus_rsp
);
  localparam int unsigned IW = (NDESC > 1) ? $clog2(NDESC) : 1;

  logic [31:0] txa [NDESC];
  logic [63:0] txc [NDESC];
  logic [31:0] rxa [NDESC];
  logic [63:0] rxc [NDESC];
  logic        ie_q, pend_q;

  // -------------------------------------------------------------- transmit
  typedef enum logic [1:0] {T_IDLE, T_HDR, T_READ, T_SEND} tstate_e;
  tstate_e     t_q;
  logic [IW-1:0] tidx_q;
  logic [7:0]  tcnt_q;
  logic [63:0] tword_q;

  // --------------------------------------------------------------- receive
  typedef enum logic [1:0] {R_HDR, R_DATA, R_DROP} rstate_e;
  rstate_e     r_q;
  logic [IW-1:0] ridx_q;
  logic [7:0]  rcnt_q;
  coord_t      rsrc_q;
  pkt_hdr_t    in_hdr;

  assign in_hdr = pkt_hdr_t'(in_flit.data);

  // Bus: the receive engine has priority; an access runs to its ack.
  logic        own_rx_q, own_busy_q;
  logic        rx_wants, tx_wants, use_rx;

  logic        rb_v_q, rb_last_q;
  logic [63:0] rb_q;
  logic        rb_done;

  assign rx_wants = (r_q == R_DATA) && rb_v_q && rcnt_q < 8'(RXLEN_MAX);
  assign rb_done  = rb_v_q && (rcnt_q >= 8'(RXLEN_MAX) || (use_rx && bus_rsp.ack));
  assign tx_wants = (t_q == T_READ);
  assign use_rx   = own_busy_q ? own_rx_q : rx_wants;

  always_comb begin
    bus_req = '0;
    if (use_rx && rx_wants)
      bus_req = '{req: 1'b1, we: 1'b1, addr: rxa[ridx_q] + 32'(rcnt_q) * 32'd8, wdata: rb_q};
    else if (!use_rx && tx_wants)
      bus_req = '{req: 1'b1, we: 1'b0, addr: txa[tidx_q] + 32'(tcnt_q) * 32'd8, wdata: '0};
  end

  always_comb begin
    out_valid = 1'b0;
    out_flit  = '0;
    if (t_q == T_HDR) begin
      out_valid     = 1'b1;
      out_flit.data = DATA_W'(make_hdr(coord_t'(txc[tidx_q][46:32]), my_pos, 1'b0,
                                       PROTO_ETH, 5'd0, txc[tidx_q][7:0]));
    end else if (t_q == T_SEND) begin
      out_valid     = 1'b1;
      out_flit.data = tword_q;
      out_flit.last = (tcnt_q + 1'b1 == txc[tidx_q][7:0]);
    end
  end

  always_comb begin
    unique case (r_q)
      R_HDR:   in_ready = 1'b1;
      R_DATA:  in_ready = !rb_v_q;
      default: in_ready = 1'b1;
    endcase
  end

  assign irq = ie_q && pend_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NDESC; i++) begin
        txa[i] <= '0; txc[i] <= '0; rxa[i] <= '0; rxc[i] <= '0;
      end
      ie_q <= 1'b0; pend_q <= 1'b0;
      t_q <= T_IDLE; tidx_q <= '0; tcnt_q <= '0; tword_q <= '0;
      r_q <= R_HDR; ridx_q <= '0; rcnt_q <= '0; rsrc_q <= '0;
      own_rx_q <= 1'b0; own_busy_q <= 1'b0;
      rb_q <= '0; rb_v_q <= 1'b0; rb_last_q <= 1'b0;
    end else begin
      // register writes by the driver
      if (csr_we) begin
        for (int i = 0; i < NDESC; i++) begin
          if (csr_addr == 8'(16 * i))          txa[i] <= csr_wdata[31:0];
          if (csr_addr == 8'(16 * i + 8))      txc[i] <= csr_wdata;
          if (csr_addr == 8'(64 + 16 * i))     rxa[i] <= csr_wdata[31:0];
          if (csr_addr == 8'(64 + 16 * i + 8)) rxc[i] <= csr_wdata;
        end
        if (csr_addr == 8'h80) ie_q <= csr_wdata[0];
      end
      if (csr_we && csr_addr == 8'h88) pend_q <= 1'b0;

      // bus ownership
      if (!own_busy_q && bus_req.req && !bus_rsp.ack) begin
        own_busy_q <= 1'b1;
        own_rx_q   <= use_rx;
      end else if (bus_rsp.ack) begin
        own_busy_q <= 1'b0;
      end

      // transmit engine
      unique case (t_q)
        T_IDLE: if (txc[tidx_q][63]) begin
          tcnt_q <= '0;
          t_q    <= T_HDR;
        end
        T_HDR: if (out_ready) t_q <= (txc[tidx_q][7:0] == 8'd0) ? T_IDLE : T_READ;
        T_READ: if (!use_rx && bus_rsp.ack) begin
          tword_q <= bus_rsp.rdata;
          t_q     <= T_SEND;
        end
        T_SEND: if (out_ready) begin
          tcnt_q <= tcnt_q + 1'b1;
          if (out_flit.last) begin
            txc[tidx_q][63] <= 1'b0;
            tidx_q <= (tidx_q == IW'(NDESC - 1)) ? '0 : tidx_q + 1'b1;
            t_q    <= T_IDLE;
          end else begin
            t_q <= T_READ;
          end
        end
        default: t_q <= T_IDLE;
      endcase
      if (t_q == T_HDR && out_ready && txc[tidx_q][7:0] == 8'd0) begin
        txc[tidx_q][63] <= 1'b0;
        tidx_q <= (tidx_q == IW'(NDESC - 1)) ? '0 : tidx_q + 1'b1;
      end

      // receive engine: one flit is held in rb_q while it is written
      if (r_q == R_DATA && in_valid && in_ready) begin
        rb_q      <= in_flit.data;
        rb_v_q    <= 1'b1;
        rb_last_q <= in_flit.last;
      end else if (rb_done) begin
        rb_v_q <= 1'b0;
      end
      unique case (r_q)
        R_HDR: if (in_valid) begin
          rsrc_q <= in_hdr.src;
          rcnt_q <= '0;
          if (!in_flit.last) r_q <= rxc[ridx_q][63] ? R_DATA : R_DROP;
        end
        R_DATA: if (rb_done) begin
          if (rcnt_q < 8'(RXLEN_MAX)) rcnt_q <= rcnt_q + 1'b1;
          if (rb_last_q) begin
            rxc[ridx_q] <= {1'b0, 1'b1, 14'd0, 1'b0, rsrc_q, 24'd0,
                            (rcnt_q < 8'(RXLEN_MAX)) ? rcnt_q + 1'b1 : rcnt_q};
            ridx_q <= (ridx_q == IW'(NDESC - 1)) ? '0 : ridx_q + 1'b1;
            pend_q <= 1'b1;
            r_q    <= R_HDR;
          end
        end
        R_DROP: if (in_valid && in_flit.last) r_q <= R_HDR;
        default: r_q <= R_HDR;
      endcase
    end
  end

  always_comb begin
    csr_rdata = '0;
    for (int i = 0; i < NDESC; i++) begin
      if (csr_addr == 8'(16 * i))          csr_rdata = 64'(txa[i]);
      if (csr_addr == 8'(16 * i + 8))      csr_rdata = txc[i];
      if (csr_addr == 8'(64 + 16 * i))     csr_rdata = 64'(rxa[i]);
      if (csr_addr == 8'(64 + 16 * i + 8)) csr_rdata = rxc[i];
    end
    if (csr_addr == 8'h80) csr_rdata = 64'(ie_q);
    if (csr_addr == 8'h88) csr_rdata = 64'(pend_q);
  end

  initial assert (NDESC >= 1 && NDESC <= 4) else $fatal(1, "eth_dma: NDESC must be 1..4");
endmodule
