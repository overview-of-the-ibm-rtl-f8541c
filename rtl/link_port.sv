// link_port: one end of a node-to-node link with credit-based flow control.
//
// A link is a pair of unidirectional serial connections with no handshake
// wires, so overrun is prevented by credits.  The receiving half owns a
// BUF_FLITS-deep flit buffer; it tells the far transmitter, through the
// paired outgoing direction, how many bytes it is willing to take, and adds
// to that balance as the router drains the buffer.  The transmitting half
// subtracts FLIT_BYTES for every flit it sends and never sends without
// enough credit.  Credit grants and data flits share the outgoing direction,
// one link word per cycle (link_word_t): a grant goes out when bytes are owed
// and either no flit went out in the previous cycle, no credit is held, or
// half the buffer is owed.  tx_ready does not depend on tx_valid.  After reset the whole buffer is owed, which is the initial grant.
//
// Router side: tx_* is a valid/ready flit input (a flit moves when both are
// high), rx_* a valid/ready flit output from the buffer head.  link_out is
// registered; link_in is taken as it arrives, so any wire delay between two
// ports is allowed.  The credit scheme is the paper's; counting in bytes
// follows the paper, the word format and the grant policy are this design's.
module link_port
  import inc_pkg::*;
#(
  parameter int unsigned BUF_FLITS = 16
) (
  input  logic       clk,
  input  logic       rst_n,
  // flits from the router, to be sent on the link
  input  logic       tx_valid,
  output logic       tx_ready,
  input  flit_t      tx_flit,
  // flits received from the link, to the router
  output logic       rx_valid,
  input  logic       rx_ready,
  output flit_t      rx_flit,
  // the two serial directions, as parallel words
  output link_word_t link_out,
  input  link_word_t link_in,
  // bytes of credit currently held (for monitoring)
  output logic [15:0] credits
);
  localparam logic [15:0] BUF_BYTES = 16'(BUF_FLITS * FLIT_BYTES);
  localparam logic [15:0] FB        = 16'(FLIT_BYTES);

  logic [15:0] credit_q, owed_q;
  logic        fifo_full, fifo_empty;
  logic        sent_q;     // a flit went out in the previous cycle
  logic        rx_push, rx_pop, tx_fire, send_credit, credit_in;
  logic [$clog2(BUF_FLITS+1)-1:0] fifo_count;

  assign credit_in = link_in.valid && link_in.is_credit;
  assign rx_push   = link_in.valid && !link_in.is_credit;
  assign rx_valid  = !fifo_empty;
  assign rx_pop    = rx_valid && rx_ready;

  assign send_credit = (owed_q != '0) &&
                       (!sent_q || credit_q < FB || owed_q >= (BUF_BYTES >> 1));
  assign tx_ready    = !send_credit && (credit_q >= FB);
  assign tx_fire     = tx_valid && tx_ready;
  assign credits     = credit_q;

  sync_fifo #(.W($bits(flit_t)), .DEPTH(BUF_FLITS)) u_buf (
    .clk, .rst_n,
    .push(rx_push), .wdata(link_in.flit),
    .pop(rx_pop), .rdata(rx_flit),
    .full(fifo_full), .empty(fifo_empty), .count(fifo_count)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      credit_q <= '0;
      owed_q   <= BUF_BYTES;
      sent_q   <= 1'b0;
      link_out <= '0;
    end else begin
      credit_q <= credit_q - (tx_fire ? FB : 16'd0)
                           + (credit_in ? link_in.flit.data[15:0] : 16'd0);
      sent_q   <= tx_fire;
      if (send_credit) begin
        owed_q   <= rx_pop ? FB : 16'd0;
        link_out <= '{valid: 1'b1, is_credit: 1'b1,
                      flit: '{last: 1'b0, data: {48'd0, owed_q}}};
      end else begin
        owed_q   <= owed_q + (rx_pop ? FB : 16'd0);
        link_out <= '{valid: tx_fire, is_credit: 1'b0, flit: tx_flit};
      end
    end
  end

  // The credit rule guarantees the buffer never overruns.
  no_overrun: assert property (@(posedge clk) disable iff (!rst_n) !(rx_push && fifo_full && !rx_pop))
    else $error("link_port: receive buffer overrun");
  credit_bound: assert property (@(posedge clk) disable iff (!rst_n) credit_q <= BUF_BYTES)
    else $error("link_port: more credit than the far buffer holds");
endmodule
