// bridge_fifo_rx: read side of a Bridge FIFO (see bridge_fifo_tx).
//
// Bridge FIFO packets arrive on a valid/ready flit input from the
// bridge_fifo_demux.  The header flit is dropped; each following flit holds
// one WIDTH-bit word in its low bits, which is pushed into a DEPTH-entry FIFO
// read by user logic with rd_en, rd_data (first-word fall-through) and empty.
// While the FIFO is full the unit stops accepting flits, so the sender is
// held back through the network's credits; no word is ever lost.  Converting
// packets back into words follows the paper; the depth and the back-pressure
// are this design's.
module bridge_fifo_rx
  import inc_pkg::*;
#(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  flit_t            in_flit,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  logic in_hdr_q;   // next flit is a header
  logic full, push;

  assign in_ready = in_hdr_q || !full;
  assign push     = in_valid && !in_hdr_q && !full;

  sync_fifo #(.W(WIDTH), .DEPTH(DEPTH)) u_q (
    .clk, .rst_n, .push(push), .wdata(in_flit.data[WIDTH-1:0]),
    .pop(rd_en && !empty), .rdata(rd_data), .full(full), .empty(empty), .count(count)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                     in_hdr_q <= 1'b1;
    else if (in_valid && in_ready)  in_hdr_q <= in_flit.last;
  end

  initial assert (WIDTH >= 7 && WIDTH <= 64) else $fatal(1, "bridge_fifo_rx: WIDTH must be 7..64");
endmodule
