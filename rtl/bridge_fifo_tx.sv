// bridge_fifo_tx: write side of a Bridge FIFO, a FIFO whose write port is on
// one node and whose read port (bridge_fifo_rx) is on another.
//
// User logic writes WIDTH-bit words (7..64 bits) with wr_en while full is
// low.  Words wait in a local FIFO of 2*MAX_WORDS entries.  A packet is
// formed when MAX_WORDS words are waiting, or when at least one is waiting
// and no word was written in the cycle before (so a lone word is not held
// back): a header flit to node dst, then the words, one per flit, zero
// extended, the final flit marked last.  The channel number is filled in by
// the bridge_fifo_mux and the protocol by the packet_mux.  Output is
// valid/ready.  The word-to-packet conversion and the 7..64 bit range follow
// the paper; the packet size and the flush rule are this design's.
module bridge_fifo_tx
  import inc_pkg::*;
#(
  parameter int unsigned WIDTH     = 64,
  parameter int unsigned MAX_WORDS = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  coord_t           my_pos,
  input  coord_t           dst,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             full,
  output logic             out_valid,
  input  logic             out_ready,
  output flit_t            out_flit
);
  localparam int unsigned DEPTH = 2 * MAX_WORDS;
  localparam int unsigned CW    = $clog2(DEPTH + 1);

  typedef enum logic [1:0] {S_IDLE, S_HDR, S_DATA} state_e;

  state_e         state_q;
  logic [7:0]     left_q, len_q;
  logic           wr_q;
  logic [WIDTH-1:0] head;
  logic           empty, pop;
  logic [CW-1:0]  count;

  sync_fifo #(.W(WIDTH), .DEPTH(DEPTH)) u_q (
    .clk, .rst_n, .push(wr_en), .wdata(wr_data), .pop(pop),
    .rdata(head), .full(full), .empty(empty), .count(count)
  );

  always_comb begin
    out_valid = (state_q == S_HDR) || (state_q == S_DATA && !empty);
    out_flit  = '0;
    pop       = 1'b0;
    if (state_q == S_HDR) begin
      out_flit.data = DATA_W'(make_hdr(dst, my_pos, 1'b0, PROTO_BRIDGE, 5'd0, len_q));
    end else begin
      out_flit.data = DATA_W'(head);
      out_flit.last = (left_q == 8'd1);
      pop           = (state_q == S_DATA) && out_ready && !empty;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      left_q  <= '0;
      len_q   <= '0;
      wr_q    <= 1'b0;
    end else begin
      wr_q <= wr_en;
      unique case (state_q)
        S_IDLE:
          if (count >= CW'(MAX_WORDS) || (!empty && !wr_q)) begin
            len_q   <= (count >= CW'(MAX_WORDS)) ? 8'(MAX_WORDS) : 8'(count);
            state_q <= S_HDR;
          end
        S_HDR:
          if (out_ready) begin
            left_q  <= len_q;
            state_q <= S_DATA;
          end
        S_DATA:
          if (pop) begin
            left_q <= left_q - 1'b1;
            if (left_q == 8'd1) state_q <= S_IDLE;
          end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  initial assert (WIDTH >= 7 && WIDTH <= 64) else $fatal(1, "bridge_fifo_tx: WIDTH must be 7..64");
endmodule
