// link_sink: stands for the far end of a link that leaves the simulated
// cards (a node of another card that is not modelled).  It grants GRANT
// bytes of credit once after reset and then returns FLIT_BYTES of credit
// for every flit it receives, absorbing the flits, so traffic routed off the
// simulated cards (broadcast copies above all) drains at full rate.  flits
// counts what it absorbed.
module link_sink
  import inc_pkg::*;
#(
  parameter int unsigned GRANT = 128
) (
  input  logic       clk,
  input  logic       rst_n,
  input  link_word_t link_in,
  output link_word_t link_out,
  output int         flits
);
  logic granted_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      granted_q <= 1'b0;
      link_out  <= '0;
      flits     <= 0;
    end else begin
      link_out <= '0;
      if (!granted_q) begin
        granted_q <= 1'b1;
        link_out  <= '{valid: 1'b1, is_credit: 1'b1, flit: '{last: 1'b0, data: 64'(GRANT)}};
      end else if (link_in.valid && !link_in.is_credit) begin
        flits    <= flits + 1;
        link_out <= '{valid: 1'b1, is_credit: 1'b1, flit: '{last: 1'b0, data: 64'(FLIT_BYTES)}};
      end
    end
  end
endmodule
