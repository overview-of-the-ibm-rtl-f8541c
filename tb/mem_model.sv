// mem_model: behavioural stand-in for a node's memory (the Zynq's DRAM path)
// in testbenches.  WORDS 64-bit words addressed by addr[3 +: log2(WORDS)];
// a request is acked LAT cycles after it appears (LAT >= 1), reads return the
// stored word with the ack.  writes counts completed writes.
module mem_model
  import inc_pkg::*;
#(
  parameter int unsigned WORDS = 1024,
  parameter int unsigned LAT   = 1
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t req,
  output bus_rsp_t rsp,
  output int       writes
);
  localparam int unsigned AW = $clog2(WORDS);
  logic [63:0] mem [WORDS];
  int          wait_q;

  initial for (int i = 0; i < WORDS; i++) mem[i] = '0;

  always_comb begin
    rsp.ack   = req.req && (wait_q >= int'(LAT) - 1);
    rsp.rdata = mem[req.addr[3 +: AW]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wait_q <= 0;
      writes <= 0;
    end else if (req.req) begin
      if (rsp.ack) begin
        wait_q <= 0;
        if (req.we) begin
          mem[req.addr[3 +: AW]] <= req.wdata;
          writes <= writes + 1;
        end
      end else begin
        wait_q <= wait_q + 1;
      end
    end
  end
endmodule
