// sync_fifo: single-clock first-in first-out buffer used by the link ports,
// the Bridge FIFO units and the DMA engines.
//
// Storage is a register array of DEPTH entries of W bits, addressed by read
// and write pointers one bit wider than needed so that full and empty are told
// apart.  push writes wdata at the tail when the FIFO is not full; pop drops
// the head, which is always visible on rdata while empty is low (first-word
// fall-through).  A push and a pop may happen in the same cycle.  count gives
// the number of entries held.  DEPTH must be a power of two.  Pushing when full or popping when empty is a
// caller error and is caught by assertions.
module sync_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [W-1:0]               wdata,
  input  logic                       pop,
  output logic [W-1:0]               rdata,
  output logic                       full,
  output logic                       empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wp, rp;
  logic [AW:0]  used;

  assign used  = wp - rp;
  assign count = used[$clog2(DEPTH+1)-1:0];
  assign full  = (used == (AW+1)'(DEPTH));
  assign empty = (used == '0);
  assign rdata = mem[rp[AW-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (push && !full) wp <= wp + 1'b1;
      if (pop && !empty) rp <= rp + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (push && !full) mem[wp[AW-1:0]] <= wdata;
  end

  // The pointers wrap naturally, so DEPTH must be a power of two.
  initial assert (DEPTH == (1 << AW)) else $fatal(1, "sync_fifo: DEPTH must be a power of two");
  push_full:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop))
    else $error("sync_fifo: push while full");
  pop_empty:  assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty))
    else $error("sync_fifo: pop while empty");
endmodule
