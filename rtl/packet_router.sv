// packet_router: the per-node packet switch of the INC 3D mesh.
//
// Thirteen ports: 0 is the node's own logic (through the packet mux/demux),
// 1..6 the single-span links and 7..12 the multi-span links to the nodes
// SPAN positions away, each in the order +X -X +Y -Y +Z -Z (see inc_pkg).
//
// Directed packets follow a minimum-hop path: in a dimension where the
// destination is SPAN or more nodes away the multi-span link is productive,
// where it is one or two away the single-span link is.  Among the productive
// links of all dimensions the router takes one that is free at that moment,
// so two packets between the same nodes may take different paths and arrive
// out of order, as the paper allows.  A packet for this node goes to port 0.
//
// Broadcast packets use only single-span links.  The source sends on all of
// them; a node that receives on an X link forwards straight on in X and on
// all Y and Z links, one that receives on a Y link forwards straight on in Y
// and on both Z links, one that receives on a Z link forwards straight on in
// Z.  This spans the mesh as a tree, so every node delivers exactly one copy
// to port 0 (the source keeps none).  Links off the edge of the SYS_X x SYS_Y
// x SYS_Z system are never used.  The paper states the goal of the rules; the
// rules themselves are this design's.
//
// Switching is wormhole: the header flit of a packet at an input claims its
// output (a broadcast claims all its outputs at once, in lockstep) one cycle
// after it appears; the claim holds until the flit marked last has passed.
// Inputs are served in rotating order.  Each port is valid/ready; a flit
// leaves an input in the cycle it is accepted by every claimed output.
// ev_* pulse for one cycle: a directed packet took a free productive link
// other than its first choice, a broadcast was granted, a multi-span link
// was claimed.
module packet_router
  import inc_pkg::*;
#(
  parameter int unsigned SYS_X = 12,
  parameter int unsigned SYS_Y = 12,
  parameter int unsigned SYS_Z = 3,
  parameter int unsigned SPAN  = 3
) (
  input  logic               clk,
  input  logic               rst_n,
  input  coord_t             my_pos,
  input  logic [NPORTS-1:0]  in_valid,
  output logic [NPORTS-1:0]  in_ready,
  input  flit_t              in_flit  [NPORTS],
  output logic [NPORTS-1:0]  out_valid,
  input  logic [NPORTS-1:0]  out_ready,
  output flit_t              out_flit [NPORTS],
  output logic               ev_detour,
  output logic               ev_bcast,
  output logic               ev_multi
);
  typedef logic [NPORTS-1:0] pmask_t;
  localparam int unsigned IW = $clog2(NPORTS);
  localparam pmask_t MULTI_M = pmask_t'(13'h1F80);  // ports 7..12

  // Links that exist at this position of the system.
  function automatic pmask_t links_present(coord_t p);
    pmask_t m;
    m = '0;
    m[P_LOCAL] = 1'b1;
    m[P_XP]  = (32'(p.x) + 1    < SYS_X);  m[P_XM]  = (32'(p.x) >= 1);
    m[P_YP]  = (32'(p.y) + 1    < SYS_Y);  m[P_YM]  = (32'(p.y) >= 1);
    m[P_ZP]  = (32'(p.z) + 1    < SYS_Z);  m[P_ZM]  = (32'(p.z) >= 1);
    m[P_MXP] = (32'(p.x) + SPAN < SYS_X);  m[P_MXM] = (32'(p.x) >= SPAN);
    m[P_MYP] = (32'(p.y) + SPAN < SYS_Y);  m[P_MYM] = (32'(p.y) >= SPAN);
    m[P_MZP] = (32'(p.z) + SPAN < SYS_Z);  m[P_MZM] = (32'(p.z) >= SPAN);
    return m;
  endfunction

  // Productive outputs of one dimension for a signed distance d.
  function automatic pmask_t dim_route(int d, int unsigned sp, int unsigned sm,
                                       int unsigned mp, int unsigned mm);
    pmask_t m;
    m = '0;
    if (d >= int'(SPAN))       m[mp] = 1'b1;
    else if (d > 0)            m[sp] = 1'b1;
    if (d <= -int'(SPAN))      m[mm] = 1'b1;
    else if (d < 0)            m[sm] = 1'b1;
    return m;
  endfunction

  // Candidate outputs for a directed packet: any one of them will do.
  function automatic pmask_t directed_route(pkt_hdr_t h, coord_t p);
    pmask_t m;
    m = dim_route(int'(h.dst.x) - int'(p.x), P_XP, P_XM, P_MXP, P_MXM)
      | dim_route(int'(h.dst.y) - int'(p.y), P_YP, P_YM, P_MYP, P_MYM)
      | dim_route(int'(h.dst.z) - int'(p.z), P_ZP, P_ZM, P_MZP, P_MZM);
    if (m == '0) m[P_LOCAL] = 1'b1;
    return m;
  endfunction

  // Outputs of a broadcast packet that entered on port inp: all of them.
  function automatic pmask_t bcast_route(int unsigned inp, coord_t p);
    pmask_t m;
    m = '0;
    unique case (inp)
      P_LOCAL: m = pmask_t'((1 << P_XP) | (1 << P_XM) | (1 << P_YP) | (1 << P_YM) | (1 << P_ZP) | (1 << P_ZM));
      P_XM:    m = pmask_t'((1 << P_XP) | (1 << P_YP) | (1 << P_YM) | (1 << P_ZP) | (1 << P_ZM) | 1);
      P_XP:    m = pmask_t'((1 << P_XM) | (1 << P_YP) | (1 << P_YM) | (1 << P_ZP) | (1 << P_ZM) | 1);
      P_YM:    m = pmask_t'((1 << P_YP) | (1 << P_ZP) | (1 << P_ZM) | 1);
      P_YP:    m = pmask_t'((1 << P_YM) | (1 << P_ZP) | (1 << P_ZM) | 1);
      P_ZM:    m = pmask_t'((1 << P_ZP) | 1);
      P_ZP:    m = pmask_t'((1 << P_ZM) | 1);
      default: m = pmask_t'(1);  // broadcasts never use multi-span links
    endcase
    return m & links_present(p);
  endfunction

  logic   [NPORTS-1:0] busy_q;
  pmask_t              mask_q  [NPORTS];
  logic   [IW-1:0]     owner_q [NPORTS];
  logic   [IW-1:0]     rr_q;

  logic   [NPORTS-1:0] go;
  logic   [NPORTS-1:0] grant;
  pmask_t              gmask   [NPORTS];
  pmask_t              locked;
  logic                detour, bcast, multi;

  // Ready of an input depends only on its claim and the outputs' ready.
  always_comb begin
    locked = '0;
    for (int k = 0; k < NPORTS; k++) begin
      if (busy_q[k]) locked |= mask_q[k];
      in_ready[k] = busy_q[k] && ((out_ready | ~mask_q[k]) == '1);
    end
  end

  assign go = in_ready & in_valid;

  always_comb begin
    pmask_t free, cand, pick;
    pkt_hdr_t h;
    int unsigned i;
    for (int o = 0; o < NPORTS; o++) begin
      out_valid[o] = locked[o] && go[owner_q[o]];
      out_flit[o]  = in_flit[owner_q[o]];
    end
    // Allocation of free outputs to waiting headers, rotating priority.
    free   = ~locked;
    grant  = '0;
    detour = 1'b0;
    bcast  = 1'b0;
    multi  = 1'b0;
    for (int k = 0; k < NPORTS; k++) gmask[k] = '0;
    for (int k = 0; k < NPORTS; k++) begin
      i = (int'(rr_q) + k) % NPORTS;
      h = pkt_hdr_t'(in_flit[i].data);
      pick = '0;
      cand = '0;
      if (!busy_q[i] && in_valid[i]) begin
        if (h.bcast) begin
          cand = bcast_route(i, my_pos);
          if ((cand & ~free) == '0) begin
            pick  = cand;
            bcast = 1'b1;
          end
        end else begin
          cand = directed_route(h, my_pos);
          pick = (cand & free) & -(cand & free);   // lowest free candidate
          if (pick != '0 && pick != (cand & -cand)) detour = 1'b1;
        end
        if (pick != '0 || (h.bcast && cand == '0)) begin
          grant[i] = 1'b1;
          free     = free & ~pick;
          if ((pick & MULTI_M) != '0) multi = 1'b1;
        end
      end
      gmask[i] = pick;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q <= '0;
      rr_q   <= '0;
      for (int k = 0; k < NPORTS; k++) begin
        mask_q[k]  <= '0;
        owner_q[k] <= '0;
      end
      ev_detour <= 1'b0;
      ev_bcast  <= 1'b0;
      ev_multi  <= 1'b0;
    end else begin
      rr_q <= (rr_q == IW'(NPORTS-1)) ? '0 : rr_q + 1'b1;
      for (int k = 0; k < NPORTS; k++) begin
        if (grant[k]) begin
          busy_q[k] <= 1'b1;
          mask_q[k] <= gmask[k];
          for (int o = 0; o < NPORTS; o++)
            if (gmask[k][o]) owner_q[o] <= IW'(k);
        end else if (go[k] && in_flit[k].last) begin
          busy_q[k] <= 1'b0;
        end
      end
      ev_detour <= detour;
      ev_bcast  <= bcast;
      ev_multi  <= multi;
    end
  end

  // An output is never claimed by two inputs at once.
  always_comb begin
    pmask_t seen;
    seen = '0;
    for (int k = 0; k < NPORTS; k++)
      if (busy_q[k]) begin
        one_owner: assert (!rst_n || (seen & mask_q[k]) == '0) else $error("packet_router: output claimed twice");
        seen |= mask_q[k];
      end
  end
endmodule
