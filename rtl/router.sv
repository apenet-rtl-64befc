// router: routing decision for the headers waiting at the crossbar inputs.
//
// APENet is a three-dimensional torus; a packet hops from node to node until
// it reaches its destination. For each input port the router looks at the
// header's destination and this node's coordinates and names the crossbar
// output the packet must take. The rule is dimension order, X first, then Y,
// then Z; in each dimension the packet goes the shorter way round the ring
// (plus direction on a tie). Software can override the direction per
// dimension (ovr_en/ovr_dir). A packet whose destination is this node goes
// to the local port. The paper says only that routing follows "simple, and
// software overridable, rules": the dimension order, the shortest-way choice
// and the form of the override are this design's.
// Timing: purely combinational; the crossbar registers the result.
// One router serves all crossbar inputs, as one Router block does in Fig. 2.
module router
  import apenet_pkg::*;
#(
  parameter int unsigned N = NPORTS
) (
  input  route_cfg_t         cfg,
  input  logic [WORD_W-1:0]  hdr   [N],
  output port_e              dest  [N]
);

  // Distance travelled in the plus direction, 0..size-1.
  function automatic logic [COORD_W:0] fwd_dist(logic [COORD_W-1:0] from,
                                                logic [COORD_W-1:0] to,
                                                logic [COORD_W:0]   size);
    logic [COORD_W:0] d;
    if (to >= from) d = {1'b0, to} - {1'b0, from};
    else            d = {1'b0, to} + size - {1'b0, from};
    return d;
  endfunction

  function automatic logic [COORD_W:0] ring_size(logic [COORD_W-1:0] s);
    return (s == '0) ? (COORD_W+1)'(1 << COORD_W) : {1'b0, s};
  endfunction

  // Direction in one dimension: 0 = stay, else plus (1) or minus (2).
  function automatic logic [1:0] dim_dir(logic [COORD_W-1:0] me, logic [COORD_W-1:0] to,
                                         logic [COORD_W-1:0] sz, logic oen, logic odir);
    logic [COORD_W:0] s, d;
    s = ring_size(sz);
    d = fwd_dist(me, to, s);
    if (d == '0)                  return 2'd0;
    else if (oen)                 return odir ? 2'd2 : 2'd1;
    else if ((d << 1) <= s)       return 2'd1;
    else                          return 2'd2;
  endfunction

  always_comb begin
    for (int i = 0; i < int'(N); i++) begin
      header_t    h;
      logic [1:0] dx, dy, dz;
      h  = header_t'(hdr[i]);
      dx = dim_dir(cfg.me.x, h.dst.x, cfg.size.x, cfg.ovr_en[0], cfg.ovr_dir[0]);
      dy = dim_dir(cfg.me.y, h.dst.y, cfg.size.y, cfg.ovr_en[1], cfg.ovr_dir[1]);
      dz = dim_dir(cfg.me.z, h.dst.z, cfg.size.z, cfg.ovr_en[2], cfg.ovr_dir[2]);
      if      (dx != 2'd0) dest[i] = (dx == 2'd1) ? P_XP : P_XM;
      else if (dy != 2'd0) dest[i] = (dy == 2'd1) ? P_YP : P_YM;
      else if (dz != 2'd0) dest[i] = (dz == 2'd1) ? P_ZP : P_ZM;
      else                 dest[i] = P_LOCAL;
    end
  end

endmodule
