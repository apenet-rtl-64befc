// tb_router: self-checking test of the routing decision.
// For several torus shapes (including a 16-node ring, coded as size 0) the
// test sweeps node and destination coordinates, presents seven different
// headers at once, and compares each decision with a reference computed
// here with integer arithmetic: X first, then Y, then Z; in a dimension the
// shorter way round (plus on a tie), or the software-forced direction.
module tb_router;
  import apenet_pkg::*;

  route_cfg_t        cfg;
  logic [63:0]       hdr  [NPORTS];
  port_e             dest [NPORTS];

  router #(.N(NPORTS)) dut (.cfg, .hdr, .dest);

  int checks = 0, failures = 0;
  int n_local = 0, n_plus = 0, n_minus = 0, n_ovr = 0;

  function automatic int ref_dir(int me, int to, int size, bit oen, bit odir);
    int d;
    d = ((to - me) % size + size) % size;
    if (d == 0) return 0;
    if (oen) return odir ? -1 : 1;
    return (2 * d <= size) ? 1 : -1;
  endfunction

  function automatic port_e ref_route(route_cfg_t c, header_t h);
    int sz [3], me [3], to [3];
    sz[0] = (c.size.x == 0) ? 16 : int'(c.size.x);
    sz[1] = (c.size.y == 0) ? 16 : int'(c.size.y);
    sz[2] = (c.size.z == 0) ? 16 : int'(c.size.z);
    me[0] = int'(c.me.x); me[1] = int'(c.me.y); me[2] = int'(c.me.z);
    to[0] = int'(h.dst.x); to[1] = int'(h.dst.y); to[2] = int'(h.dst.z);
    for (int d = 0; d < 3; d++) begin
      int r;
      r = ref_dir(me[d], to[d], sz[d], c.ovr_en[d], c.ovr_dir[d]);
      if (r == 1)  return port_e'(2 * d);
      if (r == -1) return port_e'(2 * d + 1);
    end
    return P_LOCAL;
  endfunction

  task automatic run(input int sx, sy, sz, input int trials, input bit use_ovr);
    for (int t = 0; t < trials; t++) begin
      header_t h [NPORTS];
      cfg = '0;
      cfg.size.x = 4'(sx); cfg.size.y = 4'(sy); cfg.size.z = 4'(sz);
      cfg.me.x = 4'($urandom % ((sx == 0) ? 16 : sx));
      cfg.me.y = 4'($urandom % ((sy == 0) ? 16 : sy));
      cfg.me.z = 4'($urandom % ((sz == 0) ? 16 : sz));
      if (use_ovr) begin cfg.ovr_en = 3'($urandom); cfg.ovr_dir = 3'($urandom); end
      for (int p = 0; p < int'(NPORTS); p++) begin
        h[p] = header_t'({$urandom, $urandom});
        h[p].dst.x = 4'($urandom % ((sx == 0) ? 16 : sx));
        h[p].dst.y = 4'($urandom % ((sy == 0) ? 16 : sy));
        h[p].dst.z = 4'($urandom % ((sz == 0) ? 16 : sz));
        if (p == 0) h[p].dst = cfg.me;        // one always for this node
        hdr[p] = h[p];
      end
      #1;
      for (int p = 0; p < int'(NPORTS); p++) begin
        port_e e;
        e = ref_route(cfg, h[p]);
        checks++;
        if (dest[p] != e) begin
          failures++;
          $display("FAIL: size %0d/%0d/%0d me %p dst %p ovr %b/%b: got %s want %s",
                   sx, sy, sz, cfg.me, h[p].dst, cfg.ovr_en, cfg.ovr_dir, dest[p].name(), e.name());
        end
        if (e == P_LOCAL) n_local++;
        else if (e[0] == 1'b0) n_plus++;
        else n_minus++;
        if (use_ovr && e != P_LOCAL) n_ovr++;
      end
    end
  endtask

  initial begin
    run(4, 4, 4, 300, 0);
    run(5, 3, 2, 300, 0);
    run(0, 1, 7, 300, 0);
    run(4, 4, 4, 300, 1);
    run(2, 2, 2, 100, 1);
    // every kind of decision must have been exercised
    checks++; if (n_local == 0 || n_plus == 0 || n_minus == 0 || n_ovr == 0) failures++;
    $display("decisions: local %0d plus %0d minus %0d (with override %0d)", n_local, n_plus, n_minus, n_ovr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
