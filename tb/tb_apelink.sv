// tb_apelink: end-to-end test of eight APELink nodes wired as a 2x2x2 torus.
//
// Each node has a host model that drives the register interface: it writes
// payload words and a command to send a packet, and polls STATUS and reads
// whole packets from RXDATA, checking source, payload, footer checksum and
// the per-sender order. Links are joined by a cable model: a fixed delay of
// a few link clocks, which can also flip one payload bit on purpose.
// Buffers are made small (32-word channel buffers, 64-word local buffers)
// so that back-pressure appears with little traffic.
// Phases: ping-pong between neighbours and across three hops (cut-through
// latency measured at every hop), a software routing override, random
// all-to-all traffic including packets to self, a hot spot that fills the
// buffers until senders wait for credits, and a corrupted payload word that
// must raise the checksum-error count. Every mechanism is counted and must
// have happened at least once.
module tb_apelink;
  import apenet_pkg::*;

  localparam int NN = 8;
  localparam int unsigned LINK_AW = 5, LOCAL_AW = 6, CMDQ_AW = 3, TXQ_AW = 2;
  localparam int DELAY = 3;          // serializer + cable + deserializer, link clocks
  localparam int LOCAL_DEPTH = 1 << LOCAL_AW;
  localparam real T_SW = 7.0;        // switch clock period

  logic clk_pci = 0, clk_sw = 0, clk_link = 0;
  logic rst_pci_n = 0, rst_sw_n = 0, rst_link_n = 0;
  always #3.75 clk_pci  = ~clk_pci;
  always #3.5  clk_sw   = ~clk_sw;
  always #4    clk_link = ~clk_link;

  link_word_t ltx [NN][NLINKS];
  link_word_t lrx [NN][NLINKS];

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  function automatic logic [63:0] pay(int src, int dst, int tag, int i);
    return {8'(src), 8'(dst), 16'(tag), 32'(i) ^ (32'(tag) * 32'h9E37_79B9)};
  endfunction

  function automatic coord_t coord_of(int k);
    return '{z: 4'((k >> 2) & 1), y: 4'((k >> 1) & 1), x: 4'(k & 1)};
  endfunction

  function automatic logic [63:0] cfg_word(int k, logic [2:0] en, logic [2:0] dir);
    route_cfg_t c;
    c.me = coord_of(k); c.size = '{z: 4'd2, y: 4'd2, x: 4'd2};
    c.ovr_en = en; c.ovr_dir = dir;
    return 64'(c);
  endfunction

  // ---------------- shared bookkeeping
  int  job_kind [NN][$];    // 0 = send, 1 = set override
  int  job_dst  [NN][$];
  int  job_len  [NN][$];
  bit  rx_pause [NN];
  bit  cfg_done [NN];
  int  n_sent [NN], n_rcvd [NN], tag_ctr [NN];
  int  last_tag [NN][NN];
  int  n_self = 0, n_csum_seen = 0, corrupt_tag = -1;
  int  hop_cnt [NN], stall_cyc [NN], block_cyc [NN], xm_starts [NN];
  int  lat_max = 0, lat_n = 0;
  bit  lat_strict = 0;
  bit  corrupt_arm = 0;     // cable node0 X+ -> node1 X-

  // ---------------- cables
  link_word_t dl   [NN][NLINKS][DELAY];
  int         cb_n [NN][NLINKS];   // chunk index within the current packet
  always @(posedge clk_link) begin
    for (int k = 0; k < NN; k++)
      for (int c = 0; c < int'(NLINKS); c++) begin
        link_word_t w;
        w = ltx[k][c];
        if (w.kind != LK_IDLE) begin
          // chunk 1 carries packet bits 40..79; bit 64 = bit 0 of payload word 0
          if (k == 0 && c == int'(P_XP) && corrupt_arm && cb_n[k][c] == 1) begin
            w.data[24] = ~w.data[24];
            corrupt_arm = 0;
          end
          cb_n[k][c] = (w.kind == LK_END) ? 0 : cb_n[k][c] + 1;
        end
        dl[k][c][0] <= w;
        for (int d = 1; d < DELAY; d++) dl[k][c][d] <= dl[k][c][d-1];
      end
  end
  // port 2d (plus) of node k faces port 2d+1 (minus) of node k ^ (1<<d)
  always_comb
    for (int k = 0; k < NN; k++)
      for (int d = 0; d < 3; d++) begin
        lrx[k][2*d]   = dl[k ^ (1 << d)][2*d+1][DELAY-1];
        lrx[k][2*d+1] = dl[k ^ (1 << d)][2*d][DELAY-1];
      end

  // ---------------- nodes
  for (genvar k = 0; k < NN; k++) begin : g_node
    logic              req_valid = 0, req_write = 0, req_ready, resp_valid;
    logic [7:0]        req_addr = '0;
    logic [63:0]       req_wdata = '0, resp_rdata;
    logic [NLINKS-1:0] credit_stall, link_pkt_start;
    logic [NPORTS-1:0] xbar_blocked, xbar_grant;
    logic              pkt_sent, pkt_rcvd;

    apelink #(.LINK_AW(LINK_AW), .LOCAL_AW(LOCAL_AW), .CMDQ_AW(CMDQ_AW), .TXQ_AW(TXQ_AW)) u (
      .clk_pci, .rst_pci_n, .clk_sw, .rst_sw_n, .clk_link, .rst_link_n,
      .req_valid, .req_write, .req_addr, .req_wdata, .req_ready, .resp_valid, .resp_rdata,
      .link_tx(ltx[k]), .link_rx(lrx[k]),
      .credit_stall, .link_pkt_start, .xbar_blocked, .xbar_grant, .pkt_sent, .pkt_rcvd);

    // activity counters
    always @(posedge clk_link) if (rst_link_n) begin
      stall_cyc[k] += $countones(credit_stall);
      if (link_pkt_start[P_XM]) xm_starts[k]++;
    end
    always @(posedge clk_sw) if (rst_sw_n) block_cyc[k] += $countones(xbar_blocked);

    // cut-through latency: header written into a channel buffer -> header
    // passes the crossbar
    real t_hdr [NLINKS][$];
    for (genvar c = 0; c < int'(NLINKS); c++) begin : g_mon
      int left = 0;
      always @(posedge clk_link) begin
        if (rst_link_n && u.g_ch[c].rx_wen) begin
          if (left == 0) begin
            header_t h;
            h = header_t'(u.g_ch[c].rx_wdata);
            left = 1 + 2 * int'(h.len);
            t_hdr[c].push_back($realtime);
          end else left--;
        end
      end
    end
    always @(posedge clk_sw) begin
      for (int c = 0; c < int'(NLINKS); c++) begin
        if (rst_sw_n && u.xi_valid[c] && u.xi_ready[c] && u.xi_flit[c].sop) begin
          header_t h;
          int lat;
          h = header_t'(u.xi_flit[c].data);
          if (h.dst != coord_of(k)) hop_cnt[k]++;
          if (t_hdr[c].size() > 0) begin
            lat = int'($ceil(($realtime - t_hdr[c].pop_front()) / T_SW));
            if (lat_strict) begin
              check(lat <= 10, $sformatf("node %0d port %0d: header forwarded after %0d cycles", k, c, lat));
              lat_n++;
              if (lat > lat_max) lat_max = lat;
            end
          end else check(0, "header passed the crossbar before it arrived");
        end
      end
    end

    task automatic acc(input bit wr, input logic [7:0] a, input logic [63:0] d, output logic [63:0] rd);
      @(negedge clk_pci);
      req_valid = 1; req_write = wr; req_addr = a; req_wdata = d;
      #1;
      while (!req_ready) begin @(negedge clk_pci); #1; end
      @(negedge clk_pci);
      req_valid = 0;
      rd = resp_rdata;
    endtask

    initial begin : host
      logic [63:0] rd, st;
      wait (rst_pci_n && rst_sw_n && rst_link_n);
      acc(1, 8'h20, cfg_word(k, 3'b000, 3'b000), rd);
      cfg_done[k] = 1;
      forever begin
        acc(0, 8'h18, '0, st);
        if (!rx_pause[k] && st[15:0] != 0) begin
          header_t h;
          int src, tag;
          logic [63:0] x, w, e;
          acc(0, 8'h10, '0, rd);
          h = header_t'(rd);
          src = int'(h.src.x) + 2 * int'(h.src.y) + 4 * int'(h.src.z);
          tag = int'(h.tag);
          check(h.dst == coord_of(k), $sformatf("node %0d got a packet for another node", k));
          check(tag > last_tag[src][k], $sformatf("node %0d: order from %0d (%0d after %0d)", k, src, tag, last_tag[src][k]));
          last_tag[src][k] = tag;
          x = '0;
          for (int i = 0; i < 2 * int'(h.len); i++) begin
            acc(0, 8'h10, '0, w);
            e = pay(src, k, tag, i);
            if (tag == corrupt_tag && src == 0 && i == 0) e[0] = ~e[0];
            check(w == e, $sformatf("node %0d: word %0d of packet %0d from %0d", k, i, tag, src));
            x ^= w;
          end
          acc(0, 8'h10, '0, rd);
          if (tag == corrupt_tag && src == 0) begin
            check(rd != x, "corrupted packet: footer disagrees with payload");
            n_csum_seen++;
          end else check(rd == x, $sformatf("node %0d: footer of packet %0d from %0d", k, tag, src));
          if (src == k) n_self++;
          n_rcvd[k]++;
        end else if (job_kind[k].size() > 0 &&
                     (job_kind[k][0] == 1 ||
                      (int'(st[31:16]) + 2 * job_len[k][0] <= LOCAL_DEPTH && int'(st[47:32]) < (1 << CMDQ_AW)))) begin
          int kind, dst, len, tag;
          header_t cmd;
          kind = job_kind[k].pop_front();
          dst  = job_dst[k].pop_front();
          len  = job_len[k].pop_front();
          if (kind == 1) acc(1, 8'h20, cfg_word(k, 3'(dst), 3'(len)), rd);
          else begin
            tag = ++tag_ctr[k];
            if (dst == 1000) begin dst = 1; corrupt_tag = tag; corrupt_arm = 1; end
            for (int i = 0; i < 2 * len; i++) acc(1, 8'h08, pay(k, dst, tag, i), rd);
            cmd = '0; cmd.dst = coord_of(dst); cmd.len = LEN_W'(len); cmd.tag = 16'(tag);
            acc(1, 8'h00, cmd, rd);
            n_sent[k]++;
          end
        end
      end
    end
  end

  // ---------------- scenario
  function automatic int total(input int a [NN]);
    int s = 0;
    for (int i = 0; i < NN; i++) s += a[i];
    return s;
  endfunction

  task automatic send(int from, int to, int len);
    job_kind[from].push_back(0); job_dst[from].push_back(to); job_len[from].push_back(len);
  endtask

  task automatic drain(input string what, input int max_ns);
    int t;
    t = 0;
    while ((total(n_rcvd) != total(n_sent) ||
            job_kind[0].size() + job_kind[1].size() + job_kind[2].size() + job_kind[3].size() +
            job_kind[4].size() + job_kind[5].size() + job_kind[6].size() + job_kind[7].size() != 0) && t < max_ns) begin
      #100; t += 100;
    end
    check(total(n_rcvd) == total(n_sent), $sformatf("%s: %0d of %0d packets delivered", what, total(n_rcvd), total(n_sent)));
  endtask

  initial begin
    for (int i = 0; i < NN; i++) begin
      n_sent[i] = 0; n_rcvd[i] = 0; tag_ctr[i] = 0; rx_pause[i] = 0; cfg_done[i] = 0;
      hop_cnt[i] = 0; stall_cyc[i] = 0; block_cyc[i] = 0; xm_starts[i] = 0;
      for (int j = 0; j < NN; j++) last_tag[i][j] = 0;
      for (int c = 0; c < int'(NLINKS); c++) begin
        cb_n[i][c] = 0;
        for (int d = 0; d < DELAY; d++) dl[i][c][d] = '{kind: LK_IDLE, credit: '0, data: '0};
      end
    end
    #50; rst_pci_n = 1; rst_sw_n = 1; rst_link_n = 1;
    wait (cfg_done[0] && cfg_done[1] && cfg_done[2] && cfg_done[3] &&
          cfg_done[4] && cfg_done[5] && cfg_done[6] && cfg_done[7]);
    #200;

    // 1: ping-pong, one packet in the network at a time
    lat_strict = 1;
    for (int it = 0; it < 3; it++) begin
      send(0, 1, 1); drain("ping", 20000);
      send(1, 0, 1); drain("pong", 20000);
    end
    send(0, 7, 4); drain("three hops out", 20000);
    send(7, 0, 4); drain("three hops back", 20000);
    send(5, 2, 15); drain("long packet, three hops", 20000);
    lat_strict = 0;
    check(hop_cnt[1] + hop_cnt[3] > 0, "packets hopped through intermediate nodes");

    // 2: software override: node 0 sends X traffic the minus way
    begin
      int xm_before;
      xm_before = xm_starts[0];
      job_kind[0].push_back(1); job_dst[0].push_back(1); job_len[0].push_back(1);
      send(0, 1, 2); send(0, 1, 1);
      drain("override", 20000);
      check(xm_starts[0] - xm_before == 2, $sformatf("override: %0d packets left by X-", xm_starts[0] - xm_before));
      job_kind[0].push_back(1); job_dst[0].push_back(0); job_len[0].push_back(0);
      send(0, 1, 1);
      drain("override off", 20000);
      check(xm_starts[0] - xm_before == 2, "override off: X+ again");
    end

    // 3: random all-to-all, including packets to self
    for (int r = 0; r < 10; r++)
      for (int s = 0; s < NN; s++) send(s, $urandom % NN, 1 + $urandom % 8);
    for (int s = 0; s < NN; s++) send(s, s, 2);
    drain("all-to-all", 400000);

    // 4: hot spot on node 7 while it does not read
    rx_pause[7] = 1;
    for (int r = 0; r < 4; r++)
      for (int s = 0; s < 7; s++) send(s, 7, 8);
    #20000;
    check(total(stall_cyc) > 0, "senders waited for credits while node 7 was full");
    rx_pause[7] = 0;
    drain("hot spot", 400000);

    // 5: one payload bit flipped on the cable node 0 X+ -> node 1 X-
    send(0, 1000, 2);
    drain("corrupted packet", 20000);
    begin
      logic [63:0] st;
      int errs;
      #2000;
      check(n_csum_seen == 1, "corrupted packet received");
      // node 1's checksum-error counter, as the host reads it
      errs = int'(g_node[1].u.csum_err_pci);
      check(errs == 1, $sformatf("node 1 counted %0d checksum errors", errs));
      check(int'(g_node[2].u.csum_err_pci) == 0, "node 2 counted no checksum error");
    end

    $display("mechanisms: hops %0d, to-self %0d, credit-stall cycles %0d, crossbar-contention cycles %0d, override packets %0d, checksum errors %0d",
             total(hop_cnt), n_self, total(stall_cyc), total(block_cyc), xm_starts[0], n_csum_seen);
    $display("cut-through: %0d headers measured without contention, worst %0d switch cycles", lat_n, lat_max);
    check(total(hop_cnt) > 0, "hop-through happened");
    check(n_self > 0, "packet to self happened");
    check(total(stall_cyc) > 0, "credit stall happened");
    check(total(block_cyc) > 0, "crossbar contention happened");
    check(lat_n > 0, "cut-through latency measured");
    $display("packets sent %0d received %0d", total(n_sent), total(n_rcvd));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #3000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
