// tb_apelink_ring: four APELink nodes in an X ring (Y and Z of size 1),
// the small-ring setup used for benchmarking such cards. Buffers are at
// their full sizes; the packets are short (1..16 128-bit words) to keep the
// run brief.
// Unlike a ring of two, a ring of four makes packets pass straight through
// an intermediate node in the same dimension (X- in, X+ out), use the
// wrap-around cable from node 3 to node 0, and take the tie rule at a
// distance of two (the plus way).
// Operation: every node sends 24 packets to random destinations, itself
// included, while it reads what arrives for it; sending and reading share
// the node's host port through a simple lock in the host model.
// Checked: every packet arrives once, in order per source, with its
// payload and footer intact; and the number of packets started on each of
// the eight X cables equals what a reference route (shortest way round,
// ties to plus) predicts for the traffic sent.
module tb_apelink_ring;
  import apenet_pkg::*;

  localparam int NN = 4;
  localparam int NPKT = 24;
  localparam int DELAY = 3;

  logic clk_pci = 0, clk_sw = 0, clk_link = 0;
  logic rst_pci_n = 0, rst_sw_n = 0, rst_link_n = 0;
  always #3.75 clk_pci  = ~clk_pci;
  always #3.5  clk_sw   = ~clk_sw;
  always #3.75 clk_link = ~clk_link;

  link_word_t ltx [NN][NLINKS];
  link_word_t lrx [NN][NLINKS];
  link_word_t dl  [NN][NLINKS][DELAY];

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, what); end
  endtask

  function automatic logic [63:0] pay(int src, int tag, int i);
    return {8'(src), 8'h5A, 16'(tag), 32'(i) * 32'h0103_0507 ^ 32'(tag)};
  endfunction

  // cables: X+ of node k goes to X- of node k+1, around the ring
  always @(posedge clk_link)
    for (int k = 0; k < NN; k++)
      for (int c = 0; c < int'(NLINKS); c++) begin
        dl[k][c][0] <= ltx[k][c];
        for (int d = 1; d < DELAY; d++) dl[k][c][d] <= dl[k][c][d-1];
      end
  always_comb
    for (int k = 0; k < NN; k++) begin
      lrx[k][P_XP] = dl[(k + 1) % NN][P_XM][DELAY-1];
      lrx[k][P_XM] = dl[(k + NN - 1) % NN][P_XP][DELAY-1];
      lrx[k][P_YP] = dl[k][P_YM][DELAY-1];
      lrx[k][P_YM] = dl[k][P_YP][DELAY-1];
      lrx[k][P_ZP] = dl[k][P_ZM][DELAY-1];
      lrx[k][P_ZM] = dl[k][P_ZP][DELAY-1];
    end

  // traffic plan, made before the run
  int plan_dst [NN][NPKT];
  int plan_len [NN][NPKT];
  int exp_cnt  [NN];              // packets each node must receive
  int want_xp  [NN], want_xm [NN]; // predicted packet starts per X cable
  int seen_xp  [NN], seen_xm [NN];
  int n_rcvd   [NN];
  int next_seq [NN][NN];          // [dst][src]: packets of src before this one are done

  for (genvar k = 0; k < NN; k++) begin : g_node
    logic              req_valid = 0, req_write = 0, req_ready, resp_valid;
    logic [7:0]        req_addr = '0;
    logic [63:0]       req_wdata = '0, resp_rdata;
    logic [NLINKS-1:0] credit_stall, link_pkt_start;
    logic [NPORTS-1:0] xbar_blocked, xbar_grant;
    logic              pkt_sent, pkt_rcvd;
    bit                lock = 0;

    apelink u (
      .clk_pci, .rst_pci_n, .clk_sw, .rst_sw_n, .clk_link, .rst_link_n,
      .req_valid, .req_write, .req_addr, .req_wdata, .req_ready, .resp_valid, .resp_rdata,
      .link_tx(ltx[k]), .link_rx(lrx[k]),
      .credit_stall, .link_pkt_start, .xbar_blocked, .xbar_grant, .pkt_sent, .pkt_rcvd);

    always @(posedge clk_link)
      if (rst_link_n) begin
        if (link_pkt_start[P_XP]) seen_xp[k]++;
        if (link_pkt_start[P_XM]) seen_xm[k]++;
      end

    // one access; the lock keeps the sending and the reading process from
    // driving the port at the same time
    task automatic acc(input bit wr, input logic [7:0] a, input logic [63:0] d, output logic [63:0] rd);
      @(negedge clk_pci);
      while (lock) @(negedge clk_pci);
      lock = 1;
      req_valid = 1; req_write = wr; req_addr = a; req_wdata = d;
      #1;
      while (!req_ready) begin @(negedge clk_pci); #1; end
      @(negedge clk_pci);
      req_valid = 0;
      rd = resp_rdata;
      lock = 0;
    endtask

    task automatic configure();
      route_cfg_t c;
      logic [63:0] rd;
      c = '0;
      c.me = '{z: 4'd0, y: 4'd0, x: 4'(k)};
      c.size = '{z: 4'd1, y: 4'd1, x: 4'(NN)};
      acc(1, 8'h20, 64'(c), rd);
    endtask

    task automatic sender();
      header_t cmd;
      logic [63:0] rd;
      for (int p = 0; p < NPKT; p++) begin
        for (int i = 0; i < 2 * plan_len[k][p]; i++) acc(1, 8'h08, pay(k, k * 256 + p, i), rd);
        cmd = '0;
        cmd.dst = '{z: 4'd0, y: 4'd0, x: 4'(plan_dst[k][p])};
        cmd.len = LEN_W'(plan_len[k][p]);
        cmd.tag = 16'(k * 256 + p);
        acc(1, 8'h00, cmd, rd);
      end
    endtask

    // reads a packet only once the receive buffer holds something, so that
    // waiting never keeps the sender off the port
    task automatic reader();
      logic [63:0] rd, x, st;
      header_t h;
      int src, seq, len, bad, want;
      while (n_rcvd[k] < exp_cnt[k]) begin
        acc(0, 8'h18, '0, st);
        if (st[15:0] == 16'd0) begin
          repeat (20) @(negedge clk_pci);
          continue;
        end
        acc(0, 8'h10, '0, rd);
        h = header_t'(rd);
        src = int'(h.src.x);
        seq = int'(h.tag) & 255;
        len = int'(h.len);
        // the next packet from src addressed to this node
        want = next_seq[k][src];
        while (want < NPKT && plan_dst[src][want] != k) want++;
        check(int'(h.tag) >> 8 == src && src < NN && seq == want && plan_len[src][seq] == len,
              $sformatf("node %0d: header src %0d tag %h len %0d (expected packet %0d)",
                        k, src, h.tag, len, want));
        next_seq[k][src] = seq + 1;
        x = '0; bad = 0;
        for (int i = 0; i < 2 * len; i++) begin
          acc(0, 8'h10, '0, rd);
          if (rd != pay(src, int'(h.tag), i)) bad++;
          x ^= rd;
        end
        acc(0, 8'h10, '0, rd);
        check(bad == 0 && rd == x, $sformatf("node %0d from %0d: %0d bad words, footer %h", k, src, bad, rd));
        n_rcvd[k]++;
      end
    endtask
  end

  initial begin
    logic [63:0] st;
    for (int k = 0; k < NN; k++) begin
      exp_cnt[k] = 0; n_rcvd[k] = 0;
      want_xp[k] = 0; want_xm[k] = 0; seen_xp[k] = 0; seen_xm[k] = 0;
      for (int j = 0; j < NN; j++) next_seq[k][j] = 0;
    end
    // plan and reference route: distance d = (dst - src) mod NN; the plus
    // way for d <= NN/2, the minus way otherwise
    for (int k = 0; k < NN; k++)
      for (int p = 0; p < NPKT; p++) begin
        int d;
        plan_dst[k][p] = int'($urandom_range(NN - 1, 0));
        plan_len[k][p] = int'($urandom_range(16, 1));
        exp_cnt[plan_dst[k][p]]++;
        d = (plan_dst[k][p] - k + NN) % NN;
        if (2 * d <= NN)
          for (int h = 0; h < d; h++) want_xp[(k + h) % NN]++;
        else
          for (int h = 0; h < NN - d; h++) want_xm[(k - h + NN) % NN]++;
      end

    for (int k = 0; k < NN; k++)
      for (int c = 0; c < int'(NLINKS); c++)
        for (int d = 0; d < DELAY; d++) dl[k][c][d] = '{kind: LK_IDLE, credit: '0, data: '0};
    #50; rst_pci_n = 1; rst_sw_n = 1; rst_link_n = 1;
    fork
      g_node[0].configure(); g_node[1].configure(); g_node[2].configure(); g_node[3].configure();
    join
    #100;

    fork
      g_node[0].sender(); g_node[0].reader();
      g_node[1].sender(); g_node[1].reader();
      g_node[2].sender(); g_node[2].reader();
      g_node[3].sender(); g_node[3].reader();
    join
    #500;

    for (int k = 0; k < NN; k++) begin
      check(n_rcvd[k] == exp_cnt[k], $sformatf("node %0d received %0d of %0d", k, n_rcvd[k], exp_cnt[k]));
      check(seen_xp[k] == want_xp[k] && seen_xm[k] == want_xm[k],
            $sformatf("node %0d cables: X+ %0d (expected %0d), X- %0d (expected %0d)",
                      k, seen_xp[k], want_xp[k], seen_xm[k], want_xm[k]));
    end
    g_node[0].acc(0, 8'h18, '0, st); check(st[63:48] == 16'd0, "node 0: no checksum errors");
    g_node[1].acc(0, 8'h18, '0, st); check(st[63:48] == 16'd0, "node 1: no checksum errors");
    g_node[2].acc(0, 8'h18, '0, st); check(st[63:48] == 16'd0, "node 2: no checksum errors");
    g_node[3].acc(0, 8'h18, '0, st); check(st[63:48] == 16'd0, "node 3: no checksum errors");
    // the ring features must each have happened
    check(want_xp[NN-1] > 0 && want_xm[0] > 0, "wrap-around cable used in both directions");
    begin
      int through;
      through = 0;
      for (int k = 0; k < NN; k++)
        for (int p = 0; p < NPKT; p++)
          if ((plan_dst[k][p] - k + NN) % NN == 2) through++;
      $display("packets passing through an intermediate node: %0d", through);
      check(through > 0, "pass-through traffic happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
