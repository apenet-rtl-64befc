// tb_apelink_full: two APELink nodes at full size (2K-word channel buffers,
// 8K-word local buffers) joined in an X ring of two, as in the ping-pong and
// bandwidth benchmarks between adjacent nodes. Y and Z channels are looped
// back on themselves and stay idle. All three clocks run near 133 MHz.
// Operation:
//   1. 16-byte and 4 KB messages each way, one after the other (ping-pong);
//   2. one packet of 1023 128-bit words (2048 words with header and
//      footer), which needs the whole far channel buffer;
//   3. ping-pong with messages of 16 B to 16 KB, timing each;
//   4. a 1 MB message from node 0 to node 1 (64 packets of 1023 128-bit
//      words and one of 64), with the host writing and reading one word per
//      clock so that the link is the bottleneck;
//   5. both nodes sending 64 KB to each other at the same time, the way a
//      combined send/receive call uses both directions of a channel.
// Checked: every header, payload word and footer; that every packet on
// either X+ cable streams as ceil(64*N/40) consecutive link words (40
// packet bits per link clock); that the link stays at least 90 % busy over
// the 1 MB message and over the two-way exchange, in both directions at
// once for the latter; and that no checksum error is counted.
module tb_apelink_full;
  import apenet_pkg::*;

  localparam int NN = 2;
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
    return {8'(src), 8'hA5, 16'(tag), 32'(i) * 32'h0101_0101 ^ 32'(tag)};
  endfunction

  always @(posedge clk_link)
    for (int k = 0; k < NN; k++)
      for (int c = 0; c < int'(NLINKS); c++) begin
        dl[k][c][0] <= ltx[k][c];
        for (int d = 1; d < DELAY; d++) dl[k][c][d] <= dl[k][c][d-1];
      end
  always_comb
    for (int k = 0; k < NN; k++) begin
      lrx[k][P_XP] = dl[1-k][P_XM][DELAY-1];
      lrx[k][P_XM] = dl[1-k][P_XP][DELAY-1];
      lrx[k][P_YP] = dl[k][P_YM][DELAY-1];
      lrx[k][P_YM] = dl[k][P_YP][DELAY-1];
      lrx[k][P_ZP] = dl[k][P_ZM][DELAY-1];
      lrx[k][P_ZM] = dl[k][P_ZP][DELAY-1];
    end

  // Monitor on each node's X+ cable. A packet of N words must stream as
  // ceil(64*N/40) consecutive link words; N is taken from the length field,
  // which the first chunk carries in its low bits. Busy words and the first
  // and last busy link clock give the utilisation over a phase.
  longint lclk = 0;
  int     mon_pkts [NN], mon_rate_ok [NN], mon_busy [NN];
  longint mon_first [NN], mon_last [NN];
  always @(posedge clk_link) lclk <= lclk + 1;

  task automatic mon_clear();
    for (int k = 0; k < NN; k++) begin
      mon_busy[k] = 0; mon_first[k] = -1; mon_last[k] = -1;
    end
  endtask

  for (genvar k = 0; k < NN; k++) begin : g_mon
    int run = 0, words = 0;
    always @(posedge clk_link) begin
      if (rst_link_n && ltx[k][P_XP].kind != LK_IDLE) begin
        if (run == 0) words = 2 + 2 * int'(ltx[k][P_XP].data[LEN_W-1:0]);
        run++;
        mon_busy[k]++;
        if (mon_first[k] < 0) mon_first[k] = lclk;
        mon_last[k] = lclk;
        if (ltx[k][P_XP].kind == LK_END) begin
          mon_pkts[k]++;
          if (run == (64 * words + 39) / 40) mon_rate_ok[k]++;
          else $display("FAIL-RATE node %0d: %0d words in %0d link words", k, words, run);
          run = 0;
        end
      end
    end
  end

  int n_rcvd [NN];

  for (genvar k = 0; k < NN; k++) begin : g_node
    logic              req_valid = 0, req_write = 0, req_ready, resp_valid;
    logic [7:0]        req_addr = '0;
    logic [63:0]       req_wdata = '0, resp_rdata;
    logic [NLINKS-1:0] credit_stall, link_pkt_start;
    logic [NPORTS-1:0] xbar_blocked, xbar_grant;
    logic              pkt_sent, pkt_rcvd;

    apelink u (
      .clk_pci, .rst_pci_n, .clk_sw, .rst_sw_n, .clk_link, .rst_link_n,
      .req_valid, .req_write, .req_addr, .req_wdata, .req_ready, .resp_valid, .resp_rdata,
      .link_tx(ltx[k]), .link_rx(lrx[k]),
      .credit_stall, .link_pkt_start, .xbar_blocked, .xbar_grant, .pkt_sent, .pkt_rcvd);

    task automatic acc(input bit wr, input logic [7:0] a, input logic [63:0] d, output logic [63:0] rd);
      @(negedge clk_pci);
      req_valid = 1; req_write = wr; req_addr = a; req_wdata = d;
      #1;
      while (!req_ready) begin @(negedge clk_pci); #1; end
      @(negedge clk_pci);
      req_valid = 0;
      rd = resp_rdata;
    endtask

    // back-to-back accesses: req_valid stays high, one word per clock
    // whenever the card is ready
    logic [63:0] rq [$];

    task automatic write_burst(input logic [7:0] a, int n, int tag);
      @(negedge clk_pci);
      req_valid = 1; req_write = 1; req_addr = a;
      for (int i = 0; i < n; i++) begin
        req_wdata = pay(k, tag, i);
        #1;
        while (!req_ready) begin @(negedge clk_pci); #1; end
        @(negedge clk_pci);
      end
      req_valid = 0;
    endtask

    task automatic read_burst(int n);
      int acc_n = 0;
      @(negedge clk_pci);
      req_valid = 1; req_write = 0; req_addr = 8'h10;
      while (acc_n < n) begin
        #1;
        if (req_ready) acc_n++;
        @(negedge clk_pci);
        if (acc_n == n) req_valid = 0;
        if (resp_valid) rq.push_back(resp_rdata);
      end
      @(negedge clk_pci);
      if (resp_valid) rq.push_back(resp_rdata);
    endtask

    // a message of npk packets with tags tag0, tag0+1, ...; the last one
    // has last_len 128-bit words, the others 1023
    task automatic send_msg(int npk, int last_len, int tag0);
      header_t cmd;
      logic [63:0] rd;
      for (int p = 0; p < npk; p++) begin
        int len = (p == npk - 1) ? last_len : 1023;
        write_burst(8'h08, 2 * len, tag0 + p);
        cmd = '0; cmd.dst = '{z: 4'd0, y: 4'd0, x: 4'(1 - k)}; cmd.len = LEN_W'(len); cmd.tag = 16'(tag0 + p);
        acc(1, 8'h00, cmd, rd);
      end
    endtask

    task automatic recv_msg(int npk, int last_len, int tag0);
      for (int p = 0; p < npk; p++) begin
        int len = (p == npk - 1) ? last_len : 1023;
        logic [63:0] x;
        header_t h;
        int bad;
        rq.delete();
        read_burst(2 + 2 * len);
        check(rq.size() == 2 + 2 * len, $sformatf("node %0d: %0d words read", k, rq.size()));
        h = header_t'(rq[0]);
        check(int'(h.len) == len && int'(h.tag) == tag0 + p && int'(h.src.x) == 1 - k,
              $sformatf("node %0d header len %0d tag %0d", k, h.len, h.tag));
        x = '0; bad = 0;
        for (int i = 0; i < 2 * len; i++) begin
          if (rq[1 + i] != pay(1 - k, tag0 + p, i)) bad++;
          x ^= rq[1 + i];
        end
        check(bad == 0 && rq[1 + 2 * len] == x, $sformatf("node %0d packet %0d: %0d bad words, footer %h", k, p, bad, rq[1 + 2 * len]));
        n_rcvd[k]++;
      end
    endtask

    task automatic configure();
      route_cfg_t c;
      logic [63:0] rd;
      c = '0;
      c.me = '{z: 4'd0, y: 4'd0, x: 4'(k)};
      c.size = '{z: 4'd1, y: 4'd1, x: 4'd2};
      acc(1, 8'h20, 64'(c), rd);
    endtask

    task automatic send(int len, int tag);
      header_t cmd;
      logic [63:0] rd;
      for (int i = 0; i < 2 * len; i++) acc(1, 8'h08, pay(k, tag, i), rd);
      cmd = '0; cmd.dst = '{z: 4'd0, y: 4'd0, x: 4'(1 - k)}; cmd.len = LEN_W'(len); cmd.tag = 16'(tag);
      acc(1, 8'h00, cmd, rd);
    endtask

    task automatic receive(int want_len, int want_tag);
      logic [63:0] rd, x;
      header_t h;
      int bad;
      acc(0, 8'h10, '0, rd);          // held until the header is there
      h = header_t'(rd);
      check(int'(h.len) == want_len && int'(h.tag) == want_tag && int'(h.src.x) == 1 - k,
            $sformatf("node %0d header len %0d tag %0d", k, h.len, h.tag));
      x = '0; bad = 0;
      for (int i = 0; i < 2 * int'(h.len); i++) begin
        acc(0, 8'h10, '0, rd);
        if (rd != pay(1 - k, want_tag, i)) bad++;
        x ^= rd;
      end
      check(bad == 0, $sformatf("node %0d: %0d bad payload words", k, bad));
      acc(0, 8'h10, '0, rd);
      check(rd == x, $sformatf("node %0d footer", k));
      n_rcvd[k]++;
    endtask
  end

  initial begin
    logic [63:0] st;
    time t0, t1;
    mon_pkts = '{default: 0};
    mon_rate_ok = '{default: 0};
    mon_clear();
    n_rcvd = '{default: 0};
    for (int k = 0; k < NN; k++)
      for (int c = 0; c < int'(NLINKS); c++)
        for (int d = 0; d < DELAY; d++) dl[k][c][d] = '{kind: LK_IDLE, credit: '0, data: '0};
    #50; rst_pci_n = 1; rst_sw_n = 1; rst_link_n = 1;
    fork g_node[0].configure(); g_node[1].configure(); join
    #100;

    // 16 bytes each way (one 128-bit word)
    t0 = $time;
    g_node[0].send(1, 1);
    g_node[1].receive(1, 1);
    g_node[1].send(1, 2);
    g_node[0].receive(1, 2);
    t1 = $time;
    $display("16-byte ping-pong: half round trip %0d ns (host model included)", (t1 - t0) / 2);

    // 4 KB each way (256 128-bit words)
    g_node[0].send(256, 3);
    g_node[1].receive(256, 3);
    g_node[1].send(256, 4);
    g_node[0].receive(256, 4);

    // largest packet: 2048 words, fills the far channel buffer exactly
    fork
      g_node[0].send(1023, 5);
      g_node[1].receive(1023, 5);
    join

    check(n_rcvd[0] == 2 && n_rcvd[1] == 3, "all five packets received");

    // ping-pong sweep, 16 B to 16 KB messages; the half round trip
    // includes the host model writing and reading one word per clock
    begin
      int sizes [7];
      time hrt [7];
      sizes = '{16, 64, 256, 1024, 4096, 8192, 16384};
      for (int j = 0; j < 7; j++) begin
        int w, npk, last;
        w = sizes[j] / 16;
        npk = (w + 1022) / 1023;
        last = w - 1023 * (npk - 1);
        t0 = $time;
        fork g_node[0].send_msg(npk, last, 400 + 16 * j); g_node[1].recv_msg(npk, last, 400 + 16 * j); join
        fork g_node[1].send_msg(npk, last, 408 + 16 * j); g_node[0].recv_msg(npk, last, 408 + 16 * j); join
        hrt[j] = ($time - t0) / 2;
        $display("ping-pong %6d B: half round trip %0d ns", sizes[j], hrt[j]);
        if (j > 0) check(hrt[j] > hrt[j-1], "latency grows with message size");
      end
    end

    // 1 MB one way: 65536 128-bit words = 64 x 1023 + 64
    mon_clear();
    fork
      g_node[0].send_msg(65, 64, 100);
      g_node[1].recv_msg(65, 64, 100);
    join
    begin
      real util, mbs;
      util = real'(mon_busy[0]) / real'(mon_last[0] - mon_first[0] + 1);
      mbs  = 1048576.0 / (real'(mon_last[0] - mon_first[0] + 1) * 7.5e-3);
      $display("1 MB one way: link busy %0.1f %%, %0.0f MB/s of payload at a 133 MHz link clock", 100.0 * util, mbs);
      check(util >= 0.9, "1 MB message keeps the link at least 90 % busy");
    end

    // both ways at once, 64 KB each (4 packets of 1023 128-bit words + 1 of 4)
    mon_clear();
    fork
      begin g_node[0].send_msg(5, 4, 200); g_node[0].recv_msg(5, 4, 300); end
      begin g_node[1].send_msg(5, 4, 300); g_node[1].recv_msg(5, 4, 200); end
    join
    begin
      real u0, u1, mbs;
      longint lo, hi;
      u0 = real'(mon_busy[0]) / real'(mon_last[0] - mon_first[0] + 1);
      u1 = real'(mon_busy[1]) / real'(mon_last[1] - mon_first[1] + 1);
      lo = (mon_first[0] > mon_first[1]) ? mon_first[0] : mon_first[1];
      hi = (mon_last[0] < mon_last[1]) ? mon_last[0] : mon_last[1];
      mbs = 2.0 * 65536.0 / (real'(((mon_last[0] > mon_last[1]) ? mon_last[0] : mon_last[1])
                                   - ((mon_first[0] < mon_first[1]) ? mon_first[0] : mon_first[1]) + 1) * 7.5e-3);
      $display("two-way: link busy %0.1f %% / %0.1f %%, overlap %0d link clocks, %0.0f MB/s aggregate",
               100.0 * u0, 100.0 * u1, hi - lo, mbs);
      check(u0 >= 0.9 && u1 >= 0.9, "both directions at least 90 % busy");
      check(hi - lo > 0.8 * (mon_last[0] - mon_first[0]), "both directions stream at the same time");
    end

    check(mon_pkts[0] == 3 + 8 + 65 + 5 && mon_pkts[1] == 2 + 8 + 5,
          $sformatf("packets on the X+ cables: %0d / %0d", mon_pkts[0], mon_pkts[1]));
    check(mon_rate_ok[0] == mon_pkts[0] && mon_rate_ok[1] == mon_pkts[1],
          "every packet streamed at 40 packet bits per link clock");
    g_node[1].acc(0, 8'h18, '0, st);
    check(st[63:48] == 16'd0 && st[15:0] == 16'd0, $sformatf("node 1 status %h", st));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
