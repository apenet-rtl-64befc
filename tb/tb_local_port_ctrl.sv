// tb_local_port_ctrl: self-checking test of the local port.
// Transmit: three commands with payloads of 1, 3 and 2 128-bit words; the
// payload of the second arrives late, so the controller must wait for it.
// The crossbar side takes words at random. Checked: header = command with
// this node as source and sop, payload in order, footer = XOR of payload
// with eop. Receive: one good packet and one with a corrupted footer are
// delivered; every word must reach the receive buffer, a full buffer must
// hold the crossbar off, and exactly one checksum error must be counted.
module tb_local_port_ctrl;
  import apenet_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  coord_t      me = '{z: 4'd3, y: 4'd2, x: 4'd1};
  logic [63:0] cmd_rdata, txd_rdata, rxd_wdata;
  logic        cmd_empty, cmd_ren, txd_empty, txd_ren;
  logic        out_valid, out_ready = 0, in_valid = 0, in_ready;
  flit_t       out_flit, in_flit = '0;
  logic        rxd_wen, rxd_full = 0;
  logic        pkt_sent, pkt_rcvd;
  logic [15:0] csum_err;

  local_port_ctrl dut (.clk, .rst_n, .me, .cmd_rdata, .cmd_empty, .cmd_ren,
    .txd_rdata, .txd_empty, .txd_ren, .out_valid, .out_flit, .out_ready,
    .in_valid, .in_flit, .in_ready, .rxd_wen, .rxd_wdata, .rxd_full,
    .pkt_sent_o(pkt_sent), .pkt_rcvd_o(pkt_rcvd), .csum_err_o(csum_err));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // command queue and transmit buffer models
  logic [63:0] cq [16], dq [64];
  int ch = 0, ct = 0, dh = 0, dt = 0;
  assign cmd_empty = (ch == ct);
  assign cmd_rdata = cq[ch % 16];
  assign txd_empty = (dh == dt);
  assign txd_rdata = dq[dh % 64];
  always @(posedge clk) begin
    if (cmd_ren) ch <= ch + 1;
    if (txd_ren) dh <= dh + 1;
  end

  logic [63:0] exp_q [$];
  bit          exp_s [$], exp_e [$];

  function automatic logic [63:0] mkcmd(int len, int tag);
    header_t h;
    h = '0; h.len = LEN_W'(len); h.tag = 16'(tag); h.dst = '{z: 4'd0, y: 4'd1, x: 4'd2};
    h.src = '{z: 4'hF, y: 4'hF, x: 4'hF};   // must be replaced
    return h;
  endfunction

  task automatic expect_pkt(int len, int tag);
    header_t h;
    logic [63:0] x;
    h = header_t'(mkcmd(len, tag)); h.src = me;
    cq[ct % 16] = mkcmd(len, tag); ct++;
    exp_q.push_back(h); exp_s.push_back(1); exp_e.push_back(0);
    x = '0;
    for (int i = 0; i < 2 * len; i++) begin
      logic [63:0] w;
      w = {$urandom, $urandom};
      x ^= w;
      exp_q.push_back(w); exp_s.push_back(0); exp_e.push_back(0);
      dq[dt % 64] = w; dt++;
    end
    exp_q.push_back(x); exp_s.push_back(0); exp_e.push_back(1);
  endtask

  int n_out = 0, n_sent = 0;
  always @(posedge clk) begin
    if (pkt_sent) n_sent <= n_sent + 1;
    if (out_valid && out_ready) begin
      if (exp_q.size() == 0) check(0, "unexpected word");
      else begin
        check(out_flit.data == exp_q[0], $sformatf("tx word %0d", n_out));
        check(out_flit.sop == exp_s[0] && out_flit.eop == exp_e[0], $sformatf("tx word %0d framing", n_out));
        void'(exp_q.pop_front()); void'(exp_s.pop_front()); void'(exp_e.pop_front());
      end
      n_out <= n_out + 1;
    end
  end

  logic [63:0] rxw [$];
  int n_rcvd = 0;
  always @(posedge clk) begin
    if (rxd_wen) rxw.push_back(rxd_wdata);
    if (pkt_rcvd) n_rcvd <= n_rcvd + 1;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    expect_pkt(1, 1);
    begin
      // second packet: its payload is written only later
      header_t h;
      logic [63:0] w [6];
      logic [63:0] x;
      h = header_t'(mkcmd(3, 2)); h.src = me;
      cq[ct % 16] = mkcmd(3, 2); ct++;
      exp_q.push_back(h); exp_s.push_back(1); exp_e.push_back(0);
      x = '0;
      for (int i = 0; i < 6; i++) begin
        w[i] = {$urandom, $urandom}; x ^= w[i];
        exp_q.push_back(w[i]); exp_s.push_back(0); exp_e.push_back(0);
      end
      exp_q.push_back(x); exp_s.push_back(0); exp_e.push_back(1);
      repeat (30) begin out_ready = ($urandom % 3 != 0); @(negedge clk); end
      check(n_sent == 1, "second packet waits for its payload");
      for (int i = 0; i < 6; i++) begin dq[dt % 64] = w[i]; dt++; end
    end
    expect_pkt(2, 3);
    while (exp_q.size() != 0) begin out_ready = ($urandom % 3 != 0); @(negedge clk); end
    out_ready = 0;
    repeat (2) @(negedge clk);
    check(n_sent == 3, "three packets sent");

    // receive: good packet, then one with a bad footer
    for (int p = 0; p < 2; p++) begin
      logic [63:0] x;
      x = '0;
      for (int i = 0; i < 6; i++) begin
        in_valid = 1;
        in_flit.sop = (i == 0); in_flit.eop = (i == 5);
        in_flit.data = (i == 0) ? 64'h0000_0000_0001_0002 :
                       (i == 5) ? (x ^ 64'(p)) : 64'(100 * p + i);
        if (i != 0 && i != 5) x ^= in_flit.data;
        if (p == 1 && i == 2) begin
          rxd_full = 1; @(negedge clk);
          check(!in_ready, "full receive buffer holds the crossbar off");
          rxd_full = 0;
        end
        @(negedge clk);
      end
    end
    in_valid = 0;
    @(negedge clk);
    check(rxw.size() == 12, $sformatf("12 words delivered (%0d)", rxw.size()));
    if (rxw.size() == 12) check(rxw[7] == 64'd101 && rxw[10] == 64'd104, "delivered words in place");
    check(n_rcvd == 2, "two packets received");
    check(csum_err == 16'd1, $sformatf("one checksum error (%0d)", csum_err));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
