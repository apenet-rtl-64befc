// tb_io_port_ctrl: self-checking test of the link-side channel controller.
// The far end of the link is modelled by the testbench with its own
// reassembly: it appends the 40 bits of every data chunk to a bit queue,
// takes 64-bit words off the front and drops what is left at an end chunk.
// Checked: packets arrive intact; a packet of N words streams in
// ceil(64*N/40) consecutive link words, the last one marked end; a packet
// that does not fit the far buffer waits (credit stall) and starts once
// enough credits come back; chunks driven into the receive side (with idle
// gaps) come out as whole words; credits for words read from the own
// receive buffer go back in the outgoing link words, across pointer wrap
// and more than one link word's worth at a time.
module tb_io_port_ctrl;
  import apenet_pkg::*;

  localparam int unsigned RX_AW = 7;
  localparam int unsigned CREDIT_INIT = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  link_word_t        tx_word, rx_word;
  logic [63:0]       txf_rdata;
  logic              txf_empty, txf_ren;
  logic [63:0]       rxf_wdata;
  logic              rxf_wen;
  logic              rxf_full = 0;
  logic [RX_AW:0]    rxf_rptr = '0;
  logic              stall, pstart;

  io_port_ctrl #(.RX_AW(RX_AW), .CREDIT_INIT(CREDIT_INIT)) dut (
    .clk, .rst_n, .tx_word_o(tx_word), .rx_word_i(rx_word),
    .txf_rdata, .txf_empty, .txf_ren,
    .rxf_wdata, .rxf_wen, .rxf_full, .rxf_rptr,
    .credit_stall_o(stall), .pkt_start_o(pstart));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // transmit FIFO model (show-ahead)
  logic [63:0] tq [64];
  int th = 0, tt = 0;
  assign txf_empty = (th == tt);
  assign txf_rdata = tq[th % 64];
  always @(posedge clk) if (txf_ren) th <= th + 1;

  // far-end reassembly of what goes out on the link
  bit          bq [$];
  logic [63:0] sent [$];
  int          run = 0, runs [$], ends = 0, credit_seen = 0;
  always @(posedge clk) begin
    if (tx_word.kind != LK_IDLE) begin
      for (int b = 0; b < int'(CHUNK_W); b++) bq.push_back(tx_word.data[b]);
      while (bq.size() >= 64) begin
        logic [63:0] w;
        for (int b = 0; b < 64; b++) w[b] = bq.pop_front();
        sent.push_back(w);
      end
      run++;
      if (tx_word.kind == LK_END) begin
        bq.delete();
        runs.push_back(run);
        run = 0;
        ends++;
      end
    end else if (run != 0) begin
      runs.push_back(-run);   // a gap inside a packet
      run = 0;
    end
    credit_seen += int'(tx_word.credit);
  end

  // capture what is written into the receive buffer
  logic [63:0] rcvd [$];
  always @(posedge clk) if (rxf_wen) rcvd.push_back(rxf_wdata);

  function automatic logic [63:0] mkhdr(int len, int tag);
    header_t h;
    h = '0; h.len = LEN_W'(len); h.tag = 16'(tag); h.dst = '{z:1, y:2, x:3};
    return h;
  endfunction

  task automatic push_pkt(int len, int tag);
    tq[tt % 64] = mkhdr(len, tag); tt++;
    for (int i = 0; i < 2*len + 1; i++) begin tq[tt % 64] = {32'(tag), 32'(i) ^ 32'hA5A5_0F0F}; tt++; end
  endtask

  initial begin
    rx_word = '{kind: LK_IDLE, credit: '0, data: '0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // packet 1: LEN=1 -> 4 words = 256 bits = 7 chunks, fits in 8 credits
    @(negedge clk); push_pkt(1, 1);
    wait (ends == 1);
    @(negedge clk);
    check(sent.size() == 4, $sformatf("pkt1: 4 words (%0d)", sent.size()));
    for (int i = 0; i < 4 && i < sent.size(); i++)
      check(sent[i] == ((i == 0) ? mkhdr(1, 1) : {32'd1, 32'(i-1) ^ 32'hA5A5_0F0F}), $sformatf("pkt1 word %0d", i));
    check(runs.size() == 1 && runs[0] == 7, "pkt1 in 7 consecutive link words");

    // packet 2: LEN=2 -> 6 words, only 4 credits left -> must wait
    push_pkt(2, 2);
    repeat (20) @(negedge clk);
    check(sent.size() == 4, "pkt2 held back without credits");
    check(stall, "credit stall reported");
    rx_word.credit = 6'd1; @(negedge clk); rx_word.credit = 6'd0;
    repeat (10) @(negedge clk);
    check(sent.size() == 4, "pkt2 still held with 5 credits");
    rx_word.credit = 6'd1; @(negedge clk); rx_word.credit = 6'd0;
    wait (ends == 2);
    @(negedge clk);
    check(sent.size() == 10, "pkt2: 6 words");
    if (sent.size() == 10) begin
      check(sent[4] == mkhdr(2, 2), "pkt2 header");
      for (int i = 0; i < 5; i++) check(sent[5+i] == {32'd2, 32'(i) ^ 32'hA5A5_0F0F}, $sformatf("pkt2 word %0d", i+1));
    end
    check(runs.size() == 2 && runs[1] == 10, "pkt2: 384 bits in 10 consecutive link words");
    check(!stall, "no stall when idle");

    // receive direction: 3 words = 192 bits in 5 chunks, with idle gaps
    begin
      logic [191:0] bits;
      bits = {64'h3333_3333_CCCC_CCCC, 64'h2222_2222_DDDD_DDDD, 64'h1111_1111_EEEE_EEEE};
      for (int ch = 0; ch < 5; ch++) begin
        rx_word.kind = (ch == 4) ? LK_END : LK_DATA;
        rx_word.data = (ch == 4) ? {8'hFF, bits[191:160]} : bits[ch*40 +: 40];
        @(negedge clk);
        rx_word.kind = LK_IDLE; rx_word.data = '0;
        repeat (ch % 2) @(negedge clk);
      end
      // a second packet right after must start on a fresh chunk: 2 words
      bits = {64'h0, 64'h5555_6666_7777_8888, 64'h9999_AAAA_BBBB_0001};
      for (int ch = 0; ch < 4; ch++) begin
        rx_word.kind = (ch == 3) ? LK_END : LK_DATA;
        rx_word.data = bits[ch*40 +: 40];
        @(negedge clk);
      end
      rx_word.kind = LK_IDLE;
      @(negedge clk);
      check(rcvd.size() == 5, $sformatf("five words received (%0d)", rcvd.size()));
      if (rcvd.size() == 5) begin
        check(rcvd[0] == 64'h1111_1111_EEEE_EEEE && rcvd[1] == 64'h2222_2222_DDDD_DDDD &&
              rcvd[2] == 64'h3333_3333_CCCC_CCCC, "words of the first packet");
        check(rcvd[3] == 64'h9999_AAAA_BBBB_0001 && rcvd[4] == 64'h5555_6666_7777_8888,
              "words of the second packet (pad dropped)");
      end
    end

    // credit return: 5, then 2, then across the pointer wrap, then 100 at once
    begin
      int c_before;
      c_before = credit_seen;
      rxf_rptr = 8'd5;   repeat (4) @(negedge clk);
      rxf_rptr = 8'd7;   repeat (4) @(negedge clk);
      check(credit_seen - c_before == 7, $sformatf("7 credits returned (got %0d)", credit_seen - c_before));
      c_before = credit_seen;
      rxf_rptr = 8'd250; repeat (4) @(negedge clk);
      rxf_rptr = 8'd4;   repeat (4) @(negedge clk);
      check(credit_seen - c_before == 253, $sformatf("253 credits across the wrap (got %0d)", credit_seen - c_before));
      c_before = credit_seen;
      rxf_rptr = 8'd104; repeat (6) @(negedge clk);
      check(credit_seen - c_before == 100, $sformatf("100 credits in two link words (got %0d)", credit_seen - c_before));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
