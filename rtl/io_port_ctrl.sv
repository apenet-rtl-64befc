// io_port_ctrl: link-side controller of one APELink channel (link clock).
//
// Transmit: takes packets from the channel's transmit FIFO and sends them to
// the serializer. The 64-bit words of a packet form one bit stream that is
// cut into 40-bit chunks, one chunk per 48-bit link word (a gearbox: five
// words make eight chunks). The last chunk of a packet is sent as LK_END and
// padded, so the next packet starts on a fresh chunk. A packet is started
// only when the receiver at the far end has room for all of it in its
// receive buffer, as the paper requires ("packet delivery is always
// guaranteed: transmission is delayed until the receiver has enough room").
// Room is tracked with credits counted in 64-bit words: the counter starts
// at the far receive buffer's depth, drops by the packet's size 2+2*LEN
// when the packet starts, and grows by the credit field of every link word
// that arrives from the far end.
// Receive: the reverse gearbox collects chunks and writes each completed
// 64-bit word into the channel receive buffer; the pad after an LK_END
// chunk is dropped. Credits go back to the far end in the credit field of
// every link word sent: the receive-buffer words the crossbar has read since
// the last report (at most 63 per link word, the rest later).
// Timing: tx_word_o is registered. While a packet streams, every link clock
// carries 40 bits, i.e. 5 bytes per clock (667 MB/s at 133 MHz; the paper
// quotes a 676 MB/s peak). A received word is written to the buffer in the
// clock its last chunk arrives.
// The chunk format is this design's choice; the paper gives only the 48-bit
// 133 MHz serializer interface and the guaranteed-delivery rule.
module io_port_ctrl
  import apenet_pkg::*;
#(
  parameter int unsigned RX_AW       = 11,          // own receive buffer: 2**RX_AW words
  parameter int unsigned CREDIT_INIT = 1 << RX_AW   // far receive buffer depth
) (
  input  logic               clk,
  input  logic               rst_n,
  // serializer / deserializer
  output link_word_t         tx_word_o,
  input  link_word_t         rx_word_i,
  // transmit FIFO, read side (show-ahead)
  input  logic [WORD_W-1:0]  txf_rdata,
  input  logic               txf_empty,
  output logic               txf_ren,
  // receive buffer, write side
  output logic [WORD_W-1:0]  rxf_wdata,
  output logic               rxf_wen,
  input  logic               rxf_full,
  input  logic [RX_AW:0]     rxf_rptr,     // read pointer seen from this clock
  // status
  output logic               credit_stall_o,  // a packet waits for room
  output logic               pkt_start_o      // a packet starts on the link
);

  localparam int unsigned CW  = 13;                 // credit counter, 0..4096
  localparam int unsigned AW  = WORD_W + CHUNK_W;   // gearbox accumulator bits
  localparam int unsigned NW  = 7;                  // bit count, 0..AW
  localparam int unsigned PW  = RX_AW + 2;          // pending credit return

  if ($bits(link_word_t) != LINK_W) begin : g_bad_link_word
    $error("io_port_ctrl: link word is not %0d bits", LINK_W);
  end
  if (CREDIT_INIT > 4096 || CREDIT_INIT < 2) begin : g_bad_credit_init
    $error("io_port_ctrl: CREDIT_INIT out of range");
  end

  // ---------------- transmit
  logic [CW-1:0]  credit;
  logic [CW-1:0]  need;
  logic [CW-1:0]  words_left;   // words of the current packet not yet loaded
  logic           in_pkt;
  logic [AW-1:0]  acc, acc_n;
  logic [NW-1:0]  cnt, cnt_n;
  logic           load, all_loaded, start;
  header_t        head;

  assign head  = header_t'(txf_rdata);
  assign need  = CW'(2) + (CW'(head.len) << 1);
  assign start = !in_pkt && !txf_empty && (credit >= need);
  assign credit_stall_o = !in_pkt && !txf_empty && (credit < need);
  assign pkt_start_o    = start;

  // Load a word when fewer than one chunk's worth of bits is waiting.
  assign load    = in_pkt && (words_left != '0) && !txf_empty && (cnt < NW'(CHUNK_W));
  assign txf_ren = load;
  assign acc_n   = load ? (acc | (AW'(txf_rdata) << cnt)) : acc;
  assign cnt_n   = load ? (cnt + NW'(WORD_W)) : cnt;
  assign all_loaded = (words_left - CW'(load)) == '0;

  // credit return
  logic [RX_AW:0]      last_rptr;
  logic [RX_AW:0]      rptr_delta;    // modulo the pointer width, before widening
  logic [PW-1:0]       pend, pend_n;
  logic [CREDIT_W-1:0] credit_ret;

  assign rptr_delta = rxf_rptr - last_rptr;
  assign pend_n     = pend + PW'(rptr_delta);
  assign credit_ret = (pend_n > PW'((1 << CREDIT_W) - 1)) ? CREDIT_W'((1 << CREDIT_W) - 1)
                                                          : CREDIT_W'(pend_n);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      credit     <= CW'(CREDIT_INIT);
      words_left <= '0;
      in_pkt     <= 1'b0;
      acc        <= '0;
      cnt        <= '0;
      last_rptr  <= '0;
      pend       <= '0;
      tx_word_o  <= '{kind: LK_IDLE, credit: '0, data: '0};
    end else begin
      last_rptr <= rxf_rptr;
      pend      <= pend_n - PW'(credit_ret);
      // credits: returned by the far end, spent when a packet starts
      credit <= credit + CW'(rx_word_i.credit) - (start ? need : CW'(0));

      tx_word_o.kind   <= LK_IDLE;
      tx_word_o.credit <= credit_ret;
      tx_word_o.data   <= '0;
      if (start) begin
        in_pkt     <= 1'b1;
        words_left <= need;
      end else if (in_pkt) begin
        if (load) words_left <= words_left - 1'b1;
        if (cnt_n >= NW'(CHUNK_W)) begin
          // a full chunk; it ends the packet if nothing is left after it
          tx_word_o.kind <= (all_loaded && cnt_n == NW'(CHUNK_W)) ? LK_END : LK_DATA;
          tx_word_o.data <= acc_n[CHUNK_W-1:0];
          acc            <= acc_n >> CHUNK_W;
          cnt            <= cnt_n - NW'(CHUNK_W);
          if (all_loaded && cnt_n == NW'(CHUNK_W)) in_pkt <= 1'b0;
        end else if (all_loaded && cnt_n != '0) begin
          // the packet's tail, padded to a chunk
          tx_word_o.kind <= LK_END;
          tx_word_o.data <= acc_n[CHUNK_W-1:0];
          acc            <= '0;
          cnt            <= '0;
          in_pkt         <= 1'b0;
        end else begin
          acc <= acc_n;
          cnt <= cnt_n;
        end
      end
    end
  end

  // ---------------- receive
  logic [AW-1:0] racc, racc_n;
  logic [NW-1:0] rcnt, rcnt_n;
  logic          rx_has;

  assign rx_has  = (rx_word_i.kind == LK_DATA) || (rx_word_i.kind == LK_END);
  assign racc_n  = rx_has ? (racc | (AW'(rx_word_i.data) << rcnt)) : racc;
  assign rcnt_n  = rx_has ? (rcnt + NW'(CHUNK_W)) : rcnt;
  assign rxf_wen   = (rcnt_n >= NW'(WORD_W));
  assign rxf_wdata = racc_n[WORD_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      racc <= '0;
      rcnt <= '0;
    end else if (rx_word_i.kind == LK_END) begin
      racc <= '0;                        // drop the pad
      rcnt <= '0;
    end else if (rxf_wen) begin
      racc <= racc_n >> WORD_W;
      rcnt <= rcnt_n - NW'(WORD_W);
    end else begin
      racc <= racc_n;
      rcnt <= rcnt_n;
    end
  end

  // Credits make an overflow of the receive buffer impossible.
  a_rx_room: assert property (@(posedge clk) disable iff (!rst_n) rxf_wen |-> !rxf_full)
    else $error("io_port_ctrl: receive buffer overflow");
  a_credit_range: assert property (@(posedge clk) disable iff (!rst_n) credit <= CW'(CREDIT_INIT))
    else $error("io_port_ctrl: more credits than buffer words");
  // After an end chunk no whole word may be left behind.
  a_end_clean: assert property (@(posedge clk) disable iff (!rst_n)
                                (rx_word_i.kind == LK_END) |-> (rcnt_n - (rxf_wen ? NW'(WORD_W) : '0)) < NW'(CHUNK_W))
    else $error("io_port_ctrl: packet end inside a word");

endmodule
