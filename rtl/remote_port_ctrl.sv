// remote_port_ctrl: switch-side controller of one APELink channel (switch
// clock).
//
// Receive direction: reads 64-bit words from the channel receive buffer and
// presents them to the crossbar as a framed stream. The buffer holds bare
// words, so the controller recovers packet boundaries itself: the first
// word after reset and the word after each footer is a header, whose length
// field gives the packet size 2+2*LEN words; it marks that header sop and
// the last word eop. Words pass without a cycle of delay, which keeps the
// cut-through path short.
// Transmit direction: writes the words the crossbar sends to this channel
// into the channel transmit FIFO, and holds the crossbar off (in_ready low)
// while that FIFO is full. The framing is dropped there, since the link
// controller re-reads the packet length from the header.
// The paper names this block (Fig. 2) without describing it; the split of
// work between it and the link controller is this design's choice.
module remote_port_ctrl
  import apenet_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  // receive buffer, read side (show-ahead)
  input  logic [WORD_W-1:0]  rxf_rdata,
  input  logic               rxf_empty,
  output logic               rxf_ren,
  // to the crossbar (this channel's input port)
  output logic               out_valid,
  output flit_t              out_flit,
  input  logic               out_ready,
  // from the crossbar (this channel's output port)
  input  logic               in_valid,
  input  flit_t              in_flit,
  output logic               in_ready,
  // transmit FIFO, write side
  output logic               txf_wen,
  output logic [WORD_W-1:0]  txf_wdata,
  input  logic               txf_full
);

  localparam int unsigned CW = LEN_W + 2;   // holds 2+2*LEN

  logic [CW-1:0] left;     // words of the current packet still to come; 0 = header next
  header_t       head;
  logic          xfer;

  assign head      = header_t'(rxf_rdata);
  assign out_valid = !rxf_empty;
  assign xfer      = out_valid && out_ready;
  assign rxf_ren   = xfer;

  always_comb begin
    out_flit.data = rxf_rdata;
    out_flit.sop  = (left == '0);
    out_flit.eop  = (left == CW'(1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) left <= '0;
    else if (xfer) begin
      if (left == '0) left <= CW'(1) + (CW'(head.len) << 1);  // words after the header
      else            left <= left - 1'b1;
    end
  end

  assign in_ready  = !txf_full;
  assign txf_wen   = in_valid && !txf_full;
  assign txf_wdata = in_flit.data;

endmodule
