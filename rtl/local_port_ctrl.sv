// local_port_ctrl: the crossbar's local port, between the switch and the
// host-side buffers (switch clock).
//
// Transmit: the host leaves a command word in the command queue and the
// payload in the local transmit buffer (8K x 64). For each command the
// controller sends a packet into the crossbar: the header (the command word
// with this node's coordinates filled in as source), the 2*LEN payload words
// read from the transmit buffer as they become available, and a footer
// holding the XOR of all payload words.
// Receive: packets the crossbar delivers to this node are written whole
// (header, payload, footer) into the local receive buffer (8K x 64) for the
// host to read. On the way the controller recomputes the XOR of the payload
// and compares it with the footer; a mismatch is counted in csum_err_o.
// The paper names this block and its buffers (Fig. 2, "Fifo 8K*64b",
// "Command queue"); the command format, the checksum footer and the rest of
// its workings are this design's choices. One word per clock each way.
module local_port_ctrl
  import apenet_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  coord_t             me,
  // command queue, read side (show-ahead)
  input  logic [WORD_W-1:0]  cmd_rdata,
  input  logic               cmd_empty,
  output logic               cmd_ren,
  // local transmit buffer, read side (show-ahead)
  input  logic [WORD_W-1:0]  txd_rdata,
  input  logic               txd_empty,
  output logic               txd_ren,
  // to the crossbar (local input port)
  output logic               out_valid,
  output flit_t              out_flit,
  input  logic               out_ready,
  // from the crossbar (local output port)
  input  logic               in_valid,
  input  flit_t              in_flit,
  output logic               in_ready,
  // local receive buffer, write side
  output logic               rxd_wen,
  output logic [WORD_W-1:0]  rxd_wdata,
  input  logic               rxd_full,
  // status
  output logic               pkt_sent_o,     // pulse: footer of a sent packet
  output logic               pkt_rcvd_o,     // pulse: footer of a received packet
  output logic [15:0]        csum_err_o      // received packets with a bad footer
);

  typedef enum logic [1:0] {TX_HEAD, TX_DATA, TX_FOOT} tx_state_e;

  localparam int unsigned CW = LEN_W + 1;   // holds 2*LEN

  tx_state_e          tx_st;
  logic [CW-1:0]      tx_left;
  logic [WORD_W-1:0]  tx_sum;
  header_t            cmd, hdr;

  assign cmd = header_t'(cmd_rdata);
  always_comb begin
    hdr     = cmd;
    hdr.src = me;
  end

  always_comb begin
    out_valid     = 1'b0;
    out_flit.sop  = 1'b0;
    out_flit.eop  = 1'b0;
    out_flit.data = '0;
    cmd_ren       = 1'b0;
    txd_ren       = 1'b0;
    unique case (tx_st)
      TX_HEAD: begin
        out_valid     = !cmd_empty;
        out_flit.sop  = 1'b1;
        out_flit.data = hdr;
        cmd_ren       = !cmd_empty && out_ready;
      end
      TX_DATA: begin
        out_valid     = !txd_empty;
        out_flit.data = txd_rdata;
        txd_ren       = !txd_empty && out_ready;
      end
      TX_FOOT: begin
        out_valid     = 1'b1;
        out_flit.eop  = 1'b1;
        out_flit.data = tx_sum;
      end
      default: ;
    endcase
  end

  assign pkt_sent_o = (tx_st == TX_FOOT) && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_st   <= TX_HEAD;
      tx_left <= '0;
      tx_sum  <= '0;
    end else begin
      unique case (tx_st)
        TX_HEAD: if (cmd_ren) begin
          tx_left <= CW'(cmd.len) << 1;
          tx_sum  <= '0;
          tx_st   <= (cmd.len == '0) ? TX_FOOT : TX_DATA;
        end
        TX_DATA: if (txd_ren) begin
          tx_sum  <= tx_sum ^ txd_rdata;
          tx_left <= tx_left - 1'b1;
          if (tx_left == CW'(1)) tx_st <= TX_FOOT;
        end
        TX_FOOT: if (out_ready) tx_st <= TX_HEAD;
        default: tx_st <= TX_HEAD;
      endcase
    end
  end

  // ---------------- receive
  logic              rx_in_pkt;
  logic [WORD_W-1:0] rx_sum;
  logic              rx_xfer;

  assign in_ready  = !rxd_full;
  assign rx_xfer   = in_valid && !rxd_full;
  assign rxd_wen   = rx_xfer;
  assign rxd_wdata = in_flit.data;
  assign pkt_rcvd_o = rx_xfer && in_flit.eop;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_in_pkt  <= 1'b0;
      rx_sum     <= '0;
      csum_err_o <= '0;
    end else if (rx_xfer) begin
      if (in_flit.sop) begin
        rx_in_pkt <= 1'b1;
        rx_sum    <= '0;
      end else if (in_flit.eop) begin
        rx_in_pkt <= 1'b0;
        if (in_flit.data != rx_sum) csum_err_o <= csum_err_o + 1'b1;
      end else begin
        rx_sum <= rx_sum ^ in_flit.data;
      end
    end
  end

  a_framing: assert property (@(posedge clk) disable iff (!rst_n)
                              (in_valid && in_flit.sop) |-> !rx_in_pkt)
    else $error("local_port_ctrl: header inside a packet");

endmodule
