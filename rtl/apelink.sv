// apelink: the network controller of an APELink card, one node of an APENet
// three-dimensional torus.
//
// Structure (after the paper's functional block diagram): three clock
// domains joined only by dual-clock FIFOs.
//   * PCI-X side (clk_pci): pci_port_ctrl decodes host register accesses and
//     fills the command queue and the local transmit buffer (8K x 64), and
//     empties the local receive buffer (8K x 64).
//   * Switch (clk_sw): local_port_ctrl turns commands into packets and
//     stores delivered packets; the crossbar_switch, steered by the router,
//     connects its seven ports (six channels + local) packet by packet,
//     cut-through; per channel a remote_port_ctrl frames the received words
//     and feeds the channel's transmit FIFO.
//   * Links (clk_link): per channel an io_port_ctrl moves 64-bit words over
//     the 48-bit serializer interface, with credit-based flow control
//     against the far receive buffer (2K x 64 per channel).
// The PCI-X core and the serializer/deserializer chips are outside: the top
// brings out their user-side signals (req_*/resp_* and link_tx/link_rx).
// Channel order of link_tx/link_rx: X+, X-, Y+, Y-, Z+, Z-.
// Buffer sizes follow the paper (Fig. 2); the per-channel transmit FIFO
// (TXQ_AW) and the command queue depth (CMDQ_AW) are this design's choice.
// The routing configuration is written in the PCI-X domain and used in the
// switch domain through a two-flop synchronizer; it is meant to be written
// while the network is idle.
module apelink
  import apenet_pkg::*;
#(
  parameter int unsigned LINK_AW  = 11,  // channel receive buffer 2K x 64
  parameter int unsigned LOCAL_AW = 13,  // local buffers 8K x 64
  parameter int unsigned CMDQ_AW  = 4,   // command queue 16 entries
  parameter int unsigned TXQ_AW   = 4    // channel transmit FIFO 16 x 64
) (
  input  logic               clk_pci,
  input  logic               rst_pci_n,
  input  logic               clk_sw,
  input  logic               rst_sw_n,
  input  logic               clk_link,
  input  logic               rst_link_n,
  // user side of the PCI-X core
  input  logic               req_valid,
  input  logic               req_write,
  input  logic [7:0]         req_addr,
  input  logic [WORD_W-1:0]  req_wdata,
  output logic               req_ready,
  output logic               resp_valid,
  output logic [WORD_W-1:0]  resp_rdata,
  // parallel side of the six serializers / deserializers
  output link_word_t         link_tx [NLINKS],
  input  link_word_t         link_rx [NLINKS],
  // activity, for monitoring
  output logic [NLINKS-1:0]  credit_stall,   // clk_link: packet waits for far room
  output logic [NLINKS-1:0]  link_pkt_start, // clk_link: packet starts on a link
  output logic [NPORTS-1:0]  xbar_blocked,   // clk_sw: input waits for a busy output
  output logic [NPORTS-1:0]  xbar_grant,     // clk_sw: input connected to an output
  output logic               pkt_sent,       // clk_sw: local packet injected
  output logic               pkt_rcvd        // clk_sw: packet delivered locally
);

  localparam int unsigned LVL_W = LOCAL_AW + 1;

  // ---------------- configuration crossing (quasi-static)
  route_cfg_t cfg_pci, cfg_s1, cfg_sw;
  logic [15:0] csum_err_sw, csum_err_p1, csum_err_pci;

  always_ff @(posedge clk_sw or negedge rst_sw_n) begin
    if (!rst_sw_n) begin
      cfg_s1 <= '0;
      cfg_sw <= '0;
    end else begin
      cfg_s1 <= cfg_pci;
      cfg_sw <= cfg_s1;
    end
  end

  always_ff @(posedge clk_pci or negedge rst_pci_n) begin
    if (!rst_pci_n) begin
      csum_err_p1  <= '0;
      csum_err_pci <= '0;
    end else begin
      csum_err_p1  <= csum_err_sw;
      csum_err_pci <= csum_err_p1;
    end
  end

  // ---------------- crossbar and router
  logic              xi_valid [NPORTS];
  flit_t             xi_flit  [NPORTS];
  logic              xi_ready [NPORTS];
  logic              xo_valid [NPORTS];
  flit_t             xo_flit  [NPORTS];
  logic              xo_ready [NPORTS];
  logic [WORD_W-1:0] r_hdr    [NPORTS];
  port_e             r_dest   [NPORTS];

  router #(.N(NPORTS)) u_router (
    .cfg  (cfg_sw),
    .hdr  (r_hdr),
    .dest (r_dest)
  );

  crossbar_switch #(.N(NPORTS)) u_xbar (
    .clk        (clk_sw),
    .rst_n      (rst_sw_n),
    .in_valid   (xi_valid),
    .in_flit    (xi_flit),
    .in_ready   (xi_ready),
    .out_valid  (xo_valid),
    .out_flit   (xo_flit),
    .out_ready  (xo_ready),
    .route_hdr  (r_hdr),
    .route_dest (r_dest),
    .blocked_o  (xbar_blocked),
    .grant_o    (xbar_grant)
  );

  // ---------------- six channels
  for (genvar c = 0; c < int'(NLINKS); c++) begin : g_ch
    logic [WORD_W-1:0] rx_wdata, rx_rdata, tx_wdata, tx_rdata;
    logic              rx_wen, rx_full, rx_ren, rx_empty;
    logic              tx_wen, tx_full, tx_ren, tx_empty;
    logic [LINK_AW:0]  rx_rptr, rx_wlevel, rx_rlevel;
    logic [TXQ_AW:0]   tx_wlevel, tx_rlevel, tx_rptr;

    io_port_ctrl #(.RX_AW(LINK_AW), .CREDIT_INIT(1 << LINK_AW)) u_io (
      .clk            (clk_link),
      .rst_n          (rst_link_n),
      .tx_word_o      (link_tx[c]),
      .rx_word_i      (link_rx[c]),
      .txf_rdata      (tx_rdata),
      .txf_empty      (tx_empty),
      .txf_ren        (tx_ren),
      .rxf_wdata      (rx_wdata),
      .rxf_wen        (rx_wen),
      .rxf_full       (rx_full),
      .rxf_rptr       (rx_rptr),
      .credit_stall_o (credit_stall[c]),
      .pkt_start_o    (link_pkt_start[c])
    );

    dc_fifo #(.DW(WORD_W), .AW(LINK_AW)) u_rxbuf (
      .wclk (clk_link), .wrst_n (rst_link_n), .wen (rx_wen), .wdata (rx_wdata),
      .wfull (rx_full), .wlevel (rx_wlevel), .wrptr (rx_rptr),
      .rclk (clk_sw), .rrst_n (rst_sw_n), .ren (rx_ren), .rdata (rx_rdata),
      .rempty (rx_empty), .rlevel (rx_rlevel)
    );

    dc_fifo #(.DW(WORD_W), .AW(TXQ_AW)) u_txq (
      .wclk (clk_sw), .wrst_n (rst_sw_n), .wen (tx_wen), .wdata (tx_wdata),
      .wfull (tx_full), .wlevel (tx_wlevel), .wrptr (tx_rptr),
      .rclk (clk_link), .rrst_n (rst_link_n), .ren (tx_ren), .rdata (tx_rdata),
      .rempty (tx_empty), .rlevel (tx_rlevel)
    );

    remote_port_ctrl u_rp (
      .clk       (clk_sw),
      .rst_n     (rst_sw_n),
      .rxf_rdata (rx_rdata),
      .rxf_empty (rx_empty),
      .rxf_ren   (rx_ren),
      .out_valid (xi_valid[c]),
      .out_flit  (xi_flit[c]),
      .out_ready (xi_ready[c]),
      .in_valid  (xo_valid[c]),
      .in_flit   (xo_flit[c]),
      .in_ready  (xo_ready[c]),
      .txf_wen   (tx_wen),
      .txf_wdata (tx_wdata),
      .txf_full  (tx_full)
    );
  end

  // ---------------- local port and host side
  logic [WORD_W-1:0] cmd_wdata, cmd_rdata, txd_wdata, txd_rdata, rxd_wdata, rxd_rdata;
  logic              cmd_wen, cmd_full, cmd_ren, cmd_empty;
  logic              txd_wen, txd_full, txd_ren, txd_empty;
  logic              rxd_wen, rxd_full, rxd_ren, rxd_empty;
  logic [CMDQ_AW:0]  cmd_wlevel, cmd_rlevel, cmd_rptr;
  logic [LOCAL_AW:0] txd_wlevel, txd_rlevel, txd_rptr, rxd_wlevel, rxd_rlevel, rxd_rptr;

  dc_fifo #(.DW(WORD_W), .AW(CMDQ_AW)) u_cmdq (
    .wclk (clk_pci), .wrst_n (rst_pci_n), .wen (cmd_wen), .wdata (cmd_wdata),
    .wfull (cmd_full), .wlevel (cmd_wlevel), .wrptr (cmd_rptr),
    .rclk (clk_sw), .rrst_n (rst_sw_n), .ren (cmd_ren), .rdata (cmd_rdata),
    .rempty (cmd_empty), .rlevel (cmd_rlevel)
  );

  dc_fifo #(.DW(WORD_W), .AW(LOCAL_AW)) u_txbuf (
    .wclk (clk_pci), .wrst_n (rst_pci_n), .wen (txd_wen), .wdata (txd_wdata),
    .wfull (txd_full), .wlevel (txd_wlevel), .wrptr (txd_rptr),
    .rclk (clk_sw), .rrst_n (rst_sw_n), .ren (txd_ren), .rdata (txd_rdata),
    .rempty (txd_empty), .rlevel (txd_rlevel)
  );

  dc_fifo #(.DW(WORD_W), .AW(LOCAL_AW)) u_rxbuf (
    .wclk (clk_sw), .wrst_n (rst_sw_n), .wen (rxd_wen), .wdata (rxd_wdata),
    .wfull (rxd_full), .wlevel (rxd_wlevel), .wrptr (rxd_rptr),
    .rclk (clk_pci), .rrst_n (rst_pci_n), .ren (rxd_ren), .rdata (rxd_rdata),
    .rempty (rxd_empty), .rlevel (rxd_rlevel)
  );

  local_port_ctrl u_lp (
    .clk        (clk_sw),
    .rst_n      (rst_sw_n),
    .me         (cfg_sw.me),
    .cmd_rdata  (cmd_rdata),
    .cmd_empty  (cmd_empty),
    .cmd_ren    (cmd_ren),
    .txd_rdata  (txd_rdata),
    .txd_empty  (txd_empty),
    .txd_ren    (txd_ren),
    .out_valid  (xi_valid[P_LOCAL]),
    .out_flit   (xi_flit[P_LOCAL]),
    .out_ready  (xi_ready[P_LOCAL]),
    .in_valid   (xo_valid[P_LOCAL]),
    .in_flit    (xo_flit[P_LOCAL]),
    .in_ready   (xo_ready[P_LOCAL]),
    .rxd_wen    (rxd_wen),
    .rxd_wdata  (rxd_wdata),
    .rxd_full   (rxd_full),
    .pkt_sent_o (pkt_sent),
    .pkt_rcvd_o (pkt_rcvd),
    .csum_err_o (csum_err_sw)
  );

  pci_port_ctrl #(.LVL_W(LVL_W)) u_pci (
    .clk        (clk_pci),
    .rst_n      (rst_pci_n),
    .req_valid  (req_valid),
    .req_write  (req_write),
    .req_addr   (req_addr),
    .req_wdata  (req_wdata),
    .req_ready  (req_ready),
    .resp_valid (resp_valid),
    .resp_rdata (resp_rdata),
    .cmd_wen    (cmd_wen),
    .cmd_wdata  (cmd_wdata),
    .cmd_full   (cmd_full),
    .cmd_level  (LVL_W'(cmd_wlevel)),
    .txd_wen    (txd_wen),
    .txd_wdata  (txd_wdata),
    .txd_full   (txd_full),
    .txd_level  (txd_wlevel),
    .rxd_ren    (rxd_ren),
    .rxd_rdata  (rxd_rdata),
    .rxd_empty  (rxd_empty),
    .rxd_level  (rxd_rlevel),
    .csum_err   (csum_err_pci),
    .cfg        (cfg_pci)
  );

endmodule
