// pci_port_ctrl: host register interface of the card (PCI-X clock).
//
// The PCI-X core turns bus transactions into single 64-bit register
// accesses (req_*). This block decodes them:
//   0x00 CMD     write: push a command word into the command queue
//   0x08 TXDATA  write: push a payload word into the local transmit buffer
//   0x10 RXDATA  read:  pop a word from the local receive buffer
//   0x18 STATUS  read:  [15:0] receive-buffer words, [31:16] transmit-buffer
//                       words, [47:32] command-queue entries, [63:48]
//                       received packets with a bad checksum
//   0x20 CONFIG  read/write: routing configuration (route_cfg_t, bits 29:0)
// An access to a buffer that is full (write) or empty (read) is held off
// with req_ready low until it can complete, as a PCI-X target retries.
// Read data comes back one clock after the access is accepted (resp_valid).
// The paper names a "PCI Port Ctrl" and a command queue beside the PCI-X
// core (Fig. 2) but not their workings; the register map and the handshake
// are this design's choices.
module pci_port_ctrl
  import apenet_pkg::*;
#(
  parameter int unsigned LVL_W = 14   // width of the level inputs
) (
  input  logic               clk,
  input  logic               rst_n,
  // from the PCI-X core
  input  logic               req_valid,
  input  logic               req_write,
  input  logic [7:0]         req_addr,
  input  logic [WORD_W-1:0]  req_wdata,
  output logic               req_ready,
  output logic               resp_valid,
  output logic [WORD_W-1:0]  resp_rdata,
  // command queue, write side
  output logic               cmd_wen,
  output logic [WORD_W-1:0]  cmd_wdata,
  input  logic               cmd_full,
  input  logic [LVL_W-1:0]   cmd_level,
  // local transmit buffer, write side
  output logic               txd_wen,
  output logic [WORD_W-1:0]  txd_wdata,
  input  logic               txd_full,
  input  logic [LVL_W-1:0]   txd_level,
  // local receive buffer, read side (show-ahead)
  output logic               rxd_ren,
  input  logic [WORD_W-1:0]  rxd_rdata,
  input  logic               rxd_empty,
  input  logic [LVL_W-1:0]   rxd_level,
  // status and configuration
  input  logic [15:0]        csum_err,
  output route_cfg_t         cfg
);

  localparam logic [7:0] A_CMD = 8'h00, A_TXDATA = 8'h08, A_RXDATA = 8'h10,
                         A_STATUS = 8'h18, A_CONFIG = 8'h20;

  logic acc;

  always_comb begin
    unique case (req_addr)
      A_CMD:    req_ready = !req_write || !cmd_full;
      A_TXDATA: req_ready = !req_write || !txd_full;
      A_RXDATA: req_ready =  req_write || !rxd_empty;
      default:  req_ready = 1'b1;
    endcase
  end

  assign acc       = req_valid && req_ready;
  assign cmd_wen   = acc && req_write && (req_addr == A_CMD);
  assign cmd_wdata = req_wdata;
  assign txd_wen   = acc && req_write && (req_addr == A_TXDATA);
  assign txd_wdata = req_wdata;
  assign rxd_ren   = acc && !req_write && (req_addr == A_RXDATA);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg        <= '0;
      resp_valid <= 1'b0;
      resp_rdata <= '0;
    end else begin
      resp_valid <= acc && !req_write;
      if (acc && req_write && req_addr == A_CONFIG) cfg <= route_cfg_t'(req_wdata[$bits(route_cfg_t)-1:0]);
      if (acc && !req_write) begin
        unique case (req_addr)
          A_RXDATA: resp_rdata <= rxd_rdata;
          A_STATUS: resp_rdata <= {csum_err, 16'(cmd_level), 16'(txd_level), 16'(rxd_level)};
          A_CONFIG: resp_rdata <= WORD_W'(cfg);
          default:  resp_rdata <= '0;
        endcase
      end
    end
  end

endmodule
