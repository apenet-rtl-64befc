// tb_pci_port_ctrl: self-checking test of the host register interface.
// Checked: writes to CMD and TXDATA reach the command queue and transmit
// buffer; a write to a full queue is held off until it has room; a read of
// RXDATA pops the receive buffer and returns its word one clock later; a
// read of an empty buffer is held off; STATUS packs the levels and the
// checksum-error count; CONFIG is written, read back and drives cfg.
module tb_pci_port_ctrl;
  import apenet_pkg::*;

  localparam int unsigned LVL_W = 14;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             req_valid = 0, req_write = 0, req_ready, resp_valid;
  logic [7:0]       req_addr = '0;
  logic [63:0]      req_wdata = '0, resp_rdata;
  logic             cmd_wen, txd_wen, rxd_ren;
  logic [63:0]      cmd_wdata, txd_wdata;
  logic [63:0]      rxd_rdata = 64'h5151_0000_0000_0001;
  logic             cmd_full = 0, txd_full = 0, rxd_empty = 1;
  logic [LVL_W-1:0] cmd_level = 14'd3, txd_level = 14'd1234, rxd_level = 14'd77;
  logic [15:0]      csum_err = 16'd5;
  route_cfg_t       cfg;

  pci_port_ctrl #(.LVL_W(LVL_W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int n_cmd = 0, n_txd = 0, n_rxd = 0;
  logic [63:0] last_cmd, last_txd;
  always @(posedge clk) begin
    if (cmd_wen) begin n_cmd <= n_cmd + 1; last_cmd <= cmd_wdata; end
    if (txd_wen) begin n_txd <= n_txd + 1; last_txd <= txd_wdata; end
    if (rxd_ren) n_rxd <= n_rxd + 1;
  end

  // one access; returns the number of cycles it was held off
  task automatic access(input bit wr, input logic [7:0] a, input logic [63:0] d,
                        output logic [63:0] rd, output int waited);
    waited = 0;
    req_valid = 1; req_write = wr; req_addr = a; req_wdata = d;
    // inputs change only at falling edges: sample ready once settled
    #1;
    while (!req_ready) begin @(negedge clk); #1; waited++; end
    @(negedge clk);
    req_valid = 0;
    rd = resp_rdata;
    if (!wr) check(resp_valid, "read response valid one clock later");
  endtask

  logic [63:0] rd;
  int w;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    access(1, 8'h00, 64'hC0DE_0000_0000_0002, rd, w);
    check(n_cmd == 1 && last_cmd == 64'hC0DE_0000_0000_0002, "CMD write");
    access(1, 8'h08, 64'hDA7A_0000_0000_0001, rd, w);
    check(n_txd == 1 && last_txd == 64'hDA7A_0000_0000_0001, "TXDATA write");
    check(n_cmd == 1, "TXDATA does not touch the command queue");

    // full transmit buffer
    txd_full = 1;
    fork
      begin repeat (5) @(negedge clk); txd_full = 0; end
      access(1, 8'h08, 64'hDA7A_0000_0000_0002, rd, w);
    join
    check(w >= 4, $sformatf("write held off while full (%0d cycles)", w));
    check(n_txd == 2 && last_txd == 64'hDA7A_0000_0000_0002, $sformatf("held write completes (%0d %h)", n_txd, last_txd));

    // empty receive buffer, then a word
    fork
      begin repeat (3) @(negedge clk); rxd_empty = 0; end
      access(0, 8'h10, '0, rd, w);
    join
    check(w >= 2, "read of empty buffer held off");
    check(rd == 64'h5151_0000_0000_0001 && n_rxd == 1, $sformatf("RXDATA read pops the word (%h %0d)", rd, n_rxd));

    access(0, 8'h18, '0, rd, w);
    check(rd == {16'd5, 16'd3, 16'd1234, 16'd77}, $sformatf("STATUS %h", rd));

    access(1, 8'h20, {34'd0, 3'b101, 3'b011, 4'd1, 4'd2, 4'd4, 4'd0, 4'd1, 4'd3}, rd, w);
    check(cfg.me == '{z: 4'd0, y: 4'd1, x: 4'd3}, "CONFIG me");
    check(cfg.size == '{z: 4'd1, y: 4'd2, x: 4'd4}, "CONFIG size");
    check(cfg.ovr_en == 3'b011 && cfg.ovr_dir == 3'b101, "CONFIG override");
    access(0, 8'h20, '0, rd, w);
    check(rd == 64'(cfg), "CONFIG read back");
    check(n_cmd == 1 && n_txd == 2 && n_rxd == 1, "no stray pushes or pops");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
