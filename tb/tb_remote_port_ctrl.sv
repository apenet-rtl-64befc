// tb_remote_port_ctrl: self-checking test of the switch-side channel
// controller. A model of the receive buffer holds three back-to-back packets
// of different lengths as bare words; the test takes them out with random
// back-pressure and checks that every word arrives in order, that exactly
// the headers carry sop and exactly the footers carry eop. On the transmit
// side it checks that words from the crossbar reach the transmit FIFO and
// that a full FIFO holds the crossbar off.
module tb_remote_port_ctrl;
  import apenet_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [63:0] rxf_rdata;
  logic        rxf_empty, rxf_ren;
  logic        out_valid, out_ready = 0;
  flit_t       out_flit;
  logic        in_valid = 0, in_ready;
  flit_t       in_flit = '0;
  logic        txf_wen, txf_full = 0;
  logic [63:0] txf_wdata;

  remote_port_ctrl dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [63:0] q [64];
  bit          exp_sop [64], exp_eop [64];
  int qh = 0, qt = 0;
  assign rxf_empty = (qh == qt);
  assign rxf_rdata = q[qh % 64];
  always @(posedge clk) if (rxf_ren) qh <= qh + 1;

  task automatic push_pkt(int len);
    header_t h;
    h = '0; h.len = LEN_W'(len); h.tag = 16'(len);
    for (int i = 0; i < 2 + 2*len; i++) begin
      q[qt % 64]       = (i == 0) ? 64'(h) : {32'(len), 32'(i)};
      exp_sop[qt % 64] = (i == 0);
      exp_eop[qt % 64] = (i == 1 + 2*len);
      qt++;
    end
  endtask

  int n_out = 0;
  always @(posedge clk) begin
    if (out_valid && out_ready) begin
      check(out_flit.data == q[n_out % 64], $sformatf("word %0d data", n_out));
      check(out_flit.sop == exp_sop[n_out % 64], $sformatf("word %0d sop", n_out));
      check(out_flit.eop == exp_eop[n_out % 64], $sformatf("word %0d eop", n_out));
      n_out <= n_out + 1;
    end
  end

  logic [63:0] txw [$];
  always @(posedge clk) if (txf_wen) txw.push_back(txf_wdata);

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    push_pkt(1); push_pkt(3); push_pkt(2);   // 4 + 8 + 6 = 18 words
    while (n_out < 18) begin
      out_ready = ($urandom % 3 != 0);
      @(negedge clk);
    end
    out_ready = 0;
    check(n_out == 18, "all 18 words forwarded");

    // transmit side
    in_valid = 1; in_flit.data = 64'hCAFE_0001;
    @(negedge clk);
    check(in_ready && txw.size() == 1 && txw[0] == 64'hCAFE_0001, "word written to transmit FIFO");
    txf_full = 1; in_flit.data = 64'hCAFE_0002;
    @(negedge clk);
    check(!in_ready && txw.size() == 1, "full transmit FIFO holds the crossbar off");
    txf_full = 0;
    @(negedge clk);
    in_valid = 0;
    check(txw.size() == 2 && txw[1] == 64'hCAFE_0002, "second word written after full clears");

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
