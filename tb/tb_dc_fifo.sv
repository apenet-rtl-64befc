// tb_dc_fifo: self-checking test of the dual-clock FIFO.
// Writes and reads run on unrelated clocks (14 and 10 time units). The test fills
// the FIFO to check the full flag and depth, checks that a word written into
// an empty FIFO shows up on the read side within four read clocks, then
// streams 400 random words with random push/pop and compares every word with
// a reference queue. It also checks that the read pointer seen from the
// write side catches up with the reads.
module tb_dc_fifo;
  localparam int unsigned DW = 64;
  localparam int unsigned AW = 4;
  localparam int unsigned DEPTH = 1 << AW;

  logic          wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0;
  logic          wen = 0, ren = 0;
  logic [DW-1:0] wdata = '0, rdata;
  logic          wfull, rempty;
  logic [AW:0]   wlevel, rlevel, wrptr;

  int checks = 0, failures = 0;

  always #7 wclk = ~wclk;
  always #5   rclk = ~rclk;

  dc_fifo #(.DW(DW), .AW(AW)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  logic [DW-1:0] q[$];
  int n_rd = 0;

  initial begin
    repeat (3) @(posedge rclk);
    wrst_n = 1; rrst_n = 1;
    repeat (2) @(posedge wclk);
    check(!wfull && wlevel == 0, "empty after reset (write side)");
    check(rempty, "empty after reset (read side)");

    // fill to full
    for (int i = 0; i < int'(DEPTH); i++) begin
      @(negedge wclk); wen = 1; wdata = DW'(64'hA000 + i);
    end
    @(negedge wclk); wen = 0;
    check(wfull, "full after DEPTH writes");
    check(wlevel == (AW+1)'(DEPTH), "wlevel == DEPTH");
    // read all back in order
    repeat (4) @(posedge rclk);
    check(rlevel == (AW+1)'(DEPTH), "rlevel == DEPTH");
    for (int i = 0; i < int'(DEPTH); i++) begin
      @(negedge rclk);
      check(!rempty && rdata == DW'(64'hA000 + i), $sformatf("fill order word %0d", i));
      ren = 1;
      @(negedge rclk); ren = 0;
    end
    @(negedge rclk);
    check(rempty, "empty after draining");
    repeat (4) @(posedge wclk);
    check(wrptr == (AW+1)'(DEPTH), "write-side read pointer caught up");
    check(!wfull && wlevel == 0, "write side sees empty");

    // latency through an empty FIFO
    begin
      int lat;
      @(negedge wclk); wen = 1; wdata = 64'h1234_5678_9abc_def0;
      @(posedge wclk); #1 wen = 0;
      lat = 0;
      while (rempty && lat < 20) begin @(posedge rclk); #1 lat++; end
      check(lat >= 1 && lat <= 4, $sformatf("empty-FIFO latency %0d rclk", lat));
      check(rdata == 64'h1234_5678_9abc_def0, "latency word");
      @(negedge rclk); ren = 1; @(negedge rclk); ren = 0;
    end

    // random traffic
    fork
      begin
        for (int i = 0; i < 400; i++) begin
          @(negedge wclk);
          while (($urandom % 3 == 0) || wfull) begin wen = 0; @(negedge wclk); end
          wen = 1; wdata = {$urandom, $urandom};
          q.push_back(wdata);
          @(posedge wclk); #1 wen = 0;
        end
      end
      begin
        while (n_rd < 400) begin
          @(negedge rclk);
          if (!rempty && ($urandom % 4 != 0)) begin
            logic [DW-1:0] exp;
            exp = q.pop_front();
            check(rdata == exp, $sformatf("random word %0d", n_rd));
            ren = 1; n_rd++;
          end else ren = 0;
        end
        @(negedge rclk); ren = 0;
      end
    join
    repeat (5) @(posedge rclk);
    check(rempty && q.size() == 0, "all random words read");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
