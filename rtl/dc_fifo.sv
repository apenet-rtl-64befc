// dc_fifo: dual-clock first-in first-out buffer.
//
// Every transfer between the three clock domains of the card (PCI-X side,
// crossbar switch, links) goes through one of these, as the paper states;
// the channel receive buffers (2K x 64), the two local buffers (8K x 64) and
// the command queue are all instances. How the FIFO works inside is this
// design's choice: a classic Gray-coded pointer FIFO. Each side keeps a
// binary pointer one bit wider than the address, converts it to Gray code
// and passes it through a two-flop synchronizer to the other side.
//
// Interface: write side (wclk) pushes wdata when wen; wfull must be
// respected. Read side (rclk) is show-ahead: rdata is the oldest entry
// whenever rempty is low, and ren pops it. wlevel/rlevel are the occupancy
// as seen from each side (conservative, because the other side's pointer
// arrives two to three cycles late). wrptr is the read pointer as seen on
// the write side, used by a link to return receive-buffer credits.
// Timing: a word written at a wclk edge becomes visible at the read side
// after the Gray pointer has crossed the synchronizer, 2-3 rclk edges later.
module dc_fifo #(
  parameter int unsigned DW = 64,
  parameter int unsigned AW = 4    // depth = 2**AW
) (
  input  logic          wclk,
  input  logic          wrst_n,
  input  logic          wen,
  input  logic [DW-1:0] wdata,
  output logic          wfull,
  output logic [AW:0]   wlevel,
  output logic [AW:0]   wrptr,

  input  logic          rclk,
  input  logic          rrst_n,
  input  logic          ren,
  output logic [DW-1:0] rdata,
  output logic          rempty,
  output logic [AW:0]   rlevel
);

  localparam int unsigned DEPTH = 1 << AW;

  logic [DW-1:0] mem [DEPTH];

  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2;   // read pointer synchronized to wclk
  logic [AW:0] wgray_r1, wgray_r2;   // write pointer synchronized to rclk
  logic [AW:0] rbin_w, wbin_r;

  function automatic logic [AW:0] bin2gray(logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [AW:0] gray2bin(logic [AW:0] g);
    logic [AW:0] b;
    b[AW] = g[AW];
    for (int i = int'(AW) - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // ---------------- write side
  logic do_wr;
  assign do_wr = wen && !wfull;

  always_ff @(posedge wclk) begin
    if (do_wr) mem[wbin[AW-1:0]] <= wdata;
  end

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin     <= '0;
      wgray    <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
    end else begin
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
      if (do_wr) begin
        wbin  <= wbin + 1'b1;
        wgray <= bin2gray(wbin + 1'b1);
      end
    end
  end

  assign rbin_w = gray2bin(rgray_w2);
  assign wlevel = wbin - rbin_w;
  assign wfull  = (wlevel == (AW+1)'(DEPTH));
  assign wrptr  = rbin_w;

  // ---------------- read side
  logic do_rd;
  assign do_rd = ren && !rempty;

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin     <= '0;
      rgray    <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      if (do_rd) begin
        rbin  <= rbin + 1'b1;
        rgray <= bin2gray(rbin + 1'b1);
      end
    end
  end

  assign wbin_r = gray2bin(wgray_r2);
  assign rlevel = wbin_r - rbin;
  assign rempty = (rlevel == '0);
  assign rdata  = mem[rbin[AW-1:0]];

  // A push into a full FIFO or a pop from an empty one is a protocol error
  // of the user, which the FIFO ignores.
  a_no_overflow: assert property (@(posedge wclk) disable iff (!wrst_n) wen |-> !wfull)
    else $error("dc_fifo: write while full");
  a_no_underflow: assert property (@(posedge rclk) disable iff (!rrst_n) ren |-> !rempty)
    else $error("dc_fifo: read while empty");

endmodule
