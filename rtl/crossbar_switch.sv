// crossbar_switch: cut-through packet switch between the six link channels
// and the local (PCI-X side) port.
//
// Each input port waits for a header (sop), latches the output port the
// router names for it and requests that output. Each free output grants one
// requesting input, round-robin, and is then connected to it until the
// packet's footer (eop) has passed. Words flow through the connection as
// they arrive, with valid/ready back-pressure, so a packet leaves on its way
// out while its tail is still coming in (cut-through): the paper's "within
// 10 clock cycles from the arrival of the header, the receiving channel
// starts forwarding the packet". Here the header leaves the crossbar two
// cycles after it reaches the input (one to latch the route, one to grant).
// The paper gives the block's function only; the per-output round-robin
// arbiter and the two-cycle route/grant pipeline are this design's choices.
// Ports are numbered as port_e: 0..5 = X+,X-,Y+,Y-,Z+,Z-, 6 = local.
module crossbar_switch
  import apenet_pkg::*;
#(
  parameter int unsigned N = NPORTS
) (
  input  logic               clk,
  input  logic               rst_n,
  // inputs
  input  logic               in_valid  [N],
  input  flit_t              in_flit   [N],
  output logic               in_ready  [N],
  // outputs
  output logic               out_valid [N],
  output flit_t              out_flit  [N],
  input  logic               out_ready [N],
  // router
  output logic [WORD_W-1:0]  route_hdr [N],
  input  port_e              route_dest[N],
  // status, one bit per input
  output logic [N-1:0]       blocked_o,   // requesting, output held by another packet
  output logic [N-1:0]       grant_o      // connection made this cycle
);

  localparam int unsigned IW = $clog2(N);

  typedef enum logic [1:0] {IN_IDLE, IN_REQ, IN_FWD} in_state_e;

  in_state_e         st     [N];
  logic [IW-1:0]     req    [N];   // output requested / connected
  logic              busy   [N];   // per output
  logic [IW-1:0]     owner  [N];   // per output: connected input
  logic [IW-1:0]     rr     [N];   // per output: round-robin start
  logic [N-1:0]      gnt    [N];   // gnt[o][i]
  logic              done   [N];   // per output: footer passes this cycle

  always_comb begin
    for (int i = 0; i < int'(N); i++) route_hdr[i] = in_flit[i].data;
  end

  // ---------------- arbitration
  always_comb begin
    logic          found;
    logic [IW-1:0] idx;
    found = 1'b0;
    idx   = '0;
    for (int o = 0; o < int'(N); o++) begin
      gnt[o] = '0;
      found  = 1'b0;
      for (int k = 0; k < int'(N); k++) begin
        idx = IW'((int'(rr[o]) + k) % int'(N));
        if (!busy[o] && !found && st[idx] == IN_REQ && req[idx] == IW'(o)) begin
          gnt[o][idx] = 1'b1;
          found       = 1'b1;
        end
      end
    end
  end

  always_comb begin
    for (int i = 0; i < int'(N); i++) begin
      grant_o[i] = 1'b0;
      for (int o = 0; o < int'(N); o++) grant_o[i] |= gnt[o][i];
      blocked_o[i] = (st[i] == IN_REQ) && !grant_o[i];
    end
  end

  // ---------------- data path
  always_comb begin
    for (int o = 0; o < int'(N); o++) begin
      out_valid[o] = busy[o] && in_valid[owner[o]];
      out_flit[o]  = in_flit[owner[o]];
      done[o]      = out_valid[o] && out_ready[o] && out_flit[o].eop;
    end
    for (int i = 0; i < int'(N); i++)
      in_ready[i] = (st[i] == IN_FWD) && out_ready[req[i]];
  end

  // ---------------- state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(N); i++) begin
        st[i]    <= IN_IDLE;
        req[i]   <= '0;
        busy[i]  <= 1'b0;
        owner[i] <= '0;
        rr[i]    <= '0;
      end
    end else begin
      for (int i = 0; i < int'(N); i++) begin
        if (st[i] == IN_IDLE && in_valid[i] && in_flit[i].sop) begin
          req[i] <= IW'(route_dest[i]);
          st[i]  <= IN_REQ;
        end
      end
      for (int o = 0; o < int'(N); o++) begin
        if (done[o]) begin
          busy[o]         <= 1'b0;
          st[owner[o]]    <= IN_IDLE;
        end
        for (int i = 0; i < int'(N); i++) begin
          if (gnt[o][i]) begin
            busy[o]  <= 1'b1;
            owner[o] <= IW'(i);
            rr[o]    <= IW'((i + 1) % int'(N));
            st[i]    <= IN_FWD;
          end
        end
      end
    end
  end

  // A waiting input must present a header.
  for (genvar i = 0; i < int'(N); i++) begin : g_chk
    a_sop_first: assert property (@(posedge clk) disable iff (!rst_n)
                                  (st[i] == IN_IDLE && in_valid[i]) |-> in_flit[i].sop)
      else $error("crossbar_switch: input %0d lost packet framing", i);
  end

endmodule
