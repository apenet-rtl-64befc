// tb_crossbar_switch: self-checking test of the cut-through crossbar.
// Seven sources each send 40 packets of random length to random outputs
// (the testbench plays the router: the header's dst.x field names the
// output). Sources stall at random and outputs take words at random. Each
// output checks that packets arrive whole and uninterleaved, word for word,
// with sop on the header and eop on the footer, and that the packets of one
// source arrive in the order sent. A first lone packet checks the two-cycle
// latency from header at the input to header at the output. The test
// counts contention (an input waiting for a busy output) and fails if it
// never happened.
module tb_crossbar_switch;
  import apenet_pkg::*;

  localparam int N = NPORTS;
  localparam int NPK = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        in_valid [N];
  flit_t       in_flit  [N];
  logic        in_ready [N];
  logic        out_valid[N];
  flit_t       out_flit [N];
  logic        out_ready[N];
  logic [63:0] route_hdr[N];
  port_e       route_dest[N];
  logic [N-1:0] blocked, grant;

  crossbar_switch #(.N(N)) dut (.clk, .rst_n, .in_valid, .in_flit, .in_ready,
    .out_valid, .out_flit, .out_ready, .route_hdr, .route_dest,
    .blocked_o(blocked), .grant_o(grant));

  // header bits [18:16] are dst.x[2:0]
  always_comb
    for (int i = 0; i < N; i++) route_dest[i] = port_e'(route_hdr[i][18:16]);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int dst_of [N][NPK];
  int len_of [N][NPK];
  bit go = 0, lone = 0;

  function automatic logic [63:0] word(int s, int k, int w);
    header_t h;
    if (w == 0) begin
      h = '0; h.tag = 16'((s << 8) | k); h.dst.x = 4'(dst_of[s][k]); h.len = LEN_W'(len_of[s][k]);
      return h;
    end
    return {16'hD000, 16'(s), 16'(k), 16'(w)};
  endfunction

  // sources
  int sk [N], sw [N];
  logic sv [N];
  always_comb
    for (int i = 0; i < N; i++) begin
      in_valid[i]     = sv[i] && (sk[i] < NPK);
      in_flit[i].data = word(i, sk[i] < NPK ? sk[i] : 0, sw[i]);
      in_flit[i].sop  = (sw[i] == 0);
      in_flit[i].eop  = (sw[i] == 1 + 2 * len_of[i][sk[i] < NPK ? sk[i] : 0]);
    end
  always @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      if (in_valid[i] && in_ready[i]) begin
        if (in_flit[i].eop) begin sk[i] <= sk[i] + 1; sw[i] <= 0; end
        else sw[i] <= sw[i] + 1;
      end
      sv[i] <= (go && ($urandom % 4 != 0)) || (lone && i == 3);
    end
  end

  // sinks
  int cur_src [N], cur_k [N], cur_w [N], last_k [N][N], n_pk [N], n_blocked = 0;
  always @(posedge clk) begin
    if (rst_n) for (int b = 0; b < N; b++) if (blocked[b]) n_blocked++;
    for (int o = 0; o < N; o++) begin
      out_ready[o] <= !go || ($urandom % 3 != 0);
      if (out_valid[o] && out_ready[o]) begin
        if (cur_w[o] == 0) begin
          header_t h;
          h = header_t'(out_flit[o].data);
          cur_src[o] = int'(h.tag[15:8]);
          cur_k[o]   = int'(h.tag[7:0]);
          check(out_flit[o].sop, $sformatf("out %0d header has sop", o));
          check(int'(h.dst.x) == o, $sformatf("out %0d got packet for %0d", o, h.dst.x));
          check(cur_k[o] > last_k[o][cur_src[o]], $sformatf("out %0d order from src %0d", o, cur_src[o]));
          last_k[o][cur_src[o]] = cur_k[o];
        end else begin
          check(out_flit[o].data == word(cur_src[o], cur_k[o], cur_w[o]),
                $sformatf("out %0d src %0d pkt %0d word %0d", o, cur_src[o], cur_k[o], cur_w[o]));
          check(!out_flit[o].sop, "no sop inside a packet");
        end
        if (cur_w[o] == 1 + 2 * len_of[cur_src[o]][cur_k[o]]) begin
          check(out_flit[o].eop, $sformatf("out %0d eop on footer", o));
          cur_w[o] = 0;
          n_pk[o]++;
        end else begin
          check(!out_flit[o].eop, $sformatf("out %0d early eop", o));
          cur_w[o]++;
        end
      end
    end
  end

  initial begin
    for (int i = 0; i < N; i++) begin
      sk[i] = 0; sw[i] = 0; sv[i] = 0; out_ready[i] = 1; cur_w[i] = 0; n_pk[i] = 0;
      for (int j = 0; j < N; j++) last_k[i][j] = -1;
      for (int k = 0; k < NPK; k++) begin
        dst_of[i][k] = $urandom % N;
        len_of[i][k] = 1 + $urandom % 3;
      end
    end
    dst_of[3][0] = 5;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // lone packet from input 3 to output 5: header out two cycles later
    @(negedge clk); lone = 1;
    begin
      int t0, t1;
      @(posedge clk); #1 wait (in_valid[3]); t0 = $time;
      wait (out_valid[5]); t1 = $time;
      check((t1 - t0 + 5) / 10 == 2, $sformatf("cut-through latency %0d cycles", (t1 - t0 + 5) / 10));
    end
    wait (sk[3] == 1);
    @(negedge clk); lone = 0; go = 1;
    wait (sk[0] == NPK && sk[1] == NPK && sk[2] == NPK && sk[3] == NPK &&
          sk[4] == NPK && sk[5] == NPK && sk[6] == NPK);
    repeat (10) @(posedge clk);
    begin
      int tot;
      tot = 0;
      for (int o = 0; o < N; o++) tot += n_pk[o];
      check(tot == N * NPK, $sformatf("%0d of %0d packets delivered", tot, N * NPK));
    end
    check(n_blocked > 0, "contention for an output happened");
    $display("contention cycles: %0d", n_blocked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
