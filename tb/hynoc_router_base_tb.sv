// hynoc_router_base_tb: self-checking test of a 9-port router (3-bit hops,
// 8-bit multicast masks).  Every port injects random packets at the same time:
// unicast to a random relative hop with index 0 (routing flit consumed) or
// 1..2 (routing flit forwarded with the index decreased), and multicast to a
// random mask.  Each egress feeds a FIFO model (port 0 drains slowly, which
// forces almost-full back-pressure).  The expected flit stream of every
// (egress, source) pair is computed from the relative hop rule
// egress = (ingress + 1 + hop) mod N; packets must arrive whole, unmixed and
// in order, and the FIFOs must never overflow.  Back-pressure stalls, egress
// contention, concurrent transfers and multicast are counted and must occur.
module hynoc_router_base_tb;
  localparam int N = 9;

  localparam int K = 32, LD = 5, IW = 4, NE = N - 1, DEPTH = 1 << LD;
  localparam int HB = $clog2(N - 1);

  logic clk = 0, srst = 1;
  logic [N-1:0] in_wen, eg_wen;
  logic [K:0]   in_data [N];
  logic [LD:0]  in_lvl  [N];
  logic [K:0]   eg_data [N];
  logic [LD:0]  eg_lvl  [N];
  int checks = 0, failures = 0;
  int n_stall = 0, n_contention = 0, n_mcast = 0, n_fwd_hdr = 0, n_concurrent = 0;

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  logic [N-1:0] clk_v, srst_v;
  assign clk_v  = {N{clk}};
  assign srst_v = {N{srst}};
  hynoc_router_base #(.PAYLOAD_WIDTH(K), .LOG2_FIFO_DEPTH(LD), .NB_PORTS(N), .INDEX_WIDTH(IW)) dut (
    .router_clk(clk), .router_srst(srst),
    .ingress_clk(clk_v), .ingress_srst(srst_v), .ingress_wen(in_wen), .ingress_wdata(in_data),
    .ingress_wlevel(in_lvl), .egress_wen(eg_wen), .egress_wdata(eg_data), .egress_wlevel(eg_lvl));

  // ------------------------------------------------------------ traffic
  logic [K:0] inq [N][$];
  logic [K:0] expq [N][N][$];   // [egress][source]
  int pkt_cnt [N];

  task automatic gen_packet(input int s, input bit allow_mcast);
    int plen, idx, h;
    logic [NE-1:0] mask;
    logic [K:0] rf;
    bit mc;
    mc = allow_mcast && ($urandom_range(99) < 20);
    plen = $urandom_range(1, 8);
    rf = '0;
    rf[K-1 -: 4] = mc ? 4'b0001 : 4'b0000;
    rf[27:24] = 4'(s);
    rf[23:16] = 8'(pkt_cnt[s]);
    if (mc) begin
      idx = 0;
      mask = NE'($urandom_range(1, (1 << NE) - 1));
      rf[IW +: NE] = mask;
      n_mcast++;
    end else begin
      idx = $urandom_range(0, 2);
      h = $urandom_range(0, NE - 1);
      for (int j = 0; j <= idx; j++) rf[IW + j*HB +: HB] = HB'($urandom);
      rf[IW + idx*HB +: HB] = HB'(h);
      mask = NE'(1) << h;
    end
    rf[IW-1:0] = IW'(idx);
    inq[s].push_back(rf);
    for (int hh = 0; hh < NE; hh++) if (mask[hh]) begin
      int e;
      e = (s + 1 + hh) % N;
      if (idx != 0) begin
        logic [K:0] f;
        f = rf; f[IW-1:0] = IW'(idx - 1);
        expq[e][s].push_back(f);
        n_fwd_hdr++;
      end
    end
    for (int i = 0; i < plen; i++) begin
      logic [K:0] f;
      f = {(i == plen - 1) ? 1'b1 : 1'b0, 4'(s), 4'($urandom), 8'(pkt_cnt[s]), 16'(i)};
      inq[s].push_back(f);
      for (int hh = 0; hh < NE; hh++) if (mask[hh]) expq[(s + 1 + hh) % N][s].push_back(f);
    end
    pkt_cnt[s]++;
  endtask

  // writers
  always @(negedge clk) begin
    for (int s = 0; s < N; s++) begin
      if (srst) in_wen[s] = 1'b0;
      else begin
        in_wen[s] = (inq[s].size() > 0) && (in_lvl[s] != 0) && ($urandom_range(99) < 80);
        if (in_wen[s]) in_data[s] = inq[s].pop_front();
      end
    end
  end

  // sinks: downstream FIFO models, port 0 drains slowly to force back-pressure
  int occ [N];
  int cur [N];
  bit busy [N];
  always_comb for (int e = 0; e < N; e++) eg_lvl[e] = (LD+1)'(DEPTH - occ[e]);
  always @(posedge clk) begin
    if (srst) begin
      for (int e = 0; e < N; e++) begin occ[e] <= 0; busy[e] <= 0; cur[e] <= 0; end
    end else begin
      int active;
      active = 0;
      for (int e = 0; e < N; e++) begin
        int o;
        o = occ[e];
        if (o > 0 && $urandom_range(99) < ((e == 0) ? 15 : 70)) o--;
        if (eg_wen[e]) begin
          int s;
          active++;
          check(occ[e] < DEPTH, $sformatf("egress %0d downstream overflow", e));
          o++;
          s = busy[e] ? cur[e] : -1;
          if (!busy[e]) begin
            for (int c = 0; c < N; c++)
              if (expq[e][c].size() > 0 && expq[e][c][0] == eg_data[e]) s = c;
            check(s >= 0, $sformatf("egress %0d: flit %h starts no expected packet", e, eg_data[e]));
          end
          if (s >= 0) begin
            check(expq[e][s].size() > 0 && expq[e][s][0] == eg_data[e],
                  $sformatf("egress %0d: flit %h, expected %h from port %0d", e, eg_data[e],
                            (expq[e][s].size() > 0) ? expq[e][s][0] : '0, s));
            if (expq[e][s].size() > 0) void'(expq[e][s].pop_front());
            busy[e] <= !eg_data[e][K];
            cur[e]  <= s;
          end
        end
        occ[e] <= o;
      end
      if (active > 1) n_concurrent++;
    end
  end

  // mechanism counters (taken from inside the router)
  int stall_p [N], cont_p [N];
  for (genvar p = 0; p < N; p++) begin : g_mon
    always @(posedge clk) if (!srst) begin
      if ((dut.g_port[p].u_ingress.from_egress_afull & dut.g_port[p].u_ingress.to_egress_request) != '0)
        stall_p[p]++;
      if ($countones(dut.g_port[p].u_egress.from_ingress_req) > 1) cont_p[p]++;
    end
  end
  always_comb begin
    n_stall = 0; n_contention = 0;
    for (int p = 0; p < N; p++) begin n_stall += stall_p[p]; n_contention += cont_p[p]; end
  end

  initial begin
    #5000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int left;
    for (int s = 0; s < N; s++) begin pkt_cnt[s] = 0; stall_p[s] = 0; cont_p[s] = 0; end
    repeat (4) @(posedge clk);
    srst <= 0;
    for (int i = 0; i < 60; i++) for (int s = 0; s < N; s++) gen_packet(s, 1'b1);
    do begin
      repeat (100) @(posedge clk);
      left = 0;
      for (int s = 0; s < N; s++) left += inq[s].size();
    end while (left != 0);
    repeat (2000) @(posedge clk);
    left = 0;
    for (int e = 0; e < N; e++) for (int s = 0; s < N; s++) left += expq[e][s].size();
    check(left == 0, $sformatf("%0d expected flits never delivered", left));
    check(n_stall > 0, "almost-full back-pressure never happened");
    check(n_contention > 0, "egress contention never happened");
    check(n_concurrent > 0, "no concurrent transfers");
    check(n_mcast > 0 && n_fwd_hdr > 0, "multicast / forwarded headers not exercised");
    $display("stall_cycles=%0d contention_cycles=%0d concurrent_cycles=%0d multicast=%0d fwd_headers=%0d",
             n_stall, n_contention, n_concurrent, n_mcast, n_fwd_hdr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
