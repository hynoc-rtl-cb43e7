// hynoc_mesh_tb: end-to-end test of the default 4 x 4 mesh (dual-clock
// routers, 32-bit payload, 32-entry FIFOs), all parameters at their
// defaults.  Nodes are behavioural models driving the AXI-Stream style
// local-interface ports; all share the router clock.
//
// Phase 1, distributed matrix-vector product y = A x (A 16 x 4, x = 1..4):
//   the master node (0,0) sends each of the 15 workers one packet: routing
//   flit, tag, the 4 values of its row of A, the 4 values of x (9 payload
//   flits after the routing flit is consumed).  Each worker returns routing
//   flit, tag, result (2 payload flits).  Routes are dimension ordered (X
//   then Y, then the local hop) and written with relative hops.  All 16
//   results are checked against a reference computed here.
// Phase 2, latency: each worker alone sends a 2-payload-flit packet to the
//   master.  The return latency (first flit accepted at the worker to last
//   flit delivered to the master) must depend on the hop count H only and
//   be linear: L = alpha*H + P - 1 with one alpha for all H = 2..7; a probe
//   with P = 6 checks the one-flit-per-cycle data phase.
// Phase 3, multicast: a packet with a chain of three routing flits goes
//   East from the master, is duplicated at (0,1) to its local node and to
//   (0,2), where the third routing flit sends it to the local node.
// Phase 4, rejected packet: a packet with the reserved XY protocol code is
//   flushed by the first router; the next packet still arrives.
// Phase 5, stress: every node sends long packets to random destinations
//   while receivers read slowly: back-pressure and arbitration happen; every
//   packet must arrive complete and in order per source.
// The flits on each row-0 / column-0 link during phase 1 are counted and
// checked against the loads the routes imply.
// Mechanisms counted (each must happen): routing flit forwarded, routing
// flit consumed, almost-full stall, egress contention, multicast
// duplication, flush.
module hynoc_mesh_tb;
  import hynoc_pkg::*;
  localparam int R = 4, C = 4, NODES = R * C, K = 32, LD = 5, IW = 4, NP = 5;
  localparam int P_LOCAL = 0, P_EAST = 1, P_SOUTH = 2, P_WEST = 3, P_NORTH = 4;

  typedef logic [K:0] flit_t;   // {last, data}

  logic clk = 0, srst = 1;
  always #5 clk = ~clk;

  logic [NODES-1:0] node_clk, node_srst;
  assign node_clk  = {NODES{clk}};
  assign node_srst = {NODES{srst}};

  logic [NODES-1:0] s_tvalid, s_tready, s_tlast, m_tvalid, m_tready, m_tlast;
  logic [K-1:0] s_tdata [NODES];
  logic [K-1:0] m_tdata [NODES];
  logic [LD:0]  s_fifo_level [NODES];
  logic [LD:0]  m_fifo_level [NODES];

  hynoc_mesh dut (
    .router_clk(clk), .router_srst(srst), .node_clk, .node_srst,
    .s_tvalid, .s_tready, .s_tdata, .s_tlast, .s_fifo_level,
    .m_tvalid, .m_tready, .m_tdata, .m_tlast, .m_fifo_level);

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ------------------------------------------------------------ routes
  // Dimension-ordered route from node a to node b as a list of physical
  // output ports, ending with the local port; converted to relative hops.
  function automatic flit_t route_flit(input int a, input int b, input logic [3:0] proto = PROTO_UNICAST);
    int r0, c0, r1, c1, in_port, n, out_port, hop;
    int outs[$];
    flit_t f;
    r0 = a / C; c0 = a % C; r1 = b / C; c1 = b % C;
    while (c0 != c1) begin outs.push_back(c1 > c0 ? P_EAST : P_WEST); c0 += (c1 > c0) ? 1 : -1; end
    while (r0 != r1) begin outs.push_back(r1 > r0 ? P_SOUTH : P_NORTH); r0 += (r1 > r0) ? 1 : -1; end
    outs.push_back(P_LOCAL);
    n = outs.size();
    f = '0;
    f[K-1 -: 4] = proto;
    f[IW-1:0] = IW'(n - 1);
    in_port = P_LOCAL;
    for (int k = 0; k < n; k++) begin
      out_port = outs[k];
      hop = (out_port - in_port - 1 + 2 * NP) % NP;
      f[IW + (n - 1 - k) * 2 +: 2] = 2'(hop);
      in_port = (out_port == P_EAST) ? P_WEST : (out_port == P_WEST) ? P_EAST :
                (out_port == P_SOUTH) ? P_NORTH : P_SOUTH;
    end
    return f;
  endfunction

  function automatic int hops(input int a, input int b);
    return ((a % C > b % C) ? a % C - b % C : b % C - a % C) +
           ((a / C > b / C) ? a / C - b / C : b / C - a / C) + 1;
  endfunction

  // ------------------------------------------------------------ node models
  flit_t txq [NODES][$];
  flit_t rxbuf [NODES][$];
  bit    tx_in_pkt [NODES];
  int    t_first [NODES];          // cycle the first flit of the last packet was accepted
  int    rd_pct [NODES];           // read probability (%)
  int    phase = 0;

  always @(negedge clk) begin
    for (int n = 0; n < NODES; n++) begin
      s_tvalid[n] = !srst && txq[n].size() > 0;
      {s_tlast[n], s_tdata[n]} = (txq[n].size() > 0) ? txq[n][0] : '0;
      m_tready[n] = !srst && ($urandom_range(99) < rd_pct[n]);
    end
  end

  always @(posedge clk) if (!srst) begin
    for (int n = 0; n < NODES; n++) begin
      if (s_tvalid[n] && s_tready[n]) begin
        if (!tx_in_pkt[n]) t_first[n] = cyc;
        tx_in_pkt[n] = !s_tlast[n];
        void'(txq[n].pop_front());
      end
      if (m_tvalid[n] && m_tready[n]) begin
        rxbuf[n].push_back({m_tlast[n], m_tdata[n]});
        if (m_tlast[n]) on_packet(n);
      end
    end
  end

  // ------------------------------------------------------------ workload state
  int A [16][4];
  int y_ref [16], y_got [16];
  bit y_seen [16];
  int lat [16];
  int probe_lat;
  bit probe_done;
  int mc_got [NODES];
  int stress_exp_seq [NODES][NODES];
  int stress_pkts_rx, stress_pkts_tx;
  int flushed_marker_got;

  task automatic on_packet(input int n);
    flit_t p[$];
    p = rxbuf[n];
    rxbuf[n].delete();
    case (phase)
      1: begin
        if (n != 0) begin
          // worker: tag, A row, x -> return tag, dot product
          int acc;
          check(p.size() == 9, $sformatf("worker %0d got %0d flits, expected 9", n, p.size()));
          check(p[0][K-1:0] == K'(n), "worker tag");
          acc = 0;
          for (int i = 0; i < 4; i++) acc += int'(p[1 + i][K-1:0]) * int'(p[5 + i][K-1:0]);
          txq[n].push_back(route_flit(n, 0));
          txq[n].push_back({1'b0, K'(n)});
          txq[n].push_back({1'b1, K'(acc)});
        end else begin
          int w;
          check(p.size() == 2, "master return packet size");
          w = int'(p[0][K-1:0]);
          if (w > 0 && w < 16) begin
            y_got[w] = int'(p[1][K-1:0]);
            y_seen[w] = 1;
          end
        end
      end
      2: begin
        check(n == 0, "probe packet at the master");
        probe_lat = cyc - t_first[int'(p[0][K-1:0])];
        probe_done = 1;
      end
      3: begin
        mc_got[n]++;
        if (n == 1) check(p.size() == 4 && p[0] == {1'b0, 26'h0, 2'd1, 4'd0} && p[1][K-1:0] == 32'hCAFE0001,
                          "multicast copy at (0,1) (chained routing flit delivered as payload)");
        if (n == 2) check(p.size() == 3 && p[0][K-1:0] == 32'hCAFE0001, "multicast copy at (0,2)");
      end
      4: begin
        check(n == 5 && p.size() == 2 && p[0][K-1:0] == 32'h600D, "only the valid packet after the flushed one arrives");
        flushed_marker_got++;
      end
      5: begin
        int src, seq;
        src = int'(p[0][K-1:16]);
        seq = int'(p[0][15:0]);
        check(src < NODES && seq == stress_exp_seq[src][n], $sformatf("stress: node %0d src %0d seq %0d", n, src, seq));
        if (src < NODES) stress_exp_seq[src][n]++;
        for (int i = 1; i < p.size(); i++)
          check(p[i][K-1:0] == K'((src << 24) ^ (n << 16) ^ (seq << 8) ^ i), "stress payload");
        check(p[p.size() - 1][K], "stress last flit");
        stress_pkts_rx++;
      end
      default: check(0, "packet outside any phase");
    endcase
  endtask

  // ------------------------------------------------------------ mechanism counters
  int m_fwd [NODES][NP], m_cons [NODES][NP], m_stall [NODES][NP], m_cont [NODES][NP], m_mc [NODES][NP], m_flush [NODES][NP];
  for (genvar r = 0; r < R; r++) begin : g_r
    for (genvar c = 0; c < C; c++) begin : g_c
      for (genvar p = 0; p < NP; p++) begin : g_p
        always @(posedge clk) if (!srst) begin
          if (dut.g_row[r].g_col[c].u_router.u_base.g_port[p].u_ingress.state == 2'd1 &&
              dut.g_row[r].g_col[c].u_router.u_base.g_port[p].u_ingress.fifo_ren) begin
            if (dut.g_row[r].g_col[c].u_router.u_base.g_port[p].u_ingress.head_index != 0)
              m_fwd[r*C+c][p]++;
            else m_cons[r*C+c][p]++;
            if ($countones(dut.g_row[r].g_col[c].u_router.u_base.g_port[p].u_ingress.req_q) > 1)
              m_mc[r*C+c][p]++;
          end
          if ((dut.g_row[r].g_col[c].u_router.u_base.g_port[p].u_ingress.from_egress_afull &
               dut.g_row[r].g_col[c].u_router.u_base.g_port[p].u_ingress.to_egress_request) != 0)
            m_stall[r*C+c][p]++;
          if ($countones(dut.g_row[r].g_col[c].u_router.u_base.g_port[p].u_egress.from_ingress_req) > 1)
            m_cont[r*C+c][p]++;
          if (dut.g_row[r].g_col[c].u_router.u_base.g_port[p].u_ingress.state == 2'd3 &&
              dut.g_row[r].g_col[c].u_router.u_base.g_port[p].u_ingress.fifo_ren &&
              dut.g_row[r].g_col[c].u_router.u_base.g_port[p].u_ingress.fifo_rdata[K])
            m_flush[r*C+c][p]++;
        end
      end
    end
  end

  // flits written into each router-to-router link (egress ports 1..4)
  int link_flits [NODES][NP];
  for (genvar r = 0; r < R; r++) begin : g_lr
    for (genvar c = 0; c < C; c++) begin : g_lc
      for (genvar d = 1; d < NP; d++) begin : g_ld
        always @(posedge clk)
          if (!srst && dut.g_row[r].g_col[c].u_router.u_base.egress_wen[d]) link_flits[r*C+c][d]++;
      end
    end
  end

  function automatic int total(input int which);
    int t;
    t = 0;
    for (int n = 0; n < NODES; n++) for (int p = 0; p < NP; p++)
      case (which)
        0: t += m_fwd[n][p];
        1: t += m_cons[n][p];
        2: t += m_stall[n][p];
        3: t += m_cont[n][p];
        4: t += m_mc[n][p];
        default: t += m_flush[n][p];
      endcase
    return t;
  endfunction

  task automatic wait_probe();
    int k;
    k = 0;
    while (!probe_done && k < 2000) begin @(posedge clk); k++; end
    check(probe_done, "probe packet delivered");
  endtask

  task automatic wait_idle(input int max_cycles);
    int left, k;
    k = 0;
    do begin
      @(posedge clk);
      left = 0;
      for (int n = 0; n < NODES; n++) left += txq[n].size() + m_tvalid[n];
      k++;
    end while ((left != 0) && k < max_cycles);
    repeat (150) @(posedge clk);
  endtask

  initial begin
    #20000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int t0, alpha, l2, lh[8], lp6;
    for (int n = 0; n < NODES; n++) begin
      rd_pct[n] = 100; tx_in_pkt[n] = 0; t_first[n] = 0; mc_got[n] = 0;
      for (int m = 0; m < NODES; m++) stress_exp_seq[n][m] = 0;
      for (int p = 0; p < NP; p++) begin
        m_fwd[n][p] = 0; m_cons[n][p] = 0; m_stall[n][p] = 0; m_cont[n][p] = 0; m_mc[n][p] = 0; m_flush[n][p] = 0;
      end
    end
    stress_pkts_rx = 0; stress_pkts_tx = 0; flushed_marker_got = 0;
    repeat (5) @(posedge clk);
    srst <= 0;
    repeat (5) @(posedge clk);

    // ---------------- phase 1: y = A x
    phase = 1;
    for (int i = 0; i < 16; i++) begin
      y_ref[i] = 0; y_seen[i] = 0;
      for (int j = 0; j < 4; j++) begin
        A[i][j] = $urandom_range(0, 1000);
        y_ref[i] += A[i][j] * (j + 1);
      end
    end
    y_got[0] = 0;
    for (int j = 0; j < 4; j++) y_got[0] += A[0][j] * (j + 1);   // master's own row
    y_seen[0] = 1;
    for (int n = 0; n < NODES; n++) for (int d = 0; d < NP; d++) link_flits[n][d] = 0;
    t0 = cyc;
    for (int w = 1; w < 16; w++) begin
      txq[0].push_back(route_flit(0, w));
      txq[0].push_back({1'b0, K'(w)});
      for (int j = 0; j < 4; j++) txq[0].push_back({1'b0, K'(A[w][j])});
      for (int j = 0; j < 4; j++) txq[0].push_back({(j == 3) ? 1'b1 : 1'b0, K'(j + 1)});
    end
    begin
      int k;
      bit all;
      k = 0;
      do begin
        @(posedge clk); k++;
        all = 1;
        for (int i = 0; i < 16; i++) all &= y_seen[i];
      end while (!all && k < 5000);
    end
    $display("phase 1: matrix-vector product done in %0d cycles", cyc - t0);
    for (int i = 0; i < 16; i++)
      check(y_seen[i] && y_got[i] == y_ref[i], $sformatf("y[%0d] = %0d expected %0d", i, y_got[i], y_ref[i]));
    // Link loads of dimension-ordered routes: 10 flits per request (routing
    // flit + 9 payload flits), 3 per reply; East row 0 carries 12/8/4
    // requests, South column 0 3/2/1, North into the master 12 replies,
    // West row 0 3/2/1 replies.
    begin
      int exp_l [10], got_l [10];
      string nm [10];
      exp_l = '{120, 80, 40, 30, 20, 10, 36, 9, 6, 3};
      got_l = '{link_flits[0][P_EAST], link_flits[1][P_EAST], link_flits[2][P_EAST],
                link_flits[0][P_SOUTH], link_flits[4][P_SOUTH], link_flits[8][P_SOUTH],
                link_flits[4][P_NORTH], link_flits[1][P_WEST], link_flits[2][P_WEST], link_flits[3][P_WEST]};
      nm = '{"(0,0)->(0,1)", "(0,1)->(0,2)", "(0,2)->(0,3)", "(0,0)->(1,0)", "(1,0)->(2,0)",
             "(2,0)->(3,0)", "(1,0)->(0,0)", "(0,1)->(0,0)", "(0,2)->(0,1)", "(0,3)->(0,2)"};
      for (int i = 0; i < 10; i++) begin
        $display("phase 1: link %s  %0d flits, %0d.%0d%% of %0d cycles", nm[i], got_l[i],
                 got_l[i] * 100 / (cyc - t0), (got_l[i] * 1000 / (cyc - t0)) % 10, cyc - t0);
        check(got_l[i] == exp_l[i], $sformatf("link %s carried %0d flits, expected %0d", nm[i], got_l[i], exp_l[i]));
      end
    end
    wait_idle(2000);

    // ---------------- phase 2: return latency per hop count
    phase = 2;
    for (int h = 0; h < 8; h++) lh[h] = -1;
    for (int w = 1; w < 16; w++) begin
      int H;
      probe_done = 0;
      txq[w].push_back(route_flit(w, 0));
      txq[w].push_back({1'b0, K'(w)});
      txq[w].push_back({1'b1, K'(12345)});
      wait_probe();
      H = hops(w, 0);
      lat[w] = probe_lat;
      if (lh[H] < 0) lh[H] = probe_lat;
      else check(lh[H] == probe_lat, $sformatf("latency not deterministic for H=%0d (%0d vs %0d)", H, lh[H], probe_lat));
      repeat (30) @(posedge clk);
    end
    alpha = lh[3] - lh[2];
    for (int h = 2; h <= 7; h++) begin
      check(lh[h] == alpha * h + (lh[2] - 2 * alpha), $sformatf("latency not linear at H=%0d", h));
      $display("phase 2: H=%0d  return latency %0d cycles", h, lh[h]);
    end
    $display("phase 2: per-hop cost alpha = %0d cycles, L = %0d*H + (%0d)", alpha, alpha, lh[2] - 2 * alpha);
    // a longer packet from the H=7 corner: P = 6 payload flits
    probe_done = 0;
    txq[15].push_back(route_flit(15, 0));
    txq[15].push_back({1'b0, K'(15)});
    for (int i = 0; i < 5; i++) txq[15].push_back({(i == 4) ? 1'b1 : 1'b0, K'(i)});
    wait_probe();
    lp6 = probe_lat;
    check(lp6 == lh[7] + 4, $sformatf("P=6 packet latency %0d, expected %0d (one flit per cycle)", lp6, lh[7] + 4));
    wait_idle(1000);

    // ---------------- phase 3: multicast with chained routing flits
    phase = 3;
    begin
      flit_t f1, f2, f3;
      f1 = '0; f1[IW +: 2] = 2'd0;                                   // at (0,0) from local: hop 0 = East
      f2 = '0; f2[K-1 -: 4] = PROTO_MULTICAST; f2[IW +: 4] = 4'b0110; // at (0,1) from West: h1 local, h2 East
      f3 = '0; f3[IW +: 2] = 2'd1;                                   // at (0,2) from West: h1 local
      txq[0].push_back(f1);
      txq[0].push_back(f2);
      txq[0].push_back(f3);
      txq[0].push_back({1'b0, 32'hCAFE0001});
      txq[0].push_back({1'b0, 32'hCAFE0002});
      txq[0].push_back({1'b1, 32'hCAFE0003});
    end
    wait_idle(1000);
    check(mc_got[1] == 1 && mc_got[2] == 1, $sformatf("multicast copies delivered to (0,1) and (0,2): %0d %0d", mc_got[1], mc_got[2]));

    // ---------------- phase 4: flushed packet, then a valid one
    phase = 4;
    txq[0].push_back(route_flit(0, 5, PROTO_XY));
    txq[0].push_back({1'b0, 32'hBAD0});
    txq[0].push_back({1'b1, 32'hBAD1});
    txq[0].push_back(route_flit(0, 5));
    txq[0].push_back({1'b0, 32'h600D});
    txq[0].push_back({1'b1, 32'h600E});
    wait_idle(1000);
    check(flushed_marker_got == 1, "valid packet after the flushed one");

    // ---------------- phase 5: stress
    phase = 5;
    for (int n = 0; n < NODES; n++) rd_pct[n] = (n % 3 == 0) ? 20 : 70;
    for (int k = 0; k < 12; k++) begin
      for (int s = 0; s < NODES; s++) begin
        int d, len, seq;
        d = $urandom_range(0, NODES - 1);
        if (d == s) d = (d + 1) % NODES;
        len = $urandom_range(2, 40);
        seq = 0;
        seq = stress_tx_seq(s, d);
        txq[s].push_back(route_flit(s, d));
        txq[s].push_back({1'b0, K'((s << 16) | seq)});
        for (int i = 1; i < len; i++)
          txq[s].push_back({(i == len - 1) ? 1'b1 : 1'b0, K'((s << 24) ^ (d << 16) ^ (seq << 8) ^ i)});
        stress_pkts_tx++;
      end
    end
    wait_idle(200000);
    check(stress_pkts_rx == stress_pkts_tx, $sformatf("stress: %0d of %0d packets delivered", stress_pkts_rx, stress_pkts_tx));

    // ---------------- mechanisms
    $display("mechanisms: forwarded=%0d consumed=%0d stall_cycles=%0d contention_cycles=%0d multicast=%0d flushed=%0d",
             total(0), total(1), total(2), total(3), total(4), total(5));
    check(total(0) > 0, "routing flit forwarding never happened");
    check(total(1) > 0, "routing flit consumption never happened");
    check(total(2) > 0, "almost-full stall never happened");
    check(total(3) > 0, "egress contention never happened");
    check(total(4) > 0, "multicast duplication never happened");
    check(total(5) > 0, "flush never happened");
    $display("simulated %0d router cycles", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int tx_seq_tab [NODES][NODES];
  initial for (int a = 0; a < NODES; a++) for (int b = 0; b < NODES; b++) tx_seq_tab[a][b] = 0;
  function automatic int stress_tx_seq(input int s, input int d);
    return tx_seq_tab[s][d]++;
  endfunction
endmodule
