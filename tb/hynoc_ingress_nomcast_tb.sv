// hynoc_ingress_nomcast_tb: checks the ENABLE_MCAST_ROUTING switch of the
// ingress port.  Two ingress ports (5-port router, 32-bit payload, single
// common clock) receive the same random mix of unicast and multicast
// packets: one built with multicast routing, one without.  Behavioural
// egress models grant each request one cycle after it rises and raise a
// random almost-full.  The port with multicast must deliver every packet
// and request exactly the mask bits; the port without it must drop every
// multicast packet whole (flush) and still deliver every unicast packet
// that follows, unchanged.  Expected flit streams are built here from the
// packet list: a unicast routing flit with index 0 is consumed, with a
// larger index it is forwarded with the index reduced by one.
module hynoc_ingress_nomcast_tb;
  import hynoc_pkg::*;
  localparam int K = 32, LD = 5, N = 5, IW = 4, NE = N - 1;
  localparam int NPKT = 200;

  typedef logic [K:0] flit_t;

  logic clk = 0, srst = 1;
  always #5 clk = ~clk;

  logic          wen = 0;
  flit_t         wdata = '0;
  logic [LD:0]   wlevel [2];
  logic [NE-1:0] req [2], grant [2], afull [2];
  logic          owrite [2];
  flit_t         odata [2];

  for (genvar u = 0; u < 2; u++) begin : g_dut
    hynoc_ingress #(.PAYLOAD_WIDTH(K), .LOG2_FIFO_DEPTH(LD), .NB_PORTS(N), .INDEX_WIDTH(IW),
                    .ENABLE_MCAST_ROUTING(u == 0), .SINGLE_CLOCK_ROUTER(1'b1)) dut (
      .ingress_clk(clk), .ingress_srst(srst), .ingress_wen(wen), .ingress_wdata(wdata),
      .ingress_wlevel(wlevel[u]), .router_clk(clk), .router_srst(srst),
      .to_egress_request(req[u]), .from_egress_grant(grant[u]), .from_egress_afull(afull[u]),
      .to_egress_write(owrite[u]), .to_egress_data(odata[u]));

    // egress model: grant follows the request one cycle later
    always_ff @(posedge clk) begin
      if (srst) begin
        grant[u] <= '0;
        afull[u] <= '0;
      end else begin
        grant[u] <= req[u];
        afull[u] <= req[u] & (($urandom_range(99) < 20) ? '1 : '0);
      end
    end
  end

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  flit_t          expq [2][$];      // expected flit stream per port
  logic [NE-1:0]  expreq [2][$];    // expected request vector per delivered flit
  int             n_mc_flushed = 0, n_mc_sent = 0;

  always @(posedge clk) if (!srst) begin
    for (int u = 0; u < 2; u++)
      if (owrite[u]) begin
        check(expq[u].size() > 0, $sformatf("port %0d: unexpected flit", u));
        if (expq[u].size() > 0) begin
          check(odata[u] == expq[u][0], $sformatf("port %0d: flit %h expected %h", u, odata[u], expq[u][0]));
          check(req[u] == expreq[u][0], $sformatf("port %0d: request %b expected %b", u, req[u], expreq[u][0]));
          void'(expq[u].pop_front());
          void'(expreq[u].pop_front());
        end
      end
  end

  initial begin
    #2000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    flit_t pkt[$];
    repeat (4) @(posedge clk);
    srst <= 0;
    repeat (4) @(posedge clk);
    for (int i = 0; i < NPKT; i++) begin
      flit_t rf;
      int kind, idx, len, hop, gap;
      logic [NE-1:0] rq;
      kind = $urandom_range(2);           // 0: unicast consumed, 1: unicast forwarded, 2: multicast
      len = $urandom_range(1, 6);
      rf = '0;
      rf[K-1 -: 4] = (kind == 2) ? PROTO_MULTICAST : PROTO_UNICAST;
      if (kind == 2) begin
        idx = $urandom_range(0, 5);
        rq = NE'($urandom_range(1, 15));
        rf[IW + idx * NE +: NE] = rq;
      end else begin
        idx = (kind == 0) ? 0 : $urandom_range(1, 11);
        hop = $urandom_range(0, 3);
        rf[IW + idx * 2 +: 2] = 2'(hop);
        rq = NE'(1) << hop;
      end
      rf[IW-1:0] = IW'(idx);
      pkt.delete();
      pkt.push_back(rf);
      for (int j = 0; j < len; j++) pkt.push_back({(j == len - 1) ? 1'b1 : 1'b0, 32'($urandom)});
      // expected output streams
      for (int u = 0; u < 2; u++) begin
        if (kind == 2 && u == 1) continue;
        if (idx != 0) begin
          flit_t f;
          f = rf;
          f[IW-1:0] = IW'(idx - 1);
          expq[u].push_back(f);
          expreq[u].push_back(rq);
        end
        // the requests are released in the cycle the stop flit is sent
        for (int j = 1; j < pkt.size(); j++) begin
          expq[u].push_back(pkt[j]);
          expreq[u].push_back((j == pkt.size() - 1) ? '0 : rq);
        end
      end
      if (kind == 2) n_mc_flushed++;
      // write the packet, respecting both ports' free levels
      foreach (pkt[j]) begin
        while (wlevel[0] < 2 || wlevel[1] < 2) begin
          wen <= 0;
          @(posedge clk);
        end
        wen <= 1;
        wdata <= pkt[j];
        @(posedge clk);
      end
      gap = $urandom_range(0, 3);
      if (gap != 0) begin
        wen <= 0;
        repeat (gap) @(posedge clk);
      end
    end
    wen <= 0;
    begin
      int k;
      k = 0;
      while ((expq[0].size() != 0 || expq[1].size() != 0) && k < 20000) begin @(posedge clk); k++; end
    end
    repeat (20) @(posedge clk);
    check(expq[0].size() == 0, "multicast-enabled port delivered everything");
    check(expq[1].size() == 0, "multicast-disabled port delivered every unicast packet");
    check(n_mc_flushed > 0, "no multicast packet was offered");
    check(g_dut[1].dut.req_q == '0 && g_dut[0].dut.req_q == '0, "requests released at the end");
    $display("multicast packets dropped by the port without multicast: %0d", n_mc_flushed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
