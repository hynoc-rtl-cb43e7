// hynoc_ingress_tb: self-checking test of one ingress port (5-port router,
// 32-bit payload, dual-clock FIFO on a common clock).
// A behavioural egress model grants each requested egress after a random
// delay, holds the grant while requested and returns a random almost-full
// bit on granted ports.  Random packets are written into the ingress FIFO:
// unicast with random hop lists and index (forwarded with index-1, or the
// routing flit consumed when the index is 0), multicast masks, and packets
// that must be flushed (routing flit with stop bit, reserved XY proto,
// forbidden proto, empty multicast mask, index past the hop fields).  Every
// flit leaving the ingress is compared with the expected stream, the
// request vector is checked while each flit leaves, nothing is sent while
// almost-full is raised, and the stall / flush mechanisms are counted.
module hynoc_ingress_tb;
  import hynoc_pkg::*;
  localparam int K = 32, LD = 5, N = 5, IW = 4, NE = N - 1;

  logic clk = 0, srst = 1;
  logic wen = 0;
  logic [K:0] wdata = '0;
  logic [LD:0] wlevel;
  logic [NE-1:0] req, grant, afull;
  logic out_write;
  logic [K:0] out_data;
  int checks = 0, failures = 0;
  int n_afull_stall = 0, n_flush = 0, n_consumed = 0, n_forwarded = 0, n_mcast = 0;

  always #5 clk = ~clk;

  hynoc_ingress #(.PAYLOAD_WIDTH(K), .LOG2_FIFO_DEPTH(LD), .NB_PORTS(N), .INDEX_WIDTH(IW)) dut (
    .ingress_clk(clk), .ingress_srst(srst), .ingress_wen(wen), .ingress_wdata(wdata),
    .ingress_wlevel(wlevel), .router_clk(clk), .router_srst(srst),
    .to_egress_request(req), .from_egress_grant(grant), .from_egress_afull(afull),
    .to_egress_write(out_write), .to_egress_data(out_data));

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // ---------------- egress model
  int gdelay [NE];
  logic [NE-1:0] req_d;
  always @(posedge clk) begin
    if (srst) begin
      grant <= '0; afull <= '0; req_d <= '0;
      for (int e = 0; e < NE; e++) gdelay[e] <= 0;
    end else begin
      req_d <= req;
      for (int e = 0; e < NE; e++) begin
        if (!req[e]) begin
          grant[e] <= 1'b0;
          gdelay[e] <= $urandom_range(4);
        end else if (!grant[e]) begin
          if (gdelay[e] == 0 && req_d[e]) grant[e] <= 1'b1;
          else if (gdelay[e] != 0) gdelay[e] <= gdelay[e] - 1;
        end
        afull[e] <= grant[e] && ($urandom_range(99) < 20);
      end
    end
  end

  // ---------------- expected output
  typedef struct { logic [K:0] flit; logic [NE-1:0] req; } exp_t;
  exp_t expq[$];
  logic [K:0] inq[$];

  function automatic logic [K:0] routing_flit(input logic [3:0] proto, input logic [K-5-IW:0] hops,
                                              input logic [IW-1:0] idx, input bit stop);
    return {stop, proto, hops, idx};
  endfunction

  task automatic gen_packet();
    int kind, idx, plen, nh;
    logic [K-5-IW:0] hops;
    logic [NE-1:0] r;
    logic [K:0] rf;
    bit good;
    kind = $urandom_range(99);
    hops = {$urandom, $urandom};
    plen = $urandom_range(1, 6);
    good = 1;
    if (kind < 55) begin                         // unicast
      idx = $urandom_range(0, 11);
      rf = routing_flit(PROTO_UNICAST, hops, IW'(idx), 0);
      r = NE'(1) << hops[idx*2 +: 2];
    end else if (kind < 75) begin                // multicast
      idx = $urandom_range(0, 5);
      hops[idx*4 +: 4] = 4'($urandom_range(1, 15));
      rf = routing_flit(PROTO_MULTICAST, hops, IW'(idx), 0);
      r = hops[idx*4 +: 4];
      n_mcast++;
    end else begin                               // must be flushed
      good = 0;
      idx = $urandom_range(0, 11);
      case ($urandom_range(4))
        0: rf = routing_flit(PROTO_UNICAST, hops, IW'(idx), 1);
        1: rf = routing_flit(PROTO_XY, hops, IW'(idx), 0);
        2: rf = routing_flit(PROTO_FORBIDDEN, hops, IW'(idx), 0);
        3: begin
             idx = 2;
             hops[idx*4 +: 4] = 4'd0;
             rf = routing_flit(PROTO_MULTICAST, hops, IW'(idx), 0);
           end
        default: rf = routing_flit(PROTO_UNICAST, hops, IW'($urandom_range(12, 15)), 0);
      endcase
      if (rf[K]) plen = 0;
      n_flush++;
    end
    inq.push_back(rf);
    if (good) begin
      if (idx != 0) begin
        logic [K:0] f;
        f = rf;
        f[IW-1:0] = IW'(idx - 1);
        expq.push_back('{f, r});
        n_forwarded++;
      end else n_consumed++;
    end
    for (int i = 0; i < plen; i++) begin
      logic [K:0] f;
      f = {(i == plen - 1) ? 1'b1 : 1'b0, K'($urandom)};
      inq.push_back(f);
      if (good) expq.push_back('{f, r});
    end
  endtask

  // ---------------- writer
  always @(negedge clk) begin
    if (srst) wen = 0;
    else begin
      wen = (inq.size() > 0) && (wlevel != 0) && ($urandom_range(99) < 70);
      if (wen) wdata = inq.pop_front();
    end
  end

  // ---------------- monitor
  always @(posedge clk) if (!srst) begin
    if (out_write) begin
      check(expq.size() > 0, "unexpected flit");
      if (expq.size() > 0) begin
        exp_t e;
        e = expq.pop_front();
        check(out_data == e.flit, $sformatf("flit %h expected %h", out_data, e.flit));
        // the request is dropped together with the stop flit
        check(out_data[K] ? (req == '0) : (req == e.req),
              $sformatf("request %b expected %b", req, e.req));
      end
    end
    if (req != '0 && (afull & req) != '0 && !out_write) n_afull_stall++;
  end

  // no read decision may be taken while a granted egress reports almost full
  always @(posedge clk) if (!srst)
    if ((afull & req) != '0) check(!dut.fifo_ren, "FIFO read while downstream almost full");

  initial begin
    #3000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (4) @(posedge clk);
    srst <= 0;
    for (int p = 0; p < 400; p++) gen_packet();
    wait (inq.size() == 0);
    repeat (200) @(posedge clk);
    check(expq.size() == 0, $sformatf("%0d expected flits never left", expq.size()));
    check(n_afull_stall > 0, "almost-full stall never happened");
    check(n_flush > 0 && n_consumed > 0 && n_forwarded > 0 && n_mcast > 0, "all packet kinds exercised");
    $display("stalls=%0d flushed=%0d consumed=%0d forwarded=%0d multicast=%0d",
             n_afull_stall, n_flush, n_consumed, n_forwarded, n_mcast);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
