// hynoc_router_3p_pair_tb: two 3-port routers, four nodes, unicast and
// multicast traffic.
//
// Follows the paper's 3-port router testbench: a 2-router, 4-node topology
// driven by stream writer and stream reader models, exercising both unicast
// and multicast.  Own choices: router A port 0 is wired straight to router B
// port 0; nodes n0/n1 sit on A ports 1/2 and n2/n3 on B ports 1/2; the
// routers run the dual-clock configuration, the writers on a 14 ns node
// clock and the routers and readers on a 10 ns router clock; the
// writer/reader packet format and checks are those of hynoc_stream_writer /
// hynoc_stream_reader.
// Destinations: 0..3 are the nodes; 4 is a multicast to {n2, n3} (sent by
// n0/n1: a unicast routing flit to A port 0 chained to a multicast flit at B
// with mask 2'b11); 5 is the same towards {n0, n1} (sent by n2/n3).
// The bench checks that every reader gets exactly the packets addressed to
// it, in order and intact, that no reader buffer overflows, and that
// multicast packets were really sent.
module hynoc_router_3p_pair_tb;
  import hynoc_pkg::*;
  localparam int K   = 32;
  localparam int LF  = 5;
  localparam int IW  = 4;
  localparam int ND  = 6;
  localparam int NPK = 150;
  typedef logic [K:0] flit_t;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  logic rclk = 0, nclk = 0, rst = 1;
  always #5 rclk = ~rclk;
  always #7 nclk = ~nclk;

  // node n sits on router (n / 2) at port (n % 2) + 1
  function automatic flit_t uni(input int in_port, input int out_port, input int index, input int hop_lo = 0);
    flit_t f = '0;
    f[K-1 -: 4] = PROTO_UNICAST;
    f[IW-1:0]   = IW'(index);
    f[IW + index]   = 1'((out_port - in_port - 1 + 6) % 3);  // 1-bit hops on 3 ports
    if (index == 1) f[IW] = 1'(hop_lo);
    return f;
  endfunction

  function automatic flit_t mc(input logic [1:0] mask);
    flit_t f = '0;
    f[K-1 -: 4] = PROTO_MULTICAST;
    f[IW +: 2]  = mask;
    return f;
  endfunction

  flit_t       ra [4][ND];
  flit_t       rb [4][ND];
  logic [ND-1:0] two [4];
  logic [ND-1:0] en  [4];

  initial begin
    for (int s = 0; s < 4; s++) begin
      automatic int sr = s / 2, sp = s % 2 + 1;
      two[s] = '0;
      en[s]  = '0;
      for (int d = 0; d < ND; d++) begin ra[s][d] = '0; rb[s][d] = '0; end
      for (int d = 0; d < 4; d++) begin
        automatic int dr = d / 2, dp = d % 2 + 1;
        if (d == s) continue;
        en[s][d] = 1'b1;
        if (dr == sr) ra[s][d] = uni(sp, dp, 0);
        else          ra[s][d] = uni(sp, 0, 1, (dp - 0 - 1 + 3) % 3);
      end
      // multicast to the two nodes of the other router
      en[s][sr == 0 ? 4 : 5]  = 1'b1;
      two[s][sr == 0 ? 4 : 5] = 1'b1;
      ra[s][sr == 0 ? 4 : 5]  = uni(sp, 0, 0);
      rb[s][sr == 0 ? 4 : 5]  = mc(2'b11);
    end
  end

  // node side wires
  logic            w_wr [4];
  flit_t           w_d  [4];
  logic [LF:0]     w_lv [4];
  logic            r_wr [4];
  flit_t           r_d  [4];
  logic [LF:0]     r_lv [4];
  int              sent [4][ND];
  logic            done [4];
  int              rpk  [4];
  int              rerr [4];
  // router-to-router wires
  logic            ab_wr, ba_wr;
  flit_t           ab_d, ba_d;
  logic [LF:0]     a0_lv, b0_lv;

  hynoc_router_3p u_a (
    .router_clk(rclk), .router_srst(rst),
    .port0_ingress_clk(rclk), .port0_ingress_srst(rst),
    .port0_ingress_write(ba_wr), .port0_ingress_data(ba_d), .port0_ingress_fifo_level(a0_lv),
    .port0_egress_write(ab_wr), .port0_egress_data(ab_d), .port0_egress_fifo_level(b0_lv),
    .port1_ingress_clk(nclk), .port1_ingress_srst(rst),
    .port1_ingress_write(w_wr[0]), .port1_ingress_data(w_d[0]), .port1_ingress_fifo_level(w_lv[0]),
    .port1_egress_write(r_wr[0]), .port1_egress_data(r_d[0]), .port1_egress_fifo_level(r_lv[0]),
    .port2_ingress_clk(nclk), .port2_ingress_srst(rst),
    .port2_ingress_write(w_wr[1]), .port2_ingress_data(w_d[1]), .port2_ingress_fifo_level(w_lv[1]),
    .port2_egress_write(r_wr[1]), .port2_egress_data(r_d[1]), .port2_egress_fifo_level(r_lv[1]));

  hynoc_router_3p u_b (
    .router_clk(rclk), .router_srst(rst),
    .port0_ingress_clk(rclk), .port0_ingress_srst(rst),
    .port0_ingress_write(ab_wr), .port0_ingress_data(ab_d), .port0_ingress_fifo_level(b0_lv),
    .port0_egress_write(ba_wr), .port0_egress_data(ba_d), .port0_egress_fifo_level(a0_lv),
    .port1_ingress_clk(nclk), .port1_ingress_srst(rst),
    .port1_ingress_write(w_wr[2]), .port1_ingress_data(w_d[2]), .port1_ingress_fifo_level(w_lv[2]),
    .port1_egress_write(r_wr[2]), .port1_egress_data(r_d[2]), .port1_egress_fifo_level(r_lv[2]),
    .port2_ingress_clk(nclk), .port2_ingress_srst(rst),
    .port2_ingress_write(w_wr[3]), .port2_ingress_data(w_d[3]), .port2_ingress_fifo_level(w_lv[3]),
    .port2_egress_write(r_wr[3]), .port2_egress_data(r_d[3]), .port2_egress_fifo_level(r_lv[3]));

  for (genvar n = 0; n < 4; n++) begin : g_node
    hynoc_stream_writer #(.SRC_ID(n), .NB_DEST(ND), .NB_PACKETS(NPK)) u_w (
      .clk(nclk), .srst(rst), .route_a(ra[n]), .route_b(rb[n]), .two_flits(two[n]),
      .dest_en(en[n]), .write(w_wr[n]), .data(w_d[n]), .fifo_level(w_lv[n]),
      .sent(sent[n]), .done(done[n]));
    // egress outputs are in the router clock domain
    hynoc_stream_reader #(.MY_ID(n), .DRAIN_PCT(30 + 15 * n)) u_r (
      .clk(rclk), .srst(rst), .write(r_wr[n]), .data(r_d[n]), .fifo_level(r_lv[n]),
      .accept(n < 2 ? 16'h0020 : 16'h0010), .packets(rpk[n]), .errors(rerr[n]));
  end

  initial begin
    int expect_pk [4];
    int mc_sent;
    repeat (20) @(posedge nclk);
    rst = 0;
    wait (done[0] && done[1] && done[2] && done[3]);
    repeat (3000) @(posedge rclk);
    mc_sent = 0;
    for (int d = 0; d < 4; d++) begin
      expect_pk[d] = 0;
      for (int s = 0; s < 4; s++) expect_pk[d] += sent[s][d];
    end
    for (int s = 0; s < 4; s++) begin
      mc_sent += sent[s][4] + sent[s][5];
      expect_pk[2] += sent[s][4]; expect_pk[3] += sent[s][4];
      expect_pk[0] += sent[s][5]; expect_pk[1] += sent[s][5];
    end
    for (int d = 0; d < 4; d++) begin
      check(rpk[d] == expect_pk[d], $sformatf("node %0d received %0d packets, expected %0d", d, rpk[d], expect_pk[d]));
      check(rerr[d] == 0, $sformatf("node %0d reader reported %0d errors", d, rerr[d]));
      begin
        automatic int tot = 0;
        for (int e = 0; e < ND; e++) tot += sent[d][e];
        check(tot == NPK, $sformatf("writer %0d sent %0d packets", d, tot));
      end
    end
    check(mc_sent > 20, $sformatf("only %0d multicast packets were sent", mc_sent));
    $display("multicast packets sent: %0d, packets received: %0d %0d %0d %0d", mc_sent, rpk[0], rpk[1], rpk[2], rpk[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + 1, failures + 1);
    $finish;
  end
endmodule
