// hynoc_local_interface_tb: self-checking test of the node attachment.
// The router clock and the node clock are unrelated (10 ns and 14 ns).
// Receive path: a router-side model writes random flits while the returned
// free-entry level is above the almost-full threshold (as an egress port
// does); the node reads with a random tready.  Every word must reach the node
// in order with tlast equal to the stop bit and the FIFO must never overflow.
// Transmit path: the node pushes words with tvalid while a model of the
// router's ingress FIFO returns its free entries; each accepted beat must
// appear as one write of {tlast, tdata} and tready must follow the level.
module hynoc_local_interface_tb;
  localparam int K = 32, LD = 4, DEPTH = 1 << LD;
  logic rclk = 0, nclk = 0, rsrst = 1, nsrst = 1;
  always #5 rclk = ~rclk;
  always #7 nclk = ~nclk;

  logic s_tvalid = 0, s_tready, s_tlast = 0;
  logic [K-1:0] s_tdata = '0;
  logic [LD:0] s_fifo_level, m_fifo_level;
  logic m_tvalid, m_tready = 0, m_tlast;
  logic [K-1:0] m_tdata;
  logic pi_write;
  logic [K:0] pi_data;
  logic [LD:0] pi_level;
  logic pe_write = 0;
  logic [K:0] pe_data = '0;
  logic [LD:0] pe_level;
  int checks = 0, failures = 0;

  hynoc_local_interface #(.PAYLOAD_WIDTH(K), .LOG2_FIFO_DEPTH(LD)) dut (
    .router_clk(rclk), .router_srst(rsrst), .node_clk(nclk), .node_srst(nsrst),
    .s_tvalid, .s_tready, .s_tdata, .s_tlast, .s_fifo_level,
    .m_tvalid, .m_tready, .m_tdata, .m_tlast, .m_fifo_level,
    .port_ingress_write(pi_write), .port_ingress_data(pi_data), .port_ingress_fifo_level(pi_level),
    .port_egress_write(pe_write), .port_egress_data(pe_data), .port_egress_fifo_level(pe_level));

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // ---------------- receive path
  logic [K:0] rxq[$];
  int rx_sent = 0, rx_got = 0;
  always @(negedge rclk) begin
    if (rsrst) pe_write = 0;
    else begin
      pe_write = (rx_sent < 3000) && (pe_level > 5) && ($urandom_range(99) < 80);
      if (pe_write) begin
        pe_data = {($urandom_range(3) == 0) ? 1'b1 : 1'b0, K'($urandom)};
        rxq.push_back(pe_data);
        rx_sent++;
      end
    end
  end
  always @(posedge nclk) begin
    if (!nsrst && m_tvalid && m_tready) begin
      check(rxq.size() > 0 && {m_tlast, m_tdata} == rxq[0], "receive order / tlast");
      if (rxq.size() > 0) void'(rxq.pop_front());
      rx_got++;
    end
  end
  always @(negedge nclk) m_tready = ($urandom_range(99) < 50);
  always @(posedge rclk) if (!rsrst) check(!(pe_write && pe_level == 0), "receive FIFO overflow");

  // ---------------- transmit path (router ingress FIFO model in node clock)
  int occ = 0, tx_seen = 0;
  assign pi_level = (LD+1)'(DEPTH - occ);
  always @(posedge nclk) begin
    if (!nsrst) begin
      int o;
      o = occ;
      if (o > 0 && $urandom_range(99) < 30) o--;
      check(s_tready == (pi_level != 0), "tready follows the ingress FIFO level");
      check(s_fifo_level == pi_level, "fifo_level side-band");
      check(pi_write == (s_tvalid && s_tready), "one FIFO write per accepted beat");
      if (pi_write) begin
        check(pi_data == {s_tlast, s_tdata}, "transmit mapping {tlast,tdata}");
        o++;
        tx_seen++;
      end
      occ <= o;
    end
  end
  always @(negedge nclk) begin
    if (!nsrst) begin
      s_tvalid = (tx_seen < 2000) && ($urandom_range(99) < 70);
      s_tdata  = K'($urandom);
      s_tlast  = $urandom_range(1);
    end
  end

  initial begin
    #2000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (4) @(posedge nclk);
    rsrst = 0; nsrst = 0;
    wait (rx_sent == 3000 && tx_seen == 2000);
    repeat (300) @(posedge nclk);
    check(rx_got == 3000 && rxq.size() == 0, $sformatf("received %0d of 3000", rx_got));
    check(tx_seen == 2000, $sformatf("transmitted %0d of 2000", tx_seen));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
