// hynoc_egress_tb: self-checking test of one egress port (5-port router:
// four competing ingress ports, 32-bit payload, 32-entry downstream FIFO).
// Four behavioural ingress models raise a request, wait for their grant,
// then send a packet one flit per cycle while the almost-full bit is low and
// drop the request after the stop flit.  A downstream FIFO model drains at a
// random rate and returns its free entries.  Checks: packets arrive whole
// and unmixed, in order per source, with every flit; the FIFO never
// overflows; at most one grant at a time; the grant on an idle egress
// arrives two cycles after the request (arbiter + output register);
// almost-full equals the registered grant when free entries <= 5, and the
// back-pressure stall is seen.
module hynoc_egress_tb;
  localparam int K = 32, LD = 5, N = 5, NE = N - 1, DEPTH = 1 << LD;

  logic clk = 0, srst = 1;
  logic [NE-1:0] req, grant, afull, write;
  logic [K:0] data [NE];
  logic wen;
  logic [K:0] wdata;
  logic [LD:0] wlevel;
  int checks = 0, failures = 0;
  int n_afull = 0, n_contention = 0;

  always #5 clk = ~clk;

  hynoc_egress #(.PAYLOAD_WIDTH(K), .LOG2_FIFO_DEPTH(LD), .NB_PORTS(N)) dut (
    .clk, .srst, .from_ingress_req(req), .to_ingress_grant(grant), .to_ingress_afull(afull),
    .from_ingress_write(write), .from_ingress_data(data),
    .egress_wen(wen), .egress_wdata(wdata), .egress_wlevel(wlevel));

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // ---------------- ingress models; flit = {stop, src[3:0], pkt[11:0], seq[15:0]}
  int st [NE], pkt [NE], seq [NE], len [NE], wait_cnt [NE];
  logic [NE-1:0] grant_q;
  always @(posedge clk) begin
    if (srst) begin
      req <= '0; write <= '0; grant_q <= '0;
      for (int i = 0; i < NE; i++) begin st[i] <= 0; pkt[i] <= 0; seq[i] <= 0; data[i] <= '0; wait_cnt[i] <= 0; end
    end else begin
      grant_q <= grant;
      for (int i = 0; i < NE; i++) begin
        write[i] <= 1'b0;
        case (st[i])
          0: if ($urandom_range(99) < 30) begin
               req[i] <= 1'b1; st[i] <= 1; len[i] <= $urandom_range(1, 40); seq[i] <= 0;
               wait_cnt[i] <= 0;
             end
          1: begin
               wait_cnt[i] <= wait_cnt[i] + 1;
               if (grant[i] && !grant_q[i]) st[i] <= 2;
             end
          2: if (!afull[i]) begin
               write[i] <= 1'b1;
               data[i]  <= {(seq[i] == len[i] - 1) ? 1'b1 : 1'b0, 4'(i), 12'(pkt[i]), 16'(seq[i])};
               seq[i]   <= seq[i] + 1;
               if (seq[i] == len[i] - 1) begin
                 req[i] <= 1'b0; st[i] <= 3; pkt[i] <= pkt[i] + 1;
               end
             end
          default: st[i] <= 0;   // one idle cycle with the request low
        endcase
      end
    end
  end

  // ---------------- downstream FIFO model
  int occ;
  assign wlevel = (LD+1)'(DEPTH - occ);
  int cur_src, exp_seq [NE], exp_pkt [NE];
  bit in_pkt;
  always @(posedge clk) begin
    if (srst) begin
      occ <= 0; in_pkt <= 0;
      for (int i = 0; i < NE; i++) begin exp_seq[i] <= 0; exp_pkt[i] <= 0; end
    end else begin
      int o;
      o = occ;
      if (o > 0 && $urandom_range(99) < 45) o--;
      if (wen) begin
        int s;
        s = int'(wdata[31:28]);
        check(occ < DEPTH, "downstream FIFO overflow");
        o++;
        if (!in_pkt) begin cur_src <= s; in_pkt <= 1; end
        else check(s == cur_src, "packets interleaved");
        check(int'(wdata[27:16]) == (exp_pkt[s] % 4096) && int'(wdata[15:0]) == exp_seq[s],
              $sformatf("src %0d pkt %0d seq %0d expected %0d/%0d", s, wdata[27:16], wdata[15:0],
                        exp_pkt[s], exp_seq[s]));
        if (wdata[K]) begin in_pkt <= 0; exp_seq[s] <= 0; exp_pkt[s] <= exp_pkt[s] + 1; end
        else exp_seq[s] <= exp_seq[s] + 1;
      end
      occ <= o;
    end
  end

  // ---------------- protocol checks
  always @(posedge clk) if (!srst) begin
    check($onehot0(grant), "more than one grant");
    check(afull == ($past(dut.grant) & {NE{$past(wlevel) <= 5}}), "almost-full rule");
    if (afull != '0) n_afull++;
    if ($countones(req) > 1) n_contention++;
  end

  // grant latency on an idle egress: a lone request set at edge t must see
  // its grant from edge t+2 on
  logic [NE-1:0] lat_e1, lat_e2;
  int n_lat = 0;
  always @(posedge clk) begin
    if (srst) begin lat_e1 <= '0; lat_e2 <= '0; end
    else begin
      lat_e1 <= '0;
      if ($onehot(req) && $past(req) == '0 && dut.grant == '0) lat_e1 <= req;
      lat_e2 <= lat_e1;
      if (lat_e2 != '0) begin
        check((grant & lat_e2) == lat_e2, "grant latency on idle egress is not 2 cycles");
        n_lat++;
      end
    end
  end

  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int served_total;
    repeat (4) @(posedge clk);
    srst <= 0;
    repeat (20000) @(posedge clk);
    served_total = 0;
    for (int i = 0; i < NE; i++) begin
      check(exp_pkt[i] > 20, $sformatf("source %0d delivered only %0d packets", i, exp_pkt[i]));
      served_total += exp_pkt[i];
    end
    check(n_afull > 0, "almost-full never raised");
    check(n_contention > 0, "no contention seen");
    check(n_lat > 0, "idle-egress grant latency never measured");
    $display("packets=%0d afull_cycles=%0d contention_cycles=%0d", served_total, n_afull, n_contention);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
