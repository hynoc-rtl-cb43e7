// prra_tb: self-checking test of the parallel round-robin arbiter, with and
// without the pipeline stage.  Each of WIDTH requesters holds its request for
// a random "packet" length once granted, then drops it for a random gap.
// A cycle-accurate reference model (independent scan, not the tables)
// predicts grant and state every cycle.  The model grants a request seen in
// cycle t at the edge ending cycle t (one-cycle latency), or one cycle later
// with PIPELINE=1, and keeps a grant while its request is held, so these
// latencies and the grant locking are checked on every cycle.  A second
// phase keeps every requester busy and checks that each one is served
// regularly (no starvation).
module prra_tb;
  localparam int W = 4;
  logic clk = 0, srst = 1;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  logic [W-1:0] req [2];
  logic [W-1:0] grant [2];
  logic [1:0]   state [2];

  prra #(.WIDTH(W), .PIPELINE(1'b0)) u0 (.clk, .srst, .req(req[0]), .grant(grant[0]), .state(state[0]));
  prra #(.WIDTH(W), .PIPELINE(1'b1)) u1 (.clk, .srst, .req(req[1]), .grant(grant[1]), .state(state[1]));

  // reference model
  logic [W-1:0] m_grant [2];
  int           m_state [2];
  logic [W-1:0] m_req_q [2];
  int served [2][W];

  function automatic int next_rr(input logic [W-1:0] r, input int st);
    for (int s = 1; s <= W; s++) if (r[(st + s) % W]) return (st + s) % W;
    return st;
  endfunction

  always @(posedge clk) begin
    if (srst) begin
      for (int p = 0; p < 2; p++) begin m_grant[p] <= '0; m_state[p] <= 0; m_req_q[p] <= '0; end
    end else begin
      for (int p = 0; p < 2; p++) begin
        logic [W-1:0] r;
        r = (p == 0) ? req[p] : m_req_q[p];
        m_req_q[p] <= req[p];
        if ((m_grant[p] & r) == '0) begin
          int n;
          n = next_rr(r, m_state[p]);
          m_state[p] <= n;
          m_grant[p] <= (r == '0) ? '0 : W'(1) << n;
          if (r != '0) served[p][n]++;
        end
      end
    end
  end

  always @(negedge clk) if (!srst) begin
    for (int p = 0; p < 2; p++) begin
      check(grant[p] == m_grant[p], $sformatf("grant p%0d %b vs model %b", p, grant[p], m_grant[p]));
      check(int'(state[p]) == m_state[p], $sformatf("state p%0d", p));
    end
  end

  // requesters
  int len [2][W], gap [2][W];
  logic [W-1:0] busy_mode;
  initial busy_mode = '0;

  always @(posedge clk) begin
    if (srst) begin
      for (int p = 0; p < 2; p++) begin
        req[p] <= '0;
        for (int i = 0; i < W; i++) begin len[p][i] <= 0; gap[p][i] <= 0; end
      end
    end else begin
      for (int p = 0; p < 2; p++) for (int i = 0; i < W; i++) begin
        if (req[p][i]) begin
          if (grant[p][i]) begin
            if (len[p][i] == 0) begin
              req[p][i] <= 1'b0;
              gap[p][i] <= busy_mode[0] ? 1 : $urandom_range(6);
            end else len[p][i] <= len[p][i] - 1;
          end
        end else if (gap[p][i] == 0) begin
          req[p][i] <= 1'b1;
          len[p][i] <= $urandom_range(5);
        end else gap[p][i] <= gap[p][i] - 1;
      end
    end
  end

  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    srst <= 0;
    repeat (2000) @(posedge clk);
    busy_mode = 1'b1;
    for (int p = 0; p < 2; p++) for (int i = 0; i < W; i++) served[p][i] = 0;
    repeat (2000) @(posedge clk);
    for (int p = 0; p < 2; p++) for (int i = 0; i < W; i++)
      check(served[p][i] > 50, $sformatf("requester %0d served %0d times (pipe=%0d)", i, served[p][i], p));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
