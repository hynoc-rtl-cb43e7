// hynoc_mesh_llama_tb: injection-bound workload on the default 4 x 4 mesh,
// sized like one row of a LLaMA-3-8B FFN up-projection (4096 inputs, weights
// in 8-bit blocks of 32 with one scale per block, 16-bit activations).
//
// One forward packet carries one output row: routing flit, tag flit, 128
// blocks of (1 scale flit + 8 flits of four packed int8 weights), then 2048
// flits of two packed 16-bit activations: 3201 payload flits.  The worker
// returns routing flit, tag, result (2 payload flits).  Arithmetic is exact
// integer (scale * sum(w * a) per block, summed modulo 2^32); the floating
// point formats of the original workload are replaced by integers of the
// same widths, so packet sizes and traffic are identical.
//
// Phase A, single master: node (0,0) sends one row to each of the 15 other
//   nodes and computes one row itself (16 rows).
// Phase B, four masters: the corner nodes each serve their own 2 x 2
//   quadrant (3 workers + one local row, 16 rows in total).  Every route
//   stays in its quadrant; the test checks that no flit crosses the
//   horizontal or vertical midline, and that phase B is about five times
//   faster than phase A (15 versus 3 forward packets per injection port).
// All 32 results are checked against a reference computed here.
module hynoc_mesh_llama_tb;
  import hynoc_pkg::*;
  localparam int R = 4, C = 4, NODES = R * C, K = 32, LD = 5, IW = 4, NP = 5;
  localparam int P_LOCAL = 0, P_EAST = 1, P_SOUTH = 2, P_WEST = 3, P_NORTH = 4;
  localparam int D_IN = 4096, BLOCKS = D_IN / 32, P_FWD = 1 + BLOCKS * 9 + D_IN / 2;

  typedef logic [K:0] flit_t;

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

  // dimension-ordered route, relative hops (see hynoc_mesh)
  function automatic flit_t route_flit(input int a, input int b);
    int r0, c0, r1, c1, in_port, n, out_port, hop;
    int outs[$];
    flit_t f;
    r0 = a / C; c0 = a % C; r1 = b / C; c1 = b % C;
    while (c0 != c1) begin outs.push_back(c1 > c0 ? P_EAST : P_WEST); c0 += (c1 > c0) ? 1 : -1; end
    while (r0 != r1) begin outs.push_back(r1 > r0 ? P_SOUTH : P_NORTH); r0 += (r1 > r0) ? 1 : -1; end
    outs.push_back(P_LOCAL);
    n = outs.size();
    f = '0;
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

  // ------------------------------------------------------------ data
  function automatic logic [31:0] mix(input int row, input int i, input int salt);
    logic [31:0] x;
    x = 32'(row) * 32'h9E3779B1 ^ 32'(i) * 32'h85EBCA77 ^ 32'(salt) * 32'hC2B2AE3D;
    x ^= x >> 15; x *= 32'h2C1B3C6D; x ^= x >> 12;
    return x;
  endfunction
  function automatic int weight(input int row, input int i);   // int8
    return int'($signed(mix(row, i, 1)[7:0]));
  endfunction
  function automatic int scale(input int row, input int b);    // 16-bit, small
    return int'(mix(row, b, 2)[6:0]) + 1;
  endfunction
  function automatic int act(int i);                          // int16
    return int'($signed(mix(0, i, 3)[15:0]));
  endfunction
  function automatic int ref_row(input int row);
    int acc, blk;
    acc = 0;
    for (int b = 0; b < BLOCKS; b++) begin
      blk = 0;
      for (int j = 0; j < 32; j++) blk += weight(row, b * 32 + j) * act(b * 32 + j);
      acc += scale(row, b) * blk;
    end
    return acc;
  endfunction

  // worker arithmetic on the received flits
  function automatic int decode_row(ref flit_t p[$]);
    int acc, blk, idx, w, a;
    acc = 0;
    for (int b = 0; b < BLOCKS; b++) begin
      blk = 0;
      for (int f = 0; f < 8; f++)
        for (int j = 0; j < 4; j++) begin
          idx = b * 32 + f * 4 + j;
          w = int'($signed(p[1 + b * 9 + 1 + f][8*j +: 8]));
          a = int'($signed(p[1 + BLOCKS * 9 + idx / 2][16*(idx % 2) +: 16]));
          blk += w * a;
        end
      acc += int'(p[1 + b * 9][15:0]) * blk;
    end
    return acc;
  endfunction

  // ------------------------------------------------------------ node models
  flit_t txq [NODES][$];
  flit_t rxbuf [NODES][$];
  int    results_got, row_res [32];
  bit    row_seen [32];

  always @(negedge clk) begin
    for (int n = 0; n < NODES; n++) begin
      s_tvalid[n] = !srst && txq[n].size() > 0;
      {s_tlast[n], s_tdata[n]} = (txq[n].size() > 0) ? txq[n][0] : '0;
      m_tready[n] = !srst;
    end
  end

  always @(posedge clk) if (!srst) begin
    for (int n = 0; n < NODES; n++) begin
      if (s_tvalid[n] && s_tready[n]) void'(txq[n].pop_front());
      if (m_tvalid[n] && m_tready[n]) begin
        rxbuf[n].push_back({m_tlast[n], m_tdata[n]});
        if (m_tlast[n]) on_packet(n);
      end
    end
  end

  int master_of [NODES];
  task automatic on_packet(input int n);
    flit_t p[$];
    int row;
    p = rxbuf[n];
    rxbuf[n].delete();
    row = int'(p[0][K-1:0]);
    if (p.size() == P_FWD) begin
      // worker
      txq[n].push_back(route_flit(n, master_of[n]));
      txq[n].push_back({1'b0, K'(row)});
      txq[n].push_back({1'b1, K'(decode_row(p))});
    end else begin
      check(p.size() == 2 && row < 32, $sformatf("result packet at node %0d", n));
      if (row < 32) begin row_res[row] = int'(p[1][K-1:0]); row_seen[row] = 1; end
      results_got++;
    end
  endtask

  task automatic send_row(input int m, input int w, input int row);
    logic [31:0] f;
    txq[m].push_back(route_flit(m, w));
    txq[m].push_back({1'b0, K'(row)});
    for (int b = 0; b < BLOCKS; b++) begin
      txq[m].push_back({1'b0, 16'h0, 16'(scale(row, b))});
      for (int q = 0; q < 8; q++) begin
        for (int j = 0; j < 4; j++) f[8*j +: 8] = 8'(weight(row, b * 32 + q * 4 + j));
        txq[m].push_back({1'b0, f});
      end
    end
    for (int i = 0; i < D_IN / 2; i++)
      txq[m].push_back({(i == D_IN / 2 - 1) ? 1'b1 : 1'b0, 16'(act(2 * i + 1)), 16'(act(2 * i))});
  endtask

  // ------------------------------------------------------------ link monitor
  int link_flits [NODES][NP];
  for (genvar r = 0; r < R; r++) begin : g_r
    for (genvar c = 0; c < C; c++) begin : g_c
      for (genvar d = 1; d < NP; d++) begin : g_d
        always @(posedge clk)
          if (!srst && dut.g_row[r].g_col[c].u_router.u_base.egress_wen[d]) link_flits[r*C+c][d]++;
      end
    end
  end
  function automatic int midline_flits();
    int t;
    t = 0;
    for (int n = 0; n < NODES; n++) begin
      if (n % C == 1) t += link_flits[n][P_EAST];
      if (n % C == 2) t += link_flits[n][P_WEST];
      if (n / C == 1) t += link_flits[n][P_SOUTH];
      if (n / C == 2) t += link_flits[n][P_NORTH];
    end
    return t;
  endfunction

  initial begin
    #50000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int t0, ta, tb, k;
    int masters[4];
    masters = '{0, 3, 12, 15};
    for (int n = 0; n < NODES; n++) for (int d = 0; d < NP; d++) link_flits[n][d] = 0;
    for (int i = 0; i < 32; i++) row_seen[i] = 0;
    results_got = 0;
    repeat (5) @(posedge clk);
    srst <= 0;
    repeat (5) @(posedge clk);

    // ---------------- phase A: single master, rows 0..15
    for (int n = 0; n < NODES; n++) master_of[n] = 0;
    t0 = cyc;
    for (int w = 1; w < NODES; w++) send_row(0, w, w);
    row_res[0] = ref_row(0); row_seen[0] = 1;          // master's own row
    k = 0;
    while (results_got < 15 && k < 200000) begin @(posedge clk); k++; end
    ta = cyc - t0;
    $display("single master: 16 rows in %0d cycles, link (0,0)->(0,1) busy %0d%%",
             ta, link_flits[0][P_EAST] * 100 / ta);
    check(results_got == 15, "single master: all results returned");
    check(link_flits[0][P_EAST] == 12 * (P_FWD + 1), "single master: (0,0)->(0,1) carries the 12 rows that need an East hop");
    repeat (200) @(posedge clk);

    // ---------------- phase B: four masters, rows 16..31
    for (int n = 0; n < NODES; n++) begin
      for (int d = 0; d < NP; d++) link_flits[n][d] = 0;
      master_of[n] = ((n / C) < 2 ? 0 : 12) + ((n % C) < 2 ? 0 : 3);
    end
    results_got = 0;
    t0 = cyc;
    for (int q = 0; q < 4; q++) begin
      int m, row;
      m = masters[q];
      row = 16 + q * 4;
      for (int n = 0; n < NODES; n++)
        if (master_of[n] == m && n != m) begin
          row++;
          send_row(m, n, row);
        end
      row_res[16 + q * 4] = ref_row(16 + q * 4); row_seen[16 + q * 4] = 1;
    end
    k = 0;
    while (results_got < 12 && k < 200000) begin @(posedge clk); k++; end
    tb = cyc - t0;
    $display("four masters: 16 rows in %0d cycles, speed-up %0d.%02d", tb, ta / tb, (ta * 100 / tb) % 100);
    check(results_got == 12, "four masters: all results returned");
    check(midline_flits() == 0, $sformatf("four masters: %0d flits crossed a quadrant boundary", midline_flits()));
    check(ta * 10 >= tb * 45 && ta * 10 <= tb * 55, "four masters: speed-up between 4.5 and 5.5");

    for (int i = 0; i < 32; i++)
      check(row_seen[i] && row_res[i] == ref_row(i), $sformatf("row %0d result %0d expected %0d", i, row_res[i], ref_row(i)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
