// dclkfifolut_tb: self-checking test of the dual-clock LUT FIFO.
// Part 1 runs both sides on the same clock and checks the crossing latency:
// a word written into an empty FIFO becomes readable 3 cycles later than in
// the single-clock FIFO (one gray register + two synchroniser stages).
// Part 2 runs unrelated write and read clocks with random traffic and checks
// data order, no loss, and that the levels stay conservative.
module dclkfifolut_tb;
  localparam int W = 10, LD = 3, DEPTH = 1 << LD;
  logic wclk, rclk;
  logic wrst = 1, rrst = 1;
  logic wen = 0, ren = 0;
  logic [W-1:0] wdata = '0, rdata;
  logic [LD:0] wlevel, rlevel;
  logic full, rempty;
  int checks = 0, failures = 0;
  logic [W-1:0] model[$];
  bit same_clock = 1;
  logic clk0 = 0, clkw = 0, clkr = 0;
  int written = 0, readcnt = 0;

  always #5 clk0 = ~clk0;
  always #7 clkw = ~clkw;
  always #11 clkr = ~clkr;
  assign wclk = same_clock ? clk0 : clkw;
  assign rclk = same_clock ? clk0 : clkr;

  dclkfifolut #(.WIDTH(W), .LOG2_DEPTH(LD)) dut (.*);

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // read side of part 2
  initial begin : reader
    @(negedge rrst);
    wait (!same_clock);
    forever begin
      @(negedge rclk);
      check(int'(rlevel) <= model.size(), "rlevel never above true occupancy");
      ren = !rempty && ($urandom_range(99) < 60);
      if (ren) begin
        check(model.size() > 0 && rdata == model[0], "read data order (async clocks)");
        if (model.size() > 0) void'(model.pop_front());
        readcnt++;
      end
    end
  end

  initial begin
    int lat;
    repeat (4) @(posedge clk0);
    wrst <= 0; rrst <= 0;
    @(negedge clk0);
    check(rempty && wlevel == DEPTH, "reset state");
    wen = 1; wdata = 10'h2c3;
    @(posedge clk0);
    @(negedge clk0); wen = 0;
    lat = 1;
    while (rempty && lat < 20) begin @(negedge clk0); lat++; end
    check(lat == 4, $sformatf("crossing latency %0d edges, expected 4", lat));
    check(rdata == 10'h2c3 && rlevel == 1, "first word");
    ren = 1; @(posedge clk0); @(negedge clk0); ren = 0;
    repeat (4) @(negedge clk0);
    check(rempty && wlevel == DEPTH, "empty again, write level restored");
    // part 2: asynchronous clocks
    same_clock = 0;
    for (int i = 0; i < 1500; i++) begin
      @(negedge wclk);
      wen = !full && ($urandom_range(99) < 55);
      wdata = W'($urandom);
      check(wlevel <= DEPTH, "wlevel range");
      if (wen) begin model.push_back(wdata); written++; end
    end
    @(negedge wclk); wen = 0;
    repeat (200) @(posedge rclk);
    check(written == readcnt && model.size() == 0, $sformatf("all %0d words read (%0d)", written, readcnt));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
