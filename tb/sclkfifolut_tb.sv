// sclkfifolut_tb: self-checking test of the single-clock LUT FIFO.
// Random writes and reads (never writing when full, never reading when empty)
// are checked against a queue model: data order, empty/full flags, both level
// outputs, and the one-cycle write-to-read visibility.
module sclkfifolut_tb;
  localparam int W = 12, LD = 3, DEPTH = 1 << LD;
  logic clk = 0, srst = 1;
  logic wen = 0, ren = 0;
  logic [W-1:0] wdata = '0, rdata;
  logic [LD:0] wlevel, rlevel;
  logic full, rempty;
  int checks = 0, failures = 0;
  logic [W-1:0] model[$];

  sclkfifolut #(.WIDTH(W), .LOG2_DEPTH(LD)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    srst <= 0;
    @(negedge clk);
    check(rempty && !full && wlevel == DEPTH && rlevel == 0, "reset state");
    // one write, visible one cycle later
    wen = 1; wdata = 12'h5a5;
    @(posedge clk); model.push_back(12'h5a5);
    @(negedge clk); wen = 0;
    check(!rempty && rdata == 12'h5a5 && rlevel == 1, "write visible after one edge");
    for (int cyc = 0; cyc < 4000; cyc++) begin
      // phase 1 (bias toward filling), phase 2 (toward draining)
      int pw;
      pw = (cyc % 400 < 200) ? 80 : 30;
      wen   = ($urandom_range(99) < pw) && !full;
      wdata = W'($urandom);
      ren   = ($urandom_range(99) < 100 - pw) && !rempty;
      if (ren) check(model.size() > 0 && rdata == model[0], "read data order");
      @(posedge clk);
      if (ren) void'(model.pop_front());
      if (wen) model.push_back(wdata);
      @(negedge clk);
      check(rlevel == model.size(), "rlevel");
      check(wlevel == DEPTH - model.size(), "wlevel");
      check(full == (model.size() == DEPTH), "full flag");
      check(rempty == (model.size() == 0), "empty flag");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
