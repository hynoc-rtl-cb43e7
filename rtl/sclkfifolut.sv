// sclkfifolut: single-clock FIFO held in a distributed (LUT) RAM array.
//
// Used as the ingress buffer when the router is built in single-clock mode.
// The storage is an array of 2**LOG2_DEPTH words with an asynchronous read
// port, so the word at the head is always present on rdata while rempty is
// low (first-word fall-through); ren pops it at the next rising edge.  A
// write lands at the rising edge where wen is high and is visible to the
// reader in the following cycle.  Pointers are LOG2_DEPTH+1 bits so that a
// full and an empty FIFO differ.
//
// Levels: wlevel is the number of free entries (what the writer may still
// send), rlevel the number of stored entries; both are LOG2_DEPTH+1 bits,
// matching the [LOG2_FIFO_DEPTH:0] level buses of the published router.  The
// published design only names this FIFO and says it maps to LUT RAM; the
// pointer scheme and the free-entry meaning of wlevel are this design's
// choices.  Writing into a full FIFO or reading an empty one is a protocol
// error that the assertions below report; such a write is dropped.
module sclkfifolut #(
  parameter int unsigned WIDTH      = 33,
  parameter int unsigned LOG2_DEPTH = 5
) (
  input  logic                  clk,
  input  logic                  srst,
  // write side
  input  logic                  wen,
  input  logic [WIDTH-1:0]      wdata,
  output logic [LOG2_DEPTH:0]   wlevel,
  output logic                  full,
  // read side
  input  logic                  ren,
  output logic [WIDTH-1:0]      rdata,
  output logic                  rempty,
  output logic [LOG2_DEPTH:0]   rlevel
);
  localparam int unsigned DEPTH = 1 << LOG2_DEPTH;

  logic [WIDTH-1:0]    mem [DEPTH];
  logic [LOG2_DEPTH:0] wptr, rptr, count;

  assign count  = wptr - rptr;
  assign full   = count[LOG2_DEPTH];
  assign rempty = (count == '0);
  assign wlevel = (LOG2_DEPTH+1)'(DEPTH) - count;
  assign rlevel = count;
  assign rdata  = mem[rptr[LOG2_DEPTH-1:0]];

  always_ff @(posedge clk) begin
    if (wen && !full) mem[wptr[LOG2_DEPTH-1:0]] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (srst) begin
      wptr <= '0;
      rptr <= '0;
    end else begin
      if (wen && !full)    wptr <= wptr + 1'b1;
      if (ren && !rempty)  rptr <= rptr + 1'b1;
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (srst) !(wen && full));
  a_no_underflow: assert property (@(posedge clk) disable iff (srst) !(ren && rempty));
endmodule
