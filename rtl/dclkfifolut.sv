// dclkfifolut: dual-clock FIFO held in a distributed (LUT) RAM array.
//
// Each HyNoC ingress port buffers incoming flits in this FIFO, which also
// moves them from the upstream port's clock (wclk) into the router clock
// (rclk).  The classic gray-code scheme is used: each side keeps a binary
// pointer, publishes it as a registered gray code, and the other side samples
// that gray code through SYNC_STAGES flip-flops before comparing.  A word
// written at a wclk edge therefore becomes visible to the reader 1 + SYNC_STAGES
// rclk cycles later than in the single-clock FIFO (3 cycles with the default
// 2 stages); the published per-hop latency difference between dual- and
// single-clock routers is 3 cycles, which this default reproduces.
//
// The read port is asynchronous (first-word fall-through, as LUT RAM allows):
// rdata shows the head word while rempty is low and ren pops it.  wlevel
// (write domain) counts free entries and rlevel (read domain) stored entries,
// both LOG2_DEPTH+1 bits; each is computed against a synchronised, hence
// conservative, copy of the other side's pointer.  Resets are synchronous,
// one per clock domain, and must overlap.  The FIFO itself is named but not
// detailed in the published design; the synchroniser depth is chosen here.
module dclkfifolut #(
  parameter int unsigned WIDTH       = 33,
  parameter int unsigned LOG2_DEPTH  = 5,
  parameter int unsigned SYNC_STAGES = 2
) (
  // write side
  input  logic                  wclk,
  input  logic                  wrst,
  input  logic                  wen,
  input  logic [WIDTH-1:0]      wdata,
  output logic [LOG2_DEPTH:0]   wlevel,
  output logic                  full,
  // read side
  input  logic                  rclk,
  input  logic                  rrst,
  input  logic                  ren,
  output logic [WIDTH-1:0]      rdata,
  output logic                  rempty,
  output logic [LOG2_DEPTH:0]   rlevel
);
  localparam int unsigned DEPTH = 1 << LOG2_DEPTH;
  localparam int unsigned PW    = LOG2_DEPTH + 1;

  function automatic logic [PW-1:0] bin2gray(input logic [PW-1:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [PW-1:0] gray2bin(input logic [PW-1:0] g);
    logic [PW-1:0] b;
    b[PW-1] = g[PW-1];
    for (int i = PW - 2; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  logic [WIDTH-1:0] mem [DEPTH];

  // write domain
  logic [PW-1:0] wptr, wptr_gray;
  logic [PW-1:0] rgray_sync [SYNC_STAGES];
  logic [PW-1:0] rptr_w, wcount;

  // read domain
  logic [PW-1:0] rptr, rptr_gray;
  logic [PW-1:0] wgray_sync [SYNC_STAGES];
  logic [PW-1:0] wptr_r, rcount;

  assign rptr_w = gray2bin(rgray_sync[SYNC_STAGES-1]);
  assign wcount = wptr - rptr_w;
  assign full   = wcount[PW-1];
  assign wlevel = PW'(DEPTH) - wcount;

  assign wptr_r = gray2bin(wgray_sync[SYNC_STAGES-1]);
  assign rcount = wptr_r - rptr;
  assign rempty = (rcount == '0);
  assign rlevel = rcount;
  assign rdata  = mem[rptr[LOG2_DEPTH-1:0]];

  always_ff @(posedge wclk) begin
    if (wen && !full) mem[wptr[LOG2_DEPTH-1:0]] <= wdata;
  end

  always_ff @(posedge wclk) begin
    if (wrst) begin
      wptr      <= '0;
      wptr_gray <= '0;
      for (int i = 0; i < SYNC_STAGES; i++) rgray_sync[i] <= '0;
    end else begin
      if (wen && !full) wptr <= wptr + 1'b1;
      wptr_gray     <= bin2gray(wptr);
      rgray_sync[0] <= rptr_gray;
      for (int i = 1; i < SYNC_STAGES; i++) rgray_sync[i] <= rgray_sync[i-1];
    end
  end

  always_ff @(posedge rclk) begin
    if (rrst) begin
      rptr      <= '0;
      rptr_gray <= '0;
      for (int i = 0; i < SYNC_STAGES; i++) wgray_sync[i] <= '0;
    end else begin
      if (ren && !rempty) rptr <= rptr + 1'b1;
      rptr_gray     <= bin2gray(rptr);
      wgray_sync[0] <= wptr_gray;
      for (int i = 1; i < SYNC_STAGES; i++) wgray_sync[i] <= wgray_sync[i-1];
    end
  end

  a_no_overflow:  assert property (@(posedge wclk) disable iff (wrst) !(wen && full));
  a_no_underflow: assert property (@(posedge rclk) disable iff (rrst) !(ren && rempty));
endmodule
