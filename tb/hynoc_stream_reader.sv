// hynoc_stream_reader: behavioural packet sink and checker for router
// testbenches, the counterpart of hynoc_stream_writer.
//
// Looks like the ingress FIFO of a neighbour to the router egress it is
// connected to: it takes write/flit, keeps up to 2**LOG2_FIFO_DEPTH flits
// and reports its free entries on fifo_level.  A write into a full buffer
// is an error (the egress flow control must prevent it).  Flits are drained
// at random, DRAIN_PCT percent of the cycles, so back-pressure happens.
// Every drained packet is checked: the header flit must name MY_ID or a
// destination enabled in accept; its seq must be the next one for its
// (source, destination) pair; it must carry exactly len data flits, equal
// to stream_word(src, d, seq, i), with the stop bit on the last one only.
// The paper only names a stream reader as a simulation utility that checks
// the packets leaving a router; the buffering, drain pattern and checks below
// are this design's own choices.
module hynoc_stream_reader #(
  parameter int unsigned PAYLOAD_WIDTH   = 32,
  parameter int unsigned LOG2_FIFO_DEPTH = 5,
  parameter int unsigned MY_ID           = 0,
  parameter int unsigned DRAIN_PCT       = 60
) (
  input  logic                       clk,
  input  logic                       srst,
  input  logic                       write,
  input  logic [PAYLOAD_WIDTH:0]     data,
  output logic [LOG2_FIFO_DEPTH:0]   fifo_level,
  input  logic [15:0]                accept,
  output int                         packets,
  output int                         errors
);
  localparam int K = PAYLOAD_WIDTH;
  localparam int DEPTH = 2 ** LOG2_FIFO_DEPTH;

  function automatic logic [K-1:0] stream_word(input int s, input int d, input int seq, input int i);
    logic [31:0] x;
    x = 32'(s) * 32'h9E3779B1 ^ 32'(d) * 32'h7F4A7C15 ^ 32'(seq) * 32'h94D049BB ^ 32'(i) * 32'hBF58476D;
    x ^= x >> 16;
    x *= 32'h85EBCA6B;
    x ^= x >> 13;
    return K'(x);
  endfunction

  logic [K:0] buf_q [$];
  int  exp_seq [16][16];
  bit  in_pkt;
  int  src, dst, len, seq, idx;

  initial begin
    packets = 0;
    errors  = 0;
    in_pkt  = 0;
    for (int s = 0; s < 16; s++) for (int d = 0; d < 16; d++) exp_seq[s][d] = 0;
  end

  task automatic error(input string msg);
    errors++;
    $display("FAIL @%0t: reader %0d: %s", $time, MY_ID, msg);
  endtask

  assign fifo_level = (LOG2_FIFO_DEPTH + 1)'(DEPTH - buf_q.size());

  always @(posedge clk) if (!srst) begin
    logic [K:0] f;
    if ($urandom_range(99) < DRAIN_PCT && buf_q.size() > 0) begin
      f = buf_q.pop_front();
      if (!in_pkt) begin
        src = int'(f[K-1 -: 4]);
        dst = int'(f[K-5 -: 4]);
        len = int'(f[23:16]);
        seq = int'(f[15:0]);
        idx = 0;
        if (dst != int'(MY_ID) && !accept[dst]) error($sformatf("packet for %0d delivered here", dst));
        if (seq != exp_seq[src][dst]) error($sformatf("src %0d dst %0d seq %0d, expected %0d", src, dst, seq, exp_seq[src][dst]));
        exp_seq[src][dst] = seq + 1;
        if (f[K] != (len == 0)) error("stop bit on the header flit");
        if (len == 0) packets++;
        else in_pkt = 1;
      end else begin
        if (f[K-1:0] != stream_word(src, dst, seq, idx)) error($sformatf("data flit %0d of src %0d seq %0d", idx, src, seq));
        if (f[K] != (idx == len - 1)) error("stop bit misplaced");
        idx++;
        if (f[K] || idx > len) begin
          in_pkt = 0;
          packets++;
        end
      end
    end
    if (write) begin
      if (buf_q.size() >= DEPTH) error("write into a full buffer");
      else buf_q.push_back(data);
    end
  end
endmodule
