// hynoc_stream_writer: behavioural traffic generator for router testbenches.
//
// Writes NB_PACKETS random packets into one router ingress port, as the
// upstream egress of a neighbour would: write strobe plus flit, one flit per
// clock, only while the port reports at least 4 free FIFO entries (own
// margin: the level seen by the writer lags its own writes by a few cycles).  Each packet picks a random destination d
// among those enabled in dest_en and is built as:
//   route_a[d], then route_b[d] when two_flits[d] (chained routing flit),
//   header {src[3:0], d[3:0], len[7:0], seq[15:0]},
//   len data flits whose value is stream_word(src, d, seq, i),
// the stop bit on the last flit.  seq counts packets per destination, so a
// stream_reader can check order, length and contents without sharing state
// with the writer.  sent[d] counts the packets written per destination and
// done rises when all are written.
// The paper only names a stream writer as a simulation utility that feeds
// random packets to a router; the interface, packet format and pacing below
// are this design's own choices.
module hynoc_stream_writer #(
  parameter int unsigned PAYLOAD_WIDTH   = 32,
  parameter int unsigned LOG2_FIFO_DEPTH = 5,
  parameter int unsigned SRC_ID          = 0,
  parameter int unsigned NB_DEST         = 6,
  parameter int unsigned NB_PACKETS      = 100,
  parameter int unsigned MAX_LEN         = 12
) (
  input  logic                       clk,
  input  logic                       srst,
  input  logic [PAYLOAD_WIDTH:0]     route_a [NB_DEST],
  input  logic [PAYLOAD_WIDTH:0]     route_b [NB_DEST],
  input  logic [NB_DEST-1:0]         two_flits,
  input  logic [NB_DEST-1:0]         dest_en,
  output logic                       write,
  output logic [PAYLOAD_WIDTH:0]     data,
  input  logic [LOG2_FIFO_DEPTH:0]   fifo_level,
  output int                         sent [NB_DEST],
  output logic                       done
);
  localparam int K = PAYLOAD_WIDTH;

  function automatic logic [K-1:0] stream_word(input int s, input int d, input int seq, input int i);
    logic [31:0] x;
    x = 32'(s) * 32'h9E3779B1 ^ 32'(d) * 32'h7F4A7C15 ^ 32'(seq) * 32'h94D049BB ^ 32'(i) * 32'hBF58476D;
    x ^= x >> 16;
    x *= 32'h85EBCA6B;
    x ^= x >> 13;
    return K'(x);
  endfunction

  logic [K:0] q [$];
  int         seq [NB_DEST];
  int         npkt;

  initial begin
    write = 1'b0;
    data  = '0;
    done  = 1'b0;
    npkt  = 0;
    for (int d = 0; d < NB_DEST; d++) begin seq[d] = 0; sent[d] = 0; end
  end

  always @(posedge clk) begin
    if (srst) begin
      write <= 1'b0;
    end else begin
      if (q.size() == 0 && npkt < int'(NB_PACKETS) && dest_en != '0) begin
        int d, len;
        do d = $urandom_range(NB_DEST - 1); while (!dest_en[d]);
        len = $urandom_range(MAX_LEN);
        q.push_back(route_a[d]);
        if (two_flits[d]) q.push_back(route_b[d]);
        q.push_back({(len == 0) ? 1'b1 : 1'b0, 4'(SRC_ID), 4'(d), 8'(len), 16'(seq[d])});
        for (int i = 0; i < len; i++)
          q.push_back({(i == len - 1) ? 1'b1 : 1'b0, stream_word(SRC_ID, d, seq[d], i)});
        seq[d]++;
        sent[d]++;
        npkt++;
      end
      if (q.size() > 0 && fifo_level >= 4) begin
        write <= 1'b1;
        data  <= q.pop_front();
      end else begin
        write <= 1'b0;
      end
      done <= (npkt == int'(NB_PACKETS)) && q.size() == 0;
    end
  end
endmodule
