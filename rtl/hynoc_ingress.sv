// hynoc_ingress: one ingress port of a HyNoC router.
//
// Incoming flits are written, in the upstream clock domain, into a LUT-RAM
// FIFO of 2**LOG2_FIFO_DEPTH entries (dual-clock, or single-clock when
// SINGLE_CLOCK_ROUTER=1).  A controller in the router clock domain reads the
// head of the FIFO and switches each packet through the router in two phases:
//
//  * Circuit phase.  The head of a packet is a routing flit.  Its protocol
//    field selects unicast (one hop field of ceil(log2(N-1)) bits) or
//    multicast (one mask of N-1 bits); its index field selects which hop
//    field applies here.  The controller raises the matching request bit(s)
//    among the N-1 egress ports this ingress can reach (bit h = relative
//    egress h, i.e. physical port (PORT_ID + 1 + h) mod N) and waits until
//    every requested egress has granted.  A multicast packet acquires its
//    egress ports one after the other in increasing physical port order
//    (each request raised once the previous one is granted) and holds them;
//    since every ingress uses the same order, two multicast packets cannot
//    deadlock inside the router.  Grants are taken on their rising
//    edge, so a grant left over from the previous packet is never mistaken
//    for a new one.  The routing flit is then popped: if its index is zero
//    it is consumed here, otherwise it is forwarded with the index decreased
//    by one.
//  * Data phase.  The following flits are copied one per cycle to the
//    granted egress port(s) until the flit with the stop bit has been sent;
//    then all requests are dropped, which releases the path.
//
// A copy stalls while the FIFO is empty or while any granted egress reports
// that its downstream buffer is almost full.  Packets whose routing flit has
// the stop bit set, carries the reserved XY or the forbidden protocol code,
// an unknown code, multicast when multicast is disabled, an empty multicast
// mask or an index beyond the hop fields are flushed: popped up to and
// including their stop flit and dropped.
//
// Interface: the write side (ingress_*) is what the upstream egress drives;
// ingress_wlevel reports free FIFO entries back to it.  The router side
// gives one request bit per reachable egress, takes a grant and an
// almost-full bit per egress, and drives one registered data/write pair
// that is shared by all egresses (each egress picks the ingress it granted).
// Requests, data and write are registered outputs.
//
// The two phases, the index countdown, the rejection rules and the request /
// grant / almost-full signal set follow the published ingress design; the
// state encoding, the rising-edge use of grants, the ordered acquisition of
// multicast ports and the exact flush rules are choices of this
// implementation.
module hynoc_ingress
  import hynoc_pkg::*;
#(
  parameter int unsigned PAYLOAD_WIDTH        = 32,
  parameter int unsigned LOG2_FIFO_DEPTH      = 5,
  parameter int unsigned NB_PORTS             = 5,
  parameter int unsigned PORT_ID              = 0,
  parameter int unsigned INDEX_WIDTH          = 4,
  parameter bit          ENABLE_MCAST_ROUTING = 1'b1,
  parameter bit          SINGLE_CLOCK_ROUTER  = 1'b0
) (
  // upstream (write) side of the FIFO
  input  logic                        ingress_clk,
  input  logic                        ingress_srst,
  input  logic                        ingress_wen,
  input  logic [PAYLOAD_WIDTH:0]      ingress_wdata,
  output logic [LOG2_FIFO_DEPTH:0]    ingress_wlevel,
  // router side
  input  logic                        router_clk,
  input  logic                        router_srst,
  output logic [NB_PORTS-2:0]         to_egress_request,
  input  logic [NB_PORTS-2:0]         from_egress_grant,
  input  logic [NB_PORTS-2:0]         from_egress_afull,
  output logic                        to_egress_write,
  output logic [PAYLOAD_WIDTH:0]      to_egress_data
);
  localparam int unsigned NE        = NB_PORTS - 1;
  localparam int unsigned HB        = hop_bits(NB_PORTS);
  localparam int unsigned MB        = mcast_hop_bits(NB_PORTS);
  localparam int unsigned UC_HOPS   = max_hops(PAYLOAD_WIDTH, INDEX_WIDTH, HB);
  localparam int unsigned MC_HOPS   = max_hops(PAYLOAD_WIDTH, INDEX_WIDTH, MB);
  localparam int unsigned K         = PAYLOAD_WIDTH;

  if (!(NB_PORTS == 3 || NB_PORTS == 5 || NB_PORTS == 9)) begin : g_bad_ports
    $error("hynoc_ingress: NB_PORTS must be 3, 5 or 9 (2**ceil(log2(N-1)) + 1 == N)");
  end
  if (UC_HOPS < 1 || (ENABLE_MCAST_ROUTING && MC_HOPS < 1)) begin : g_bad_width
    $error("hynoc_ingress: routing flit too narrow for one hop field");
  end

  // ------------------------------------------------------------------ FIFO
  logic                 fifo_ren, fifo_rempty;
  logic [K:0]           fifo_rdata;
  logic [LOG2_FIFO_DEPTH:0] fifo_rlevel;
  logic                 fifo_full;

  if (SINGLE_CLOCK_ROUTER) begin : g_sclk
    sclkfifolut #(.WIDTH(K + 1), .LOG2_DEPTH(LOG2_FIFO_DEPTH)) u_fifo (
      .clk   (router_clk),
      .srst  (router_srst),
      .wen   (ingress_wen),
      .wdata (ingress_wdata),
      .wlevel(ingress_wlevel),
      .full  (fifo_full),
      .ren   (fifo_ren),
      .rdata (fifo_rdata),
      .rempty(fifo_rempty),
      .rlevel(fifo_rlevel)
    );
  end else begin : g_dclk
    dclkfifolut #(.WIDTH(K + 1), .LOG2_DEPTH(LOG2_FIFO_DEPTH)) u_fifo (
      .wclk  (ingress_clk),
      .wrst  (ingress_srst),
      .wen   (ingress_wen),
      .wdata (ingress_wdata),
      .wlevel(ingress_wlevel),
      .full  (fifo_full),
      .rclk  (router_clk),
      .rrst  (router_srst),
      .ren   (fifo_ren),
      .rdata (fifo_rdata),
      .rempty(fifo_rempty),
      .rlevel(fifo_rlevel)
    );
  end

  // ------------------------------------------------------- header decoding
  logic                   head_stop;
  logic [3:0]             head_proto;
  logic [INDEX_WIDTH-1:0] head_index;
  logic [HB-1:0]          uc_hop;
  logic [MB-1:0]          mc_mask;
  logic [NE-1:0]          decoded_req;
  logic                   header_ok;
  logic [K:0]             header_next;   // routing flit with index counted down

  assign head_stop  = fifo_rdata[K];
  assign head_proto = fifo_rdata[K-1 -: 4];
  assign head_index = fifo_rdata[INDEX_WIDTH-1:0];

  always_comb begin
    uc_hop  = '0;
    mc_mask = '0;
    if (head_index < INDEX_WIDTH'(UC_HOPS))
      uc_hop = fifo_rdata[INDEX_WIDTH + int'(head_index) * HB +: HB];
    if (head_index < INDEX_WIDTH'(MC_HOPS))
      mc_mask = fifo_rdata[INDEX_WIDTH + int'(head_index) * MB +: MB];
  end

  // Request decoder: relative hop -> one request bit, or mask -> bits.
  always_comb begin
    decoded_req = '0;
    header_ok   = 1'b0;
    if (!head_stop) begin
      if (head_proto == PROTO_UNICAST && head_index < INDEX_WIDTH'(UC_HOPS)) begin
        decoded_req = NE'(1) << uc_hop;
        header_ok   = 1'b1;
      end else if (ENABLE_MCAST_ROUTING && head_proto == PROTO_MULTICAST &&
                   head_index < INDEX_WIDTH'(MC_HOPS) && mc_mask != '0) begin
        decoded_req = mc_mask;
        header_ok   = 1'b1;
      end
    end
  end

  // Index countdown.
  always_comb begin
    header_next = fifo_rdata;
    header_next[INDEX_WIDTH-1:0] = head_index - 1'b1;
  end

  // ------------------------------------------------------------ controller
  typedef enum logic [1:0] {S_IDLE, S_REQUEST, S_STREAM, S_FLUSH} state_e;

  // Egress ports of a multicast packet are acquired one at a time, in
  // increasing physical port order, so that two multicast packets can never
  // each hold a port the other one waits for.  Relative hop START is the
  // lowest-numbered physical port reachable from this ingress.
  localparam int unsigned START = (NB_PORTS - 1 - PORT_ID) % NE;

  function automatic logic [NE-1:0] first_in_order(input logic [NE-1:0] pending);
    for (int unsigned k = 0; k < NE; k++)
      if (pending[(START + k) % NE]) return NE'(1) << ((START + k) % NE);
    return '0;
  endfunction

  state_e        state;
  logic [NE-1:0] req_q;      // all egress ports the packet needs
  logic [NE-1:0] req_out;    // requests presented to the egress ports
  logic [NE-1:0] grant_q, granted, granted_next;
  logic [NE-1:0] grant_rise;
  logic          all_granted, egress_afull;

  assign grant_rise   = from_egress_grant & ~grant_q;
  assign granted_next = granted | (grant_rise & req_out);
  assign all_granted  = ((granted_next & req_q) == req_q);
  assign egress_afull = |(from_egress_afull & req_out);

  always_comb begin
    fifo_ren = 1'b0;
    unique case (state)
      S_IDLE:    fifo_ren = 1'b0;
      S_REQUEST: fifo_ren = all_granted && !egress_afull && !fifo_rempty;
      S_STREAM:  fifo_ren = !egress_afull && !fifo_rempty;
      S_FLUSH:   fifo_ren = !fifo_rempty;
      default:   fifo_ren = 1'b0;
    endcase
  end

  always_ff @(posedge router_clk) begin
    if (router_srst) begin
      state           <= S_IDLE;
      req_q           <= '0;
      req_out         <= '0;
      grant_q         <= '0;
      granted         <= '0;
      to_egress_write <= 1'b0;
      to_egress_data  <= '0;
    end else begin
      grant_q         <= from_egress_grant;
      to_egress_write <= 1'b0;
      unique case (state)
        S_IDLE: begin
          granted <= '0;
          if (!fifo_rempty) begin
            if (header_ok) begin
              req_q   <= decoded_req;
              req_out <= first_in_order(decoded_req);
              state   <= S_REQUEST;
            end else begin
              state <= S_FLUSH;
            end
          end
        end
        S_REQUEST: begin
          granted <= granted_next;
          req_out <= granted_next | first_in_order(req_q & ~granted_next);
          if (fifo_ren) begin
            if (head_index != '0) begin
              to_egress_write <= 1'b1;
              to_egress_data  <= header_next;
            end
            state <= S_STREAM;
          end
        end
        S_STREAM: begin
          if (fifo_ren) begin
            to_egress_write <= 1'b1;
            to_egress_data  <= fifo_rdata;
            if (fifo_rdata[K]) begin
              req_q   <= '0;
              req_out <= '0;
              state   <= S_IDLE;
            end
          end
        end
        S_FLUSH: begin
          if (fifo_ren && fifo_rdata[K]) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign to_egress_request = req_out;

  // During the data phase the requests are those of the packet, unchanged,
  // until the stop flit drops them.
  a_req_stable: assert property (@(posedge router_clk) disable iff (router_srst)
                                 (state == S_STREAM && !(fifo_ren && fifo_rdata[K])) |=>
                                 $stable(req_out) && req_out == req_q);

  // fifo_rlevel and fifo_full are not needed by this controller: the FIFO
  // empty flag and the downstream almost-full bits are sufficient.
  logic unused_ok;
  assign unused_ok = ^{fifo_rlevel, fifo_full};
endmodule
