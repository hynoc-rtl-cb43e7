// hynoc_egress: one egress port of a HyNoC router.
//
// The N-1 ingress ports that can reach this egress each present a request
// bit, a write strobe and a flit.  A parallel round-robin arbiter (prra)
// grants one of them at a time and keeps the grant until that ingress drops
// its request at the end of its packet.  The arbiter state (index of the
// granted ingress) selects that ingress's write strobe and flit, which are
// registered and sent to the downstream FIFO (the next router's ingress or
// a local interface).
//
// Back-pressure: the downstream FIFO reports its number of free entries on
// egress_wlevel.  When it is AFULL_LEVEL or less, the almost-full bit of the
// granted ingress is raised (registered), so that ingress stops sending
// before the FIFO can overflow.  AFULL_LEVEL=5 is the threshold printed in
// the published egress figure; it covers the flits that can be in flight on
// the registered path ingress -> egress -> one link register -> FIFO.
//
// Interface and timing: from_ingress_* index g belongs to physical ingress
// port (this port + 1 + g) mod N (wired by the router).  to_ingress_grant and
// to_ingress_afull are registered copies of the arbiter grant, so an ingress
// sees its grant one cycle after the arbiter issues it (two with
// PRRA_PIPELINE=1) and the almost-full bit in the same cycle.  egress_wen and
// egress_wdata are registered.  The structure follows the published egress
// figure; PRRA_PIPELINE defaulting to 0 is this design's choice.
module hynoc_egress #(
  parameter int unsigned PAYLOAD_WIDTH   = 32,
  parameter int unsigned LOG2_FIFO_DEPTH = 5,
  parameter int unsigned NB_PORTS        = 5,
  parameter int unsigned AFULL_LEVEL     = 5,
  parameter bit          PRRA_PIPELINE   = 1'b0
) (
  input  logic                       clk,
  input  logic                       srst,
  // towards the N-1 ingress ports
  input  logic [NB_PORTS-2:0]        from_ingress_req,
  output logic [NB_PORTS-2:0]        to_ingress_grant,
  output logic [NB_PORTS-2:0]        to_ingress_afull,
  input  logic [NB_PORTS-2:0]        from_ingress_write,
  input  logic [PAYLOAD_WIDTH:0]     from_ingress_data [NB_PORTS-1],
  // towards the downstream FIFO
  output logic                       egress_wen,
  output logic [PAYLOAD_WIDTH:0]     egress_wdata,
  input  logic [LOG2_FIFO_DEPTH:0]   egress_wlevel
);
  localparam int unsigned NE = NB_PORTS - 1;
  localparam int unsigned SW = (NE > 1) ? $clog2(NE) : 1;

  logic [NE-1:0] grant;
  logic [SW-1:0] sel;
  logic          almost_full;

  prra #(.WIDTH(NE), .PIPELINE(PRRA_PIPELINE)) u_prra (
    .clk  (clk),
    .srst (srst),
    .req  (from_ingress_req),
    .grant(grant),
    .state(sel)
  );

  assign almost_full = (egress_wlevel <= (LOG2_FIFO_DEPTH+1)'(AFULL_LEVEL));

  always_ff @(posedge clk) begin
    if (srst) begin
      to_ingress_grant <= '0;
      to_ingress_afull <= '0;
      egress_wen       <= 1'b0;
      egress_wdata     <= '0;
    end else begin
      to_ingress_grant <= grant;
      to_ingress_afull <= grant & {NE{almost_full}};
      egress_wen       <= from_ingress_write[sel] & grant[sel];
      egress_wdata     <= from_ingress_data[sel];
    end
  end
endmodule
