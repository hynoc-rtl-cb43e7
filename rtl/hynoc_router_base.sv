// hynoc_router_base: an N-port HyNoC router (N = 3, 5 or 9).
//
// Every port is full duplex: an ingress (hynoc_ingress, with its FIFO) and an
// egress (hynoc_egress, with its arbiter).  The router is a full crossbar
// without loop-back: ingress i reaches every egress except its own, so up to
// N independent paths can be open at the same time.  Ports are numbered so
// that relative hop h taken at ingress i leaves through egress
// (i + 1 + h) mod N; in a drawing with ports numbered counter-clockwise this
// is "the h-th egress counter-clockwise after the ingress".
//
// Wiring (crossbar): request bit h of ingress i goes to input
// g = (N - 2 - h) of egress (i + 1 + h) mod N, i.e. input g of egress e
// always belongs to ingress (e + 1 + g) mod N.  Grants and almost-full bits
// come back on the same pairs; these control signals are point to point.
// The flit and write strobe of each ingress are broadcast to all N-1
// egresses it can reach (data path), and each egress picks its granted one.
//
// Interface: per port p, ingress_* is the write side of the ingress FIFO
// (clocked by ingress_clk[p], the upstream port clock, in dual-clock mode;
// by router_clk when SINGLE_CLOCK_ROUTER=1) and ingress_wlevel[p] returns
// its free entries; egress_* drives the downstream FIFO, whose free entries
// come back on egress_wlevel[p].  All outputs are registered.
//
// Port count, crossbar without loop-back, per-port clocks and the
// parameters follow the published router; the port-index arithmetic is this
// design's reading of the relative hop encoding.
module hynoc_router_base #(
  parameter int unsigned PAYLOAD_WIDTH        = 32,
  parameter int unsigned LOG2_FIFO_DEPTH      = 5,
  parameter int unsigned NB_PORTS             = 5,
  parameter int unsigned INDEX_WIDTH          = 4,
  parameter bit          ENABLE_MCAST_ROUTING = 1'b1,
  parameter bit          SINGLE_CLOCK_ROUTER  = 1'b0,
  parameter bit          PRRA_PIPELINE        = 1'b0,
  parameter int unsigned AFULL_LEVEL          = 5
) (
  input  logic                       router_clk,
  input  logic                       router_srst,
  // ingress side of every port
  input  logic [NB_PORTS-1:0]        ingress_clk,
  input  logic [NB_PORTS-1:0]        ingress_srst,
  input  logic [NB_PORTS-1:0]        ingress_wen,
  input  logic [PAYLOAD_WIDTH:0]     ingress_wdata  [NB_PORTS],
  output logic [LOG2_FIFO_DEPTH:0]   ingress_wlevel [NB_PORTS],
  // egress side of every port
  output logic [NB_PORTS-1:0]        egress_wen,
  output logic [PAYLOAD_WIDTH:0]     egress_wdata   [NB_PORTS],
  input  logic [LOG2_FIFO_DEPTH:0]   egress_wlevel  [NB_PORTS]
);
  localparam int unsigned N  = NB_PORTS;
  localparam int unsigned NE = NB_PORTS - 1;

  // ingress-indexed control (bit h = relative egress h)
  logic [NE-1:0]          ing_req   [N];
  logic [NE-1:0]          ing_grant [N];
  logic [NE-1:0]          ing_afull [N];
  logic                   ing_write [N];
  logic [PAYLOAD_WIDTH:0] ing_data  [N];
  // egress-indexed control (bit g = ingress (e + 1 + g) mod N)
  logic [NE-1:0]          eg_req    [N];
  logic [NE-1:0]          eg_grant  [N];
  logic [NE-1:0]          eg_afull  [N];
  logic [NE-1:0]          eg_write  [N];
  logic [PAYLOAD_WIDTH:0] eg_data   [N][NE];

  for (genvar p = 0; p < N; p++) begin : g_port
    hynoc_ingress #(
      .PAYLOAD_WIDTH       (PAYLOAD_WIDTH),
      .LOG2_FIFO_DEPTH     (LOG2_FIFO_DEPTH),
      .NB_PORTS            (NB_PORTS),
      .PORT_ID             (p),
      .INDEX_WIDTH         (INDEX_WIDTH),
      .ENABLE_MCAST_ROUTING(ENABLE_MCAST_ROUTING),
      .SINGLE_CLOCK_ROUTER (SINGLE_CLOCK_ROUTER)
    ) u_ingress (
      .ingress_clk      (ingress_clk[p]),
      .ingress_srst     (ingress_srst[p]),
      .ingress_wen      (ingress_wen[p]),
      .ingress_wdata    (ingress_wdata[p]),
      .ingress_wlevel   (ingress_wlevel[p]),
      .router_clk       (router_clk),
      .router_srst      (router_srst),
      .to_egress_request(ing_req[p]),
      .from_egress_grant(ing_grant[p]),
      .from_egress_afull(ing_afull[p]),
      .to_egress_write  (ing_write[p]),
      .to_egress_data   (ing_data[p])
    );

    hynoc_egress #(
      .PAYLOAD_WIDTH  (PAYLOAD_WIDTH),
      .LOG2_FIFO_DEPTH(LOG2_FIFO_DEPTH),
      .NB_PORTS       (NB_PORTS),
      .AFULL_LEVEL    (AFULL_LEVEL),
      .PRRA_PIPELINE  (PRRA_PIPELINE)
    ) u_egress (
      .clk               (router_clk),
      .srst              (router_srst),
      .from_ingress_req  (eg_req[p]),
      .to_ingress_grant  (eg_grant[p]),
      .to_ingress_afull  (eg_afull[p]),
      .from_ingress_write(eg_write[p]),
      .from_ingress_data (eg_data[p]),
      .egress_wen        (egress_wen[p]),
      .egress_wdata      (egress_wdata[p]),
      .egress_wlevel     (egress_wlevel[p])
    );

    // crossbar: ingress p, relative hop h <-> egress e, input g
    for (genvar h = 0; h < NE; h++) begin : g_hop
      localparam int unsigned E = (p + 1 + h) % N;
      localparam int unsigned G = N - 2 - h;
      assign eg_req[E][G]   = ing_req[p][h];
      assign eg_write[E][G] = ing_write[p];
      assign eg_data[E][G]  = ing_data[p];
      assign ing_grant[p][h] = eg_grant[E][G];
      assign ing_afull[p][h] = eg_afull[E][G];
    end
  end
endmodule
