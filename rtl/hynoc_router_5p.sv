// hynoc_router_5p: 5-port HyNoC router with one named port group per port.
//
// Fixes NB_PORTS=5 on hynoc_router_base and flattens its per-port arrays
// into named ports (portX_ingress_* and portX_egress_*), the form in which
// the router is instantiated in a network.  A 5-port router encodes unicast
// hops of 2 bits (12 unicast hops, 6 multicast hops with a 32-bit payload).
// For each port X: portX_ingress_write/data write the ingress FIFO (clocked
// by portX_ingress_clk in dual-clock mode), portX_ingress_fifo_level returns
// its free entries; portX_egress_write/data feed the downstream FIFO, whose
// free entries come back on portX_egress_fifo_level.  Timing is that of
// hynoc_router_base; all outputs are registered.  The module name and port
// naming follow the published router; everything else is in the base.
module hynoc_router_5p #(
  parameter int unsigned PAYLOAD_WIDTH        = 32,
  parameter int unsigned LOG2_FIFO_DEPTH      = 5,
  parameter int unsigned INDEX_WIDTH          = 4,
  parameter bit          ENABLE_MCAST_ROUTING = 1'b1,
  parameter bit          SINGLE_CLOCK_ROUTER  = 1'b0,
  parameter bit          PRRA_PIPELINE        = 1'b0,
  parameter int unsigned AFULL_LEVEL          = 5
) (
  input  logic                     router_clk,
  input  logic                     router_srst,
  input  logic                     port0_ingress_clk,
  input  logic                     port0_ingress_srst,
  input  logic                     port0_ingress_write,
  input  logic [PAYLOAD_WIDTH:0]   port0_ingress_data,
  output logic [LOG2_FIFO_DEPTH:0] port0_ingress_fifo_level,
  output logic                     port0_egress_write,
  output logic [PAYLOAD_WIDTH:0]   port0_egress_data,
  input  logic [LOG2_FIFO_DEPTH:0] port0_egress_fifo_level,
  input  logic                     port1_ingress_clk,
  input  logic                     port1_ingress_srst,
  input  logic                     port1_ingress_write,
  input  logic [PAYLOAD_WIDTH:0]   port1_ingress_data,
  output logic [LOG2_FIFO_DEPTH:0] port1_ingress_fifo_level,
  output logic                     port1_egress_write,
  output logic [PAYLOAD_WIDTH:0]   port1_egress_data,
  input  logic [LOG2_FIFO_DEPTH:0] port1_egress_fifo_level,
  input  logic                     port2_ingress_clk,
  input  logic                     port2_ingress_srst,
  input  logic                     port2_ingress_write,
  input  logic [PAYLOAD_WIDTH:0]   port2_ingress_data,
  output logic [LOG2_FIFO_DEPTH:0] port2_ingress_fifo_level,
  output logic                     port2_egress_write,
  output logic [PAYLOAD_WIDTH:0]   port2_egress_data,
  input  logic [LOG2_FIFO_DEPTH:0] port2_egress_fifo_level,
  input  logic                     port3_ingress_clk,
  input  logic                     port3_ingress_srst,
  input  logic                     port3_ingress_write,
  input  logic [PAYLOAD_WIDTH:0]   port3_ingress_data,
  output logic [LOG2_FIFO_DEPTH:0] port3_ingress_fifo_level,
  output logic                     port3_egress_write,
  output logic [PAYLOAD_WIDTH:0]   port3_egress_data,
  input  logic [LOG2_FIFO_DEPTH:0] port3_egress_fifo_level,
  input  logic                     port4_ingress_clk,
  input  logic                     port4_ingress_srst,
  input  logic                     port4_ingress_write,
  input  logic [PAYLOAD_WIDTH:0]   port4_ingress_data,
  output logic [LOG2_FIFO_DEPTH:0] port4_ingress_fifo_level,
  output logic                     port4_egress_write,
  output logic [PAYLOAD_WIDTH:0]   port4_egress_data,
  input  logic [LOG2_FIFO_DEPTH:0] port4_egress_fifo_level
);
  localparam int unsigned N = 5;

  logic [N-1:0]             ingress_clk, ingress_srst, ingress_wen, egress_wen;
  logic [PAYLOAD_WIDTH:0]   ingress_wdata  [N];
  logic [LOG2_FIFO_DEPTH:0] ingress_wlevel [N];
  logic [PAYLOAD_WIDTH:0]   egress_wdata   [N];
  logic [LOG2_FIFO_DEPTH:0] egress_wlevel  [N];

  assign ingress_clk[0]    = port0_ingress_clk;
  assign ingress_srst[0]   = port0_ingress_srst;
  assign ingress_wen[0]    = port0_ingress_write;
  assign ingress_wdata[0]  = port0_ingress_data;
  assign port0_ingress_fifo_level = ingress_wlevel[0];
  assign port0_egress_write = egress_wen[0];
  assign port0_egress_data  = egress_wdata[0];
  assign egress_wlevel[0]  = port0_egress_fifo_level;
  assign ingress_clk[1]    = port1_ingress_clk;
  assign ingress_srst[1]   = port1_ingress_srst;
  assign ingress_wen[1]    = port1_ingress_write;
  assign ingress_wdata[1]  = port1_ingress_data;
  assign port1_ingress_fifo_level = ingress_wlevel[1];
  assign port1_egress_write = egress_wen[1];
  assign port1_egress_data  = egress_wdata[1];
  assign egress_wlevel[1]  = port1_egress_fifo_level;
  assign ingress_clk[2]    = port2_ingress_clk;
  assign ingress_srst[2]   = port2_ingress_srst;
  assign ingress_wen[2]    = port2_ingress_write;
  assign ingress_wdata[2]  = port2_ingress_data;
  assign port2_ingress_fifo_level = ingress_wlevel[2];
  assign port2_egress_write = egress_wen[2];
  assign port2_egress_data  = egress_wdata[2];
  assign egress_wlevel[2]  = port2_egress_fifo_level;
  assign ingress_clk[3]    = port3_ingress_clk;
  assign ingress_srst[3]   = port3_ingress_srst;
  assign ingress_wen[3]    = port3_ingress_write;
  assign ingress_wdata[3]  = port3_ingress_data;
  assign port3_ingress_fifo_level = ingress_wlevel[3];
  assign port3_egress_write = egress_wen[3];
  assign port3_egress_data  = egress_wdata[3];
  assign egress_wlevel[3]  = port3_egress_fifo_level;
  assign ingress_clk[4]    = port4_ingress_clk;
  assign ingress_srst[4]   = port4_ingress_srst;
  assign ingress_wen[4]    = port4_ingress_write;
  assign ingress_wdata[4]  = port4_ingress_data;
  assign port4_ingress_fifo_level = ingress_wlevel[4];
  assign port4_egress_write = egress_wen[4];
  assign port4_egress_data  = egress_wdata[4];
  assign egress_wlevel[4]  = port4_egress_fifo_level;

  hynoc_router_base #(
    .PAYLOAD_WIDTH       (PAYLOAD_WIDTH),
    .LOG2_FIFO_DEPTH     (LOG2_FIFO_DEPTH),
    .NB_PORTS            (N),
    .INDEX_WIDTH         (INDEX_WIDTH),
    .ENABLE_MCAST_ROUTING(ENABLE_MCAST_ROUTING),
    .SINGLE_CLOCK_ROUTER (SINGLE_CLOCK_ROUTER),
    .PRRA_PIPELINE       (PRRA_PIPELINE),
    .AFULL_LEVEL         (AFULL_LEVEL)
  ) u_base (
    .router_clk    (router_clk),
    .router_srst   (router_srst),
    .ingress_clk   (ingress_clk),
    .ingress_srst  (ingress_srst),
    .ingress_wen   (ingress_wen),
    .ingress_wdata (ingress_wdata),
    .ingress_wlevel(ingress_wlevel),
    .egress_wen    (egress_wen),
    .egress_wdata  (egress_wdata),
    .egress_wlevel (egress_wlevel)
  );
endmodule
