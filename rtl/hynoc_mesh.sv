// hynoc_mesh: ROWS x COLS mesh of 5-port HyNoC routers with one processing
// node per router (4 x 4 by default, the network used in the published
// evaluation).
//
// Router (r,c) sits at row r (top to bottom) and column c (left to right).
// Port convention of every router: 0 = local, 1 = East, 2 = South, 3 = West,
// 4 = North.  East of (r,c) is cross-linked with West of (r,c+1) and South of
// (r,c) with North of (r+1,c); each link is full duplex (one egress ->
// ingress direction each way).  With this numbering, relative hop h at
// ingress i leaves through port (i + 1 + h) mod 5:
//   entered on  Local: h0 East,  h1 South, h2 West,  h3 North
//   entered on  East : h0 South, h1 West,  h2 North, h3 Local
//   entered on  South: h0 West,  h1 North, h2 Local, h3 East
//   entered on  West : h0 North, h1 Local, h2 East,  h3 South
//   entered on  North: h0 Local, h1 East,  h2 South, h3 West
// Ports on the mesh boundary are left open:
// nothing is written into them and their egress sees an always-empty sink.
//
// Each router-to-router direction can carry one register stage (LINK_REG=1,
// default) on the flit/write path and on the returning FIFO level, which
// models a registered inter-router link as in the published co-simulation.
// The almost-full threshold of 5 free entries leaves room for exactly the
// flits in flight on such a link.  Local ports are wired directly to a
// hynoc_local_interface per node.
//
// Clocks: all routers share router_clk (a single clock for the mesh, as in
// the published evaluation); each node has its own node_clk[n], used by the
// write side of its router's local ingress FIFO and by the read side of its
// local interface's receive FIFO.  With SINGLE_CLOCK_ROUTER=1 the node
// clocks must be router_clk.  Node n = r*COLS + c.  The node side of each
// local interface is brought out as AXI-Stream style arrays (see
// hynoc_local_interface); the processing nodes themselves are outside this
// design.
module hynoc_mesh #(
  parameter int unsigned ROWS                 = 4,
  parameter int unsigned COLS                 = 4,
  parameter int unsigned PAYLOAD_WIDTH        = 32,
  parameter int unsigned LOG2_FIFO_DEPTH      = 5,
  parameter int unsigned INDEX_WIDTH          = 4,
  parameter bit          ENABLE_MCAST_ROUTING = 1'b1,
  parameter bit          SINGLE_CLOCK_ROUTER  = 1'b0,
  parameter bit          PRRA_PIPELINE        = 1'b0,
  parameter int unsigned AFULL_LEVEL          = 5,
  parameter bit          LINK_REG             = 1'b1,
  localparam int unsigned NODES               = ROWS * COLS
) (
  input  logic                       router_clk,
  input  logic                       router_srst,
  input  logic [NODES-1:0]           node_clk,
  input  logic [NODES-1:0]           node_srst,
  // node -> network
  input  logic [NODES-1:0]           s_tvalid,
  output logic [NODES-1:0]           s_tready,
  input  logic [PAYLOAD_WIDTH-1:0]   s_tdata      [NODES],
  input  logic [NODES-1:0]           s_tlast,
  output logic [LOG2_FIFO_DEPTH:0]   s_fifo_level [NODES],
  // network -> node
  output logic [NODES-1:0]           m_tvalid,
  input  logic [NODES-1:0]           m_tready,
  output logic [PAYLOAD_WIDTH-1:0]   m_tdata      [NODES],
  output logic [NODES-1:0]           m_tlast,
  output logic [LOG2_FIFO_DEPTH:0]   m_fifo_level [NODES]
);
  localparam int unsigned NP    = 5;
  localparam int unsigned DEPTH = 1 << LOG2_FIFO_DEPTH;
  localparam int unsigned P_LOCAL = 0, P_EAST = 1, P_SOUTH = 2, P_WEST = 3, P_NORTH = 4;

  typedef logic [PAYLOAD_WIDTH:0]   flit_t;
  typedef logic [LOG2_FIFO_DEPTH:0] level_t;

  // router-side signals, indexed [node][port]
  logic   ing_wen  [NODES][NP];
  flit_t  ing_data [NODES][NP];
  level_t ing_lvl  [NODES][NP];
  logic   ing_clk  [NODES][NP];
  logic   ing_srst [NODES][NP];
  logic   eg_wen   [NODES][NP];
  flit_t  eg_data  [NODES][NP];
  level_t eg_lvl   [NODES][NP];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      localparam int unsigned N = r * COLS + c;

      hynoc_router_5p #(
        .PAYLOAD_WIDTH       (PAYLOAD_WIDTH),
        .LOG2_FIFO_DEPTH     (LOG2_FIFO_DEPTH),
        .INDEX_WIDTH         (INDEX_WIDTH),
        .ENABLE_MCAST_ROUTING(ENABLE_MCAST_ROUTING),
        .SINGLE_CLOCK_ROUTER (SINGLE_CLOCK_ROUTER),
        .PRRA_PIPELINE       (PRRA_PIPELINE),
        .AFULL_LEVEL         (AFULL_LEVEL)
      ) u_router (
        .router_clk               (router_clk),
        .router_srst              (router_srst),
        .port0_ingress_clk        (ing_clk[N][0]),
        .port0_ingress_srst       (ing_srst[N][0]),
        .port0_ingress_write      (ing_wen[N][0]),
        .port0_ingress_data       (ing_data[N][0]),
        .port0_ingress_fifo_level (ing_lvl[N][0]),
        .port0_egress_write       (eg_wen[N][0]),
        .port0_egress_data        (eg_data[N][0]),
        .port0_egress_fifo_level  (eg_lvl[N][0]),
        .port1_ingress_clk        (ing_clk[N][1]),
        .port1_ingress_srst       (ing_srst[N][1]),
        .port1_ingress_write      (ing_wen[N][1]),
        .port1_ingress_data       (ing_data[N][1]),
        .port1_ingress_fifo_level (ing_lvl[N][1]),
        .port1_egress_write       (eg_wen[N][1]),
        .port1_egress_data        (eg_data[N][1]),
        .port1_egress_fifo_level  (eg_lvl[N][1]),
        .port2_ingress_clk        (ing_clk[N][2]),
        .port2_ingress_srst       (ing_srst[N][2]),
        .port2_ingress_write      (ing_wen[N][2]),
        .port2_ingress_data       (ing_data[N][2]),
        .port2_ingress_fifo_level (ing_lvl[N][2]),
        .port2_egress_write       (eg_wen[N][2]),
        .port2_egress_data        (eg_data[N][2]),
        .port2_egress_fifo_level  (eg_lvl[N][2]),
        .port3_ingress_clk        (ing_clk[N][3]),
        .port3_ingress_srst       (ing_srst[N][3]),
        .port3_ingress_write      (ing_wen[N][3]),
        .port3_ingress_data       (ing_data[N][3]),
        .port3_ingress_fifo_level (ing_lvl[N][3]),
        .port3_egress_write       (eg_wen[N][3]),
        .port3_egress_data        (eg_data[N][3]),
        .port3_egress_fifo_level  (eg_lvl[N][3]),
        .port4_ingress_clk        (ing_clk[N][4]),
        .port4_ingress_srst       (ing_srst[N][4]),
        .port4_ingress_write      (ing_wen[N][4]),
        .port4_ingress_data       (ing_data[N][4]),
        .port4_ingress_fifo_level (ing_lvl[N][4]),
        .port4_egress_write       (eg_wen[N][4]),
        .port4_egress_data        (eg_data[N][4]),
        .port4_egress_fifo_level  (eg_lvl[N][4])
      );

      // ---------------------------------------------------- local port
      assign ing_clk[N][P_LOCAL]  = node_clk[N];
      assign ing_srst[N][P_LOCAL] = node_srst[N];

      hynoc_local_interface #(
        .PAYLOAD_WIDTH      (PAYLOAD_WIDTH),
        .LOG2_FIFO_DEPTH    (LOG2_FIFO_DEPTH),
        .SINGLE_CLOCK_ROUTER(SINGLE_CLOCK_ROUTER)
      ) u_local (
        .router_clk             (router_clk),
        .router_srst            (router_srst),
        .node_clk               (node_clk[N]),
        .node_srst              (node_srst[N]),
        .s_tvalid               (s_tvalid[N]),
        .s_tready               (s_tready[N]),
        .s_tdata                (s_tdata[N]),
        .s_tlast                (s_tlast[N]),
        .s_fifo_level           (s_fifo_level[N]),
        .m_tvalid               (m_tvalid[N]),
        .m_tready               (m_tready[N]),
        .m_tdata                (m_tdata[N]),
        .m_tlast                (m_tlast[N]),
        .m_fifo_level           (m_fifo_level[N]),
        .port_ingress_write     (ing_wen[N][P_LOCAL]),
        .port_ingress_data      (ing_data[N][P_LOCAL]),
        .port_ingress_fifo_level(ing_lvl[N][P_LOCAL]),
        .port_egress_write      (eg_wen[N][P_LOCAL]),
        .port_egress_data       (eg_data[N][P_LOCAL]),
        .port_egress_fifo_level (eg_lvl[N][P_LOCAL])
      );

      // -------------------------------------------- directional ports
      for (genvar d = 1; d < NP; d++) begin : g_dir
        localparam bit HAS_NB =
          (d == P_EAST)  ? (c + 1 < COLS) :
          (d == P_SOUTH) ? (r + 1 < ROWS) :
          (d == P_WEST)  ? (c > 0)        : (r > 0);
        localparam int unsigned NB =
          (d == P_EAST)  ? N + 1 :
          (d == P_SOUTH) ? N + COLS :
          (d == P_WEST)  ? N - 1 : N - COLS;
        localparam int unsigned NB_PORT = (d == P_EAST)  ? P_WEST  :
                                          (d == P_SOUTH) ? P_NORTH :
                                          (d == P_WEST)  ? P_EAST  : P_SOUTH;

        assign ing_clk[N][d]  = router_clk;
        assign ing_srst[N][d] = router_srst;

        if (HAS_NB) begin : g_link
          // this router's egress d drives the neighbour's ingress NB_PORT
          if (LINK_REG) begin : g_reg
            logic   wen_q;
            flit_t  data_q;
            level_t lvl_q;
            always_ff @(posedge router_clk) begin
              if (router_srst) begin
                wen_q  <= 1'b0;
                data_q <= '0;
                lvl_q  <= '0;
              end else begin
                wen_q  <= eg_wen[N][d];
                data_q <= eg_data[N][d];
                lvl_q  <= ing_lvl[NB][NB_PORT];
              end
            end
            assign ing_wen[NB][NB_PORT]  = wen_q;
            assign ing_data[NB][NB_PORT] = data_q;
            assign eg_lvl[N][d]          = lvl_q;
          end else begin : g_wire
            assign ing_wen[NB][NB_PORT]  = eg_wen[N][d];
            assign ing_data[NB][NB_PORT] = eg_data[N][d];
            assign eg_lvl[N][d]          = ing_lvl[NB][NB_PORT];
          end
        end else begin : g_edge
          // open boundary port: no input, egress drains into a sink
          assign ing_wen[N][d]  = 1'b0;
          assign ing_data[N][d] = '0;
          assign eg_lvl[N][d]   = level_t'(DEPTH);
        end
      end
    end
  end
endmodule
