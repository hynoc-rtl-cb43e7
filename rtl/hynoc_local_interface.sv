// hynoc_local_interface: attaches a processing node to one router port.
//
// Receive direction: the router egress writes into an extra FIFO held here
// (2**LOG2_FIFO_DEPTH entries of LUT RAM, dual-clock unless
// SINGLE_CLOCK_ROUTER=1).  The FIFO takes the flits into the node's clock
// domain and absorbs bursts when the node reads slowly.  To the router it
// looks exactly like the ingress FIFO of a neighbour router: it takes
// write/data and returns its number of free entries, so the same almost-full
// flow control applies.  Only payload flits arrive here: the last router has
// consumed the routing flit.
//
// Transmit direction: the node writes routing flits followed by payload
// flits straight into the ingress FIFO of the router port, whose write side
// runs on the node clock.  This module only maps the node-side handshake
// onto that FIFO.
//
// Node-side handshake (AXI-Stream style, as the published port interface is
// modelled on it): tvalid = write, tready = not full, tdata = the
// PAYLOAD_WIDTH payload bits, tlast = stop bit.  A word moves on a node_clk
// edge where tvalid and tready are both high.  The fifo_level side-band
// outputs give the free entries of the router's ingress FIFO (tx) and the
// stored entries of the receive FIFO (rx), so the node can plan its bursts.
// The receive FIFO and its role come from the published design; the
// AXI-Stream port names are this design's rendering of the mapping the
// published text describes.
module hynoc_local_interface #(
  parameter int unsigned PAYLOAD_WIDTH       = 32,
  parameter int unsigned LOG2_FIFO_DEPTH     = 5,
  parameter bit          SINGLE_CLOCK_ROUTER = 1'b0
) (
  input  logic                       router_clk,
  input  logic                       router_srst,
  input  logic                       node_clk,
  input  logic                       node_srst,
  // node -> network (AXI-Stream slave)
  input  logic                       s_tvalid,
  output logic                       s_tready,
  input  logic [PAYLOAD_WIDTH-1:0]   s_tdata,
  input  logic                       s_tlast,
  output logic [LOG2_FIFO_DEPTH:0]   s_fifo_level,
  // network -> node (AXI-Stream master)
  output logic                       m_tvalid,
  input  logic                       m_tready,
  output logic [PAYLOAD_WIDTH-1:0]   m_tdata,
  output logic                       m_tlast,
  output logic [LOG2_FIFO_DEPTH:0]   m_fifo_level,
  // router port, ingress direction (write side of the router's ingress FIFO)
  output logic                       port_ingress_write,
  output logic [PAYLOAD_WIDTH:0]     port_ingress_data,
  input  logic [LOG2_FIFO_DEPTH:0]   port_ingress_fifo_level,
  // router port, egress direction (router writes into the receive FIFO)
  input  logic                       port_egress_write,
  input  logic [PAYLOAD_WIDTH:0]     port_egress_data,
  output logic [LOG2_FIFO_DEPTH:0]   port_egress_fifo_level
);
  // ---- transmit: node straight into the router ingress FIFO
  assign s_tready           = (port_ingress_fifo_level != '0);
  assign s_fifo_level       = port_ingress_fifo_level;
  assign port_ingress_write = s_tvalid && s_tready;
  assign port_ingress_data  = {s_tlast, s_tdata};

  // ---- receive: extra FIFO into the node clock domain
  logic                   rx_ren, rx_empty, rx_full;
  logic [PAYLOAD_WIDTH:0] rx_data;

  if (SINGLE_CLOCK_ROUTER) begin : g_sclk
    sclkfifolut #(.WIDTH(PAYLOAD_WIDTH + 1), .LOG2_DEPTH(LOG2_FIFO_DEPTH)) u_rx_fifo (
      .clk   (router_clk),
      .srst  (router_srst),
      .wen   (port_egress_write),
      .wdata (port_egress_data),
      .wlevel(port_egress_fifo_level),
      .full  (rx_full),
      .ren   (rx_ren),
      .rdata (rx_data),
      .rempty(rx_empty),
      .rlevel(m_fifo_level)
    );
  end else begin : g_dclk
    dclkfifolut #(.WIDTH(PAYLOAD_WIDTH + 1), .LOG2_DEPTH(LOG2_FIFO_DEPTH)) u_rx_fifo (
      .wclk  (router_clk),
      .wrst  (router_srst),
      .wen   (port_egress_write),
      .wdata (port_egress_data),
      .wlevel(port_egress_fifo_level),
      .full  (rx_full),
      .rclk  (node_clk),
      .rrst  (node_srst),
      .ren   (rx_ren),
      .rdata (rx_data),
      .rempty(rx_empty),
      .rlevel(m_fifo_level)
    );
  end

  assign m_tvalid = !rx_empty;
  assign m_tdata  = rx_data[PAYLOAD_WIDTH-1:0];
  assign m_tlast  = rx_data[PAYLOAD_WIDTH];
  assign rx_ren   = m_tvalid && m_tready;

  // The router never writes a full FIFO (almost-full flow control), so
  // rx_full is only observed by the FIFO's own overflow assertion.
  logic unused_ok;
  assign unused_ok = rx_full;
endmodule
