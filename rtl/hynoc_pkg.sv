// hynoc_pkg: constants and helper functions shared by the HyNoC router RTL.
//
// A flit is PAYLOAD_WIDTH+1 bits wide; bit PAYLOAD_WIDTH is the stop bit that
// marks the last flit of a packet.  A routing ("network hops") flit carries,
// from MSB to LSB: stop bit (always 0), a 4-bit protocol field, an unused gap,
// the hop fields Hop[H-1] .. Hop[0], and an INDEX_WIDTH-bit index that points
// at the hop to be used by the next router.  The protocol codes follow the
// published table (unicast 0000, multicast 0001, XY 1000 reserved, 1111
// forbidden).  The helper functions give the field positions so that the
// ingress port and the testbenches build and parse flits the same way.
package hynoc_pkg;

  typedef enum logic [3:0] {
    PROTO_UNICAST   = 4'b0000,
    PROTO_MULTICAST = 4'b0001,
    PROTO_XY        = 4'b1000,   // reserved, packets carrying it are flushed
    PROTO_FORBIDDEN = 4'b1111
  } proto_e;

  // Bits per unicast hop: ceil(log2(N-1)).
  function automatic int unsigned hop_bits(input int unsigned nb_ports);
    return $clog2(nb_ports - 1);
  endfunction

  // Bits per multicast hop: one mask bit per reachable egress.
  function automatic int unsigned mcast_hop_bits(input int unsigned nb_ports);
    return nb_ports - 1;
  endfunction

  // Hop field capacity of a routing flit: payload bits minus proto and index.
  function automatic int unsigned hop_area_bits(input int unsigned payload_width,
                                               input int unsigned index_width);
    return payload_width - 4 - index_width;
  endfunction

  function automatic int unsigned max_hops(input int unsigned payload_width,
                                          input int unsigned index_width,
                                          input int unsigned bits_per_hop);
    return hop_area_bits(payload_width, index_width) / bits_per_hop;
  endfunction

  // Physical egress reached from ingress port `ingress` with relative hop `hop`:
  // hop 0 is the next port after the ingress in the port numbering order.
  function automatic int unsigned rel_to_phys(input int unsigned ingress,
                                             input int unsigned hop,
                                             input int unsigned nb_ports);
    return (ingress + 1 + hop) % nb_ports;
  endfunction

endpackage
