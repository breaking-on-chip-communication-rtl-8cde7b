// noc_pkg: types and constants shared by the anonymous-routing mesh NoC.
//
// A flit is one fixed-size unit of flow control. Every flit carries the same
// packed header (flit type, packet type, VCI, plain destination, encrypted
// header) plus a 128-bit data field, so head, body and tail flits share one
// format and the routers need no per-type decoding of widths.
//
// Packet types:
//   PT_NORMAL  plain XY-routed packet (after it has left its outbound tunnel)
//   PT_DT      Data Transfer packet inside an outbound tunnel; routed by VCI,
//              the true destination is hidden in the encrypted header
//   PT_TC      Tunnel Confirmation packet; one layer per tunnel hop, each hop
//              removes its layer and installs its routing-table entry
//
// The paper names symmetric encryption under K_S-E for the destination header
// and the chaff identifier but gives no cipher. sym_crypt below is a keyed XOR
// placeholder with the right interface: it keeps the datapath complete and
// testable but offers no secrecy, and must be replaced by a real cipher.
// Likewise ni_hash stands in for the unnamed hash of the NI identifier.
package noc_pkg;

  // ---- sizes (own choices where the paper is silent; see README) ----
  localparam int unsigned DATA_W  = 128;  // 16-byte flit
  localparam int unsigned VCI_W   = 12;   // virtual circuit identifier
  localparam int unsigned KEY_W   = 32;   // symmetric key K_S-E
  localparam int unsigned COORD_W = 4;    // per-axis coordinate, meshes up to 16x16
  localparam int unsigned MAX_LAYERS = 5; // TC layers: source + up to 4 hops

  typedef enum logic [1:0] {
    FT_HEAD     = 2'd0,
    FT_BODY     = 2'd1,
    FT_TAIL     = 2'd2,
    FT_HEADTAIL = 2'd3
  } flit_type_e;

  typedef enum logic [1:0] {
    PT_NORMAL = 2'd0,
    PT_DT     = 2'd1,
    PT_TC     = 2'd2
  } pkt_type_e;

  // Chaff kind carried (encrypted) in a DT head flit.
  typedef enum logic [1:0] {
    CH_NONE  = 2'd0,  // legitimate packet, no chaff
    CH_DUMMY = 2'd1,  // whole packet is a dummy (first chaffing scenario)
    CH_FLIT  = 2'd2   // one chaff flit at position pos (second scenario)
  } chaff_e;

  // Router ports.
  typedef enum logic [2:0] {
    P_NORTH = 3'd0,
    P_EAST  = 3'd1,
    P_SOUTH = 3'd2,
    P_WEST  = 3'd3,
    P_LOCAL = 3'd4
  } port_e;

  localparam int unsigned NPORTS = 5;

  typedef struct packed {
    logic [COORD_W-1:0] y;
    logic [COORD_W-1:0] x;
  } coord_t;

  // Plaintext of the encrypted header field of a DT head flit.
  typedef struct packed {
    logic [15:0]        tag;   // hash(NI_ID)
    chaff_e             kind;
    logic [5:0]         pos;   // flit index of the chaff flit (CH_FLIT)
    coord_t             dest;  // true destination
  } enc_hdr_t;                 // 32 bits = KEY_W

  typedef struct packed {
    flit_type_e          ftype;
    pkt_type_e           ptype;
    logic [VCI_W-1:0]    vci;
    coord_t              dest;   // plain destination (NORMAL) or tunnel endpoint (TC)
    logic [KEY_W-1:0]    ehdr;   // DT: sym_crypt(K_S-E, enc_hdr_t); TC: K_S-E
    logic [DATA_W-1:0]   data;
  } flit_t;

  // One TC layer: the routing-table entry for one router of the tunnel.
  typedef struct packed {
    logic             endp;   // this router is the tunnel endpoint
    logic [VCI_W-1:0] vin;    // index (incoming VCI)
    logic [VCI_W-1:0] vout;   // outgoing VCI (unused at the endpoint)
  } tc_layer_t;

  localparam int unsigned LAYER_W = $bits(tc_layer_t);

  // Flit exchanged with an IP core.
  typedef struct packed {
    logic              head;
    logic              tail;
    coord_t            dest;  // valid on the head flit
    logic [DATA_W-1:0] data;
  } ip_flit_t;

  // Per-router event pulses, for performance counters and tests.
  typedef struct packed {
    logic tc_install;    // a TC layer was installed
    logic vci_swap;      // a DT head was switched to its outgoing VCI
    logic ep_exit;       // a DT packet left its tunnel at this endpoint
    logic chaff_drop;    // a chaff flit was winnowed
    logic dummy_drop;    // a dummy packet head was winnowed
    logic delay_start;   // a flit began a random endpoint delay
    logic vci_miss;      // a DT head found no entry and was dropped
  } rtr_events_t;

  function automatic logic is_head(flit_type_e t);
    return (t == FT_HEAD) || (t == FT_HEADTAIL);
  endfunction

  function automatic logic is_tail(flit_type_e t);
    return (t == FT_TAIL) || (t == FT_HEADTAIL);
  endfunction

  // Keyed XOR placeholder for E^_K / D^_K (self-inverse).
  function automatic logic [KEY_W-1:0] sym_crypt(logic [KEY_W-1:0] key,
                                                 logic [KEY_W-1:0] msg);
    return msg ^ key ^ {key[15:0], key[31:16]};
  endfunction

  // Placeholder hash of an NI identifier (multiplicative hash).
  function automatic logic [15:0] ni_hash(coord_t id);
    logic [31:0] p;
    p = 32'(id) * 32'h9E37_79B1;
    return p[31:16];
  endfunction

  // Dimension-ordered XY route: X first, then Y (y grows to the south).
  function automatic port_e xy_route(coord_t here, coord_t dest);
    if (dest.x > here.x)      return P_EAST;
    else if (dest.x < here.x) return P_WEST;
    else if (dest.y > here.y) return P_SOUTH;
    else if (dest.y < here.y) return P_NORTH;
    else                      return P_LOCAL;
  endfunction

  function automatic int unsigned hops(coord_t a, coord_t b);
    int unsigned dx, dy;
    dx = (a.x > b.x) ? 32'(a.x - b.x) : 32'(b.x - a.x);
    dy = (a.y > b.y) ? 32'(a.y - b.y) : 32'(b.y - a.y);
    return dx + dy;
  endfunction

endpackage
