// cam_pkg: types and constants shared by the criticality-aware interconnect.
//
// A message on the network carries its destination and source node, the
// virtual network (vnet) it travels on, a criticality flag, whether it holds
// a cache block (data) or only control information, and a small payload
// (address and transaction tag) that only the end points interpret.
//
// Virtual networks: the coherence protocol uses NUM_BASE_VNETS virtual
// networks. The criticality-aware design adds a second, identical set that
// carries critical requests and their responses, so there are
// 2*NUM_BASE_VNETS in all; vnet v and vnet v+NUM_BASE_VNETS carry the same
// message class, the upper one for critical traffic. The number of base
// virtual networks (3: request, forwarded request, response) and the
// message sizes (8-byte control, 72-byte data) are this design's choice.
//
// Link bandwidth follows the convention of the simulator the design was
// evaluated in: a link of bandwidth B moves B/1000 bytes per cycle, so the
// evaluated bandwidth of 125 moves one byte every 8 cycles.
package cam_pkg;

  // Widths of the message fields.
  localparam int unsigned NODE_ID_W = 8;   // up to 256 nodes
  localparam int unsigned ADDR_W    = 32;
  localparam int unsigned TAG_W     = 16;

  // Virtual networks.
  localparam int unsigned NUM_BASE_VNETS = 3;
  localparam int unsigned NUM_VNETS      = 2 * NUM_BASE_VNETS;
  localparam int unsigned VNET_W         = $clog2(NUM_VNETS);

  localparam logic [VNET_W-1:0] VNET_REQUEST  = VNET_W'(0);
  localparam logic [VNET_W-1:0] VNET_FORWARD  = VNET_W'(1);
  localparam logic [VNET_W-1:0] VNET_RESPONSE = VNET_W'(2);

  // Message sizes in bytes.
  localparam int unsigned CONTROL_BYTES = 8;
  localparam int unsigned DATA_BYTES    = 72;  // 64-byte block plus header

  // Bandwidth units per byte (bandwidth B moves B/BW_UNITS_PER_BYTE bytes/cycle).
  localparam int unsigned BW_UNITS_PER_BYTE = 1000;

  // Default link bandwidth of the evaluated system.
  localparam int unsigned DEFAULT_LINK_BANDWIDTH = 125;

  typedef enum logic [1:0] {
    TOPO_HYPERCUBE = 2'd0,
    TOPO_TORUS_2D  = 2'd1,
    TOPO_CROSSBAR  = 2'd2
  } topology_e;

  typedef struct packed {
    logic [NODE_ID_W-1:0] dest;
    logic [NODE_ID_W-1:0] src;
    logic [VNET_W-1:0]    vnet;
    logic                 crit;
    logic                 is_data;
    logic [ADDR_W-1:0]    addr;
    logic [TAG_W-1:0]     tag;
  } msg_t;

  // Cycles a message of the given size occupies a link of bandwidth bw.
  function automatic int unsigned link_cycles(int unsigned bytes, int unsigned bw);
    int unsigned c;
    c = (bytes * BW_UNITS_PER_BYTE + bw - 1) / bw;
    return (c == 0) ? 1 : c;
  endfunction

  // Is vnet v one of the critical set?
  function automatic logic is_crit_vnet(logic [VNET_W-1:0] v);
    return v >= VNET_W'(NUM_BASE_VNETS);
  endfunction

  // Vnet a message of base class `base` travels on, given its criticality.
  function automatic logic [VNET_W-1:0] vnet_of(logic [VNET_W-1:0] base, logic crit);
    return crit ? VNET_W'(base + VNET_W'(NUM_BASE_VNETS)) : base;
  endfunction

  // Base message class of vnet v.
  function automatic logic [VNET_W-1:0] base_of(logic [VNET_W-1:0] v);
    return is_crit_vnet(v) ? VNET_W'(v - VNET_W'(NUM_BASE_VNETS)) : v;
  endfunction

endpackage
