// router: one switch of the interconnect.
//
// Every input port may deliver one message per cycle. The switch itself is
// contention free: all inputs move their messages in the same cycle straight
// into the buffer of the virtual network and output link the routing
// function names, so the only place messages wait for each other is the
// input buffer of an output link, managed by that link's throttle. This is
// where critical messages overtake non-critical ones.
//
// An input is held back only when the buffer it needs could not take a
// message from every input in this cycle (see msg_buffer), which keeps the
// ready of one input independent of the others.
//
// Interface: NUM_PORTS inputs and outputs, each a valid/ready handshake with
// a message; port 0 is the local node, the rest are network links (see
// route_unit). Per-output statistics from the throttles.
// Timing: a message accepted at an input in cycle t can be picked by its
// output throttle from cycle t+1.
// Following the paper: the perfect switch and prioritisation at the link
// input buffer. This design's choices: the multi-write buffers that model
// the contention-free switch, buffer depth and flow control.
module router
  import cam_pkg::*;
#(
  parameter topology_e   TOPOLOGY       = TOPO_HYPERCUBE,
  parameter int unsigned NUM_NODES      = 16,
  parameter int unsigned NUM_PORTS      = 5,
  parameter int unsigned NODE_ID        = 0,
  parameter int unsigned DEPTH          = 16,
  parameter int unsigned LINK_BANDWIDTH = DEFAULT_LINK_BANDWIDTH,
  parameter bit          CRIT_PRIORITY  = 1'b1,
  parameter int unsigned CNT_W          = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [NUM_PORTS-1:0] in_valid,
  output logic [NUM_PORTS-1:0] in_ready,
  input  msg_t                 in_msg   [NUM_PORTS],
  output logic [NUM_PORTS-1:0] out_valid,
  input  logic [NUM_PORTS-1:0] out_ready,
  output msg_t                 out_msg  [NUM_PORTS],
  output logic [CNT_W-1:0]     util_cycles       [NUM_PORTS],
  output logic [CNT_W-1:0]     contention_cycles [NUM_PORTS],
  output logic [CNT_W-1:0]     crit_bypass_count [NUM_PORTS]
);

  localparam int unsigned PW = $clog2(NUM_PORTS);

  logic [PW-1:0]        route [NUM_PORTS];
  logic [NUM_VNETS-1:0] space [NUM_PORTS];   // per output port, per vnet

  for (genvar i = 0; i < NUM_PORTS; i++) begin : g_in
    route_unit #(
      .TOPOLOGY (TOPOLOGY),
      .NUM_NODES(NUM_NODES),
      .NUM_PORTS(NUM_PORTS),
      .NODE_ID  (NODE_ID)
    ) u_route (
      .dest(in_msg[i].dest),
      .port(route[i])
    );
    assign in_ready[i] = space[route[i]][in_msg[i].vnet];
  end

  for (genvar o = 0; o < NUM_PORTS; o++) begin : g_out
    logic [NUM_PORTS-1:0] we;
    always_comb
      for (int i = 0; i < NUM_PORTS; i++)
        we[i] = in_valid[i] && in_ready[i] && (route[i] == PW'(o));

    throttle #(
      .NW            (NUM_PORTS),
      .DEPTH         (DEPTH),
      .LINK_BANDWIDTH(LINK_BANDWIDTH),
      .CRIT_PRIORITY (CRIT_PRIORITY),
      .CNT_W         (CNT_W)
    ) u_throttle (
      .clk, .rst_n,
      .wr_en            (we),
      .wr_msg           (in_msg),
      .space_ok         (space[o]),
      .out_valid        (out_valid[o]),
      .out_ready        (out_ready[o]),
      .out_msg          (out_msg[o]),
      .util_cycles      (util_cycles[o]),
      .contention_cycles(contention_cycles[o]),
      .crit_bypass_count(crit_bypass_count[o])
    );
  end

endmodule
