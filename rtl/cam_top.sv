// cam_top: criticality-aware interconnect of a NUM_NODES-processor shared
// memory multiprocessor.
//
// Every node has a criticality flag (crit_sec_info), flipped by the magic
// instruction its processor executes on entering and leaving a critical
// section, and a network interface (net_iface) that puts critical requests,
// and the responses to them, on a second set of virtual networks. The nodes
// are linked by switches (router) whose output links give the critical
// virtual networks priority (throttle).
//
// Topologies (TOPOLOGY):
//   TOPO_HYPERCUBE (default): one switch per node, log2(NUM_NODES) links.
//   TOPO_TORUS_2D:            one switch per node, 4 links, sqrt(N) x sqrt(N).
//   TOPO_CROSSBAR:            one central switch with a port per node.
// With 4 nodes the 2D torus and the hypercube are the same graph.
//
// The processors, caches, directory (the coherence protocol) and memory are
// outside this module: each node's coherence controller connects through
// `inj_*` (messages into the network, `vnet` = base class, `crit` = the
// flag inherited from a critical request) and `ej_*` (messages out of the
// network). Totals of the link statistics are summed over all links.
//
// Timing: a message injected in cycle t enters the first switch's link
// buffer at t+1; every link it crosses adds ceil(bytes*1000/LINK_BANDWIDTH)
// cycles plus any waiting; the last link is the one to the destination node.
// Following the paper: the per-processor flag, the second set of virtual
// networks, priority at link input buffers, the three topologies and the
// bandwidth of 125. This design's own choices are listed in the modules.
module cam_top
  import cam_pkg::*;
#(
  parameter int unsigned NUM_NODES      = 16,
  parameter topology_e   TOPOLOGY       = TOPO_HYPERCUBE,
  parameter int unsigned DEPTH          = 16,
  parameter int unsigned LINK_BANDWIDTH = DEFAULT_LINK_BANDWIDTH,
  parameter bit          CRIT_PRIORITY  = 1'b1,
  parameter int unsigned CNT_W          = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // processors
  input  logic [NUM_NODES-1:0] magic_toggle,
  output logic [NUM_NODES-1:0] crit,
  // coherence controllers
  input  logic [NUM_NODES-1:0] inj_valid,
  output logic [NUM_NODES-1:0] inj_ready,
  input  msg_t                 inj_msg [NUM_NODES],
  output logic [NUM_NODES-1:0] ej_valid,
  input  logic [NUM_NODES-1:0] ej_ready,
  output msg_t                 ej_msg  [NUM_NODES],
  // statistics
  output logic [CNT_W-1:0]     crit_req_count    [NUM_NODES],
  output logic [CNT_W-1:0]     noncrit_req_count [NUM_NODES],
  output logic [CNT_W-1:0]     total_util_cycles,
  output logic [CNT_W-1:0]     total_contention_cycles,
  output logic [CNT_W-1:0]     total_crit_bypass
);

  localparam int unsigned DIM = $clog2(NUM_NODES);
  function automatic int unsigned isqrt(int unsigned n);
    int unsigned r;
    r = 0;
    while ((r + 1) * (r + 1) <= n) r++;
    return r;
  endfunction
  localparam int unsigned X = isqrt(NUM_NODES);

  // Ports per switch and number of switches.
  localparam int unsigned NUM_PORTS = (TOPOLOGY == TOPO_HYPERCUBE) ? DIM + 1 :
                                      (TOPOLOGY == TOPO_TORUS_2D)  ? 5 : NUM_NODES;
  localparam int unsigned NUM_SW    = (TOPOLOGY == TOPO_CROSSBAR) ? 1 : NUM_NODES;

  // Network side of every node's interface.
  logic [NUM_NODES-1:0] ni_out_valid, ni_out_ready, ni_in_valid, ni_in_ready;
  msg_t                 ni_out_msg [NUM_NODES];
  msg_t                 ni_in_msg  [NUM_NODES];

  for (genvar n = 0; n < NUM_NODES; n++) begin : g_node
    crit_sec_info #(.CNT_W(CNT_W)) u_crit (
      .clk, .rst_n,
      .magic_toggle(magic_toggle[n]),
      .crit        (crit[n]),
      .toggle_count()
    );
    net_iface #(.NODE_ID(n), .CNT_W(CNT_W)) u_ni (
      .clk, .rst_n,
      .crit             (crit[n]),
      .inj_valid        (inj_valid[n]),
      .inj_ready        (inj_ready[n]),
      .inj_msg          (inj_msg[n]),
      .net_out_valid    (ni_out_valid[n]),
      .net_out_ready    (ni_out_ready[n]),
      .net_out_msg      (ni_out_msg[n]),
      .net_in_valid     (ni_in_valid[n]),
      .net_in_ready     (ni_in_ready[n]),
      .net_in_msg       (ni_in_msg[n]),
      .ej_valid         (ej_valid[n]),
      .ej_ready         (ej_ready[n]),
      .ej_msg           (ej_msg[n]),
      .crit_req_count   (crit_req_count[n]),
      .noncrit_req_count(noncrit_req_count[n])
    );
  end

  // Switch ports.
  logic [NUM_PORTS-1:0] sw_in_valid  [NUM_SW];
  logic [NUM_PORTS-1:0] sw_in_ready  [NUM_SW];
  msg_t                 sw_in_msg    [NUM_SW][NUM_PORTS];
  logic [NUM_PORTS-1:0] sw_out_valid [NUM_SW];
  logic [NUM_PORTS-1:0] sw_out_ready [NUM_SW];
  msg_t                 sw_out_msg   [NUM_SW][NUM_PORTS];
  logic [CNT_W-1:0]     sw_util [NUM_SW][NUM_PORTS];
  logic [CNT_W-1:0]     sw_cont [NUM_SW][NUM_PORTS];
  logic [CNT_W-1:0]     sw_byp  [NUM_SW][NUM_PORTS];

  for (genvar s = 0; s < NUM_SW; s++) begin : g_sw
    router #(
      .TOPOLOGY      (TOPOLOGY),
      .NUM_NODES     (NUM_NODES),
      .NUM_PORTS     (NUM_PORTS),
      .NODE_ID       (s),
      .DEPTH         (DEPTH),
      .LINK_BANDWIDTH(LINK_BANDWIDTH),
      .CRIT_PRIORITY (CRIT_PRIORITY),
      .CNT_W         (CNT_W)
    ) u_router (
      .clk, .rst_n,
      .in_valid         (sw_in_valid[s]),
      .in_ready         (sw_in_ready[s]),
      .in_msg           (sw_in_msg[s]),
      .out_valid        (sw_out_valid[s]),
      .out_ready        (sw_out_ready[s]),
      .out_msg          (sw_out_msg[s]),
      .util_cycles      (sw_util[s]),
      .contention_cycles(sw_cont[s]),
      .crit_bypass_count(sw_byp[s])
    );
  end

  // ----------------------------------------------------------------- wiring
  if (TOPOLOGY == TOPO_CROSSBAR) begin : g_xbar
    // Port n of the central switch belongs to node n.
    for (genvar n = 0; n < NUM_NODES; n++) begin : g_n
      assign sw_in_valid[0][n]  = ni_out_valid[n];
      assign sw_in_msg[0][n]    = ni_out_msg[n];
      assign ni_out_ready[n]    = sw_in_ready[0][n];
      assign ni_in_valid[n]     = sw_out_valid[0][n];
      assign ni_in_msg[n]       = sw_out_msg[0][n];
      assign sw_out_ready[0][n] = ni_in_ready[n];
    end
  end else begin : g_direct
    for (genvar n = 0; n < NUM_NODES; n++) begin : g_n
      // Local port 0.
      assign sw_in_valid[n][0]  = ni_out_valid[n];
      assign sw_in_msg[n][0]    = ni_out_msg[n];
      assign ni_out_ready[n]    = sw_in_ready[n][0];
      assign ni_in_valid[n]     = sw_out_valid[n][0];
      assign ni_in_msg[n]       = sw_out_msg[n][0];
      assign sw_out_ready[n][0] = ni_in_ready[n];
      // Network ports: output port p of node n feeds input port q of node m.
      for (genvar p = 1; p < NUM_PORTS; p++) begin : g_p
        localparam int unsigned XN = n % X;
        localparam int unsigned YN = n / X;
        localparam int unsigned M =
          (TOPOLOGY == TOPO_HYPERCUBE) ? (n ^ (1 << (p - 1))) :
          (p == 1) ? YN * X + (XN + 1) % X :
          (p == 2) ? YN * X + (XN + X - 1) % X :
          (p == 3) ? ((YN + 1) % X) * X + XN :
                     ((YN + X - 1) % X) * X + XN;
        // A link leaving by +x arrives on the neighbour's -x port, and so on.
        localparam int unsigned Q =
          (TOPOLOGY == TOPO_HYPERCUBE) ? p :
          (p == 1) ? 2 : (p == 2) ? 1 : (p == 3) ? 4 : 3;
        assign sw_in_valid[M][Q]  = sw_out_valid[n][p];
        assign sw_in_msg[M][Q]    = sw_out_msg[n][p];
        assign sw_out_ready[n][p] = sw_in_ready[M][Q];
      end
    end
  end

  // ------------------------------------------------------------- statistics
  always_comb begin
    total_util_cycles       = '0;
    total_contention_cycles = '0;
    total_crit_bypass       = '0;
    for (int s = 0; s < NUM_SW; s++)
      for (int p = 0; p < NUM_PORTS; p++) begin
        total_util_cycles       = total_util_cycles + sw_util[s][p];
        total_contention_cycles = total_contention_cycles + sw_cont[s][p];
        total_crit_bypass       = total_crit_bypass + sw_byp[s][p];
      end
  end

endmodule
