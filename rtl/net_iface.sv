// net_iface: network interface between a node's coherence controller and
// its router.
//
// Outgoing side: the controller hands over a message whose `vnet` field is
// its base message class (request, forwarded request, response). A request
// is critical when the node's `crit` flag is set; any other message is
// critical when the controller marks it so (a response inherits the flag of
// the request it answers). Critical messages are moved onto the second,
// critical set of virtual networks; the source field is filled in.
// Incoming side: messages from the router are handed to the controller with
// `vnet` turned back into the base class, `crit` still telling which set
// carried it.
// The interface also counts critical and non-critical requests it injects.
//
// Interface: valid/ready handshakes on both sides, combinational from
// controller to router and back (no added latency).
// Following the paper: the second set of virtual networks for critical
// requests and responses, and the request counters. This design's choice:
// the controller-side encoding (base vnet plus an inherited crit flag).
module net_iface
  import cam_pkg::*;
#(
  parameter int unsigned NODE_ID = 0,
  parameter int unsigned CNT_W   = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             crit,          // from crit_sec_info
  // controller -> network
  input  logic             inj_valid,
  output logic             inj_ready,
  input  msg_t             inj_msg,
  output logic             net_out_valid,
  input  logic             net_out_ready,
  output msg_t             net_out_msg,
  // network -> controller
  input  logic             net_in_valid,
  output logic             net_in_ready,
  input  msg_t             net_in_msg,
  output logic             ej_valid,
  input  logic             ej_ready,
  output msg_t             ej_msg,
  // statistics
  output logic [CNT_W-1:0] crit_req_count,
  output logic [CNT_W-1:0] noncrit_req_count
);

  logic is_req, msg_crit;

  always_comb begin
    is_req   = (inj_msg.vnet == VNET_REQUEST);
    msg_crit = inj_msg.crit | (is_req & crit);
    net_out_msg      = inj_msg;
    net_out_msg.src  = NODE_ID_W'(NODE_ID);
    net_out_msg.crit = msg_crit;
    net_out_msg.vnet = vnet_of(inj_msg.vnet, msg_crit);
  end

  assign net_out_valid = inj_valid;
  assign inj_ready     = net_out_ready;

  always_comb begin
    ej_msg      = net_in_msg;
    ej_msg.vnet = base_of(net_in_msg.vnet);
    ej_msg.crit = is_crit_vnet(net_in_msg.vnet);
  end
  assign ej_valid     = net_in_valid;
  assign net_in_ready = ej_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      crit_req_count    <= '0;
      noncrit_req_count <= '0;
    end else if (inj_valid && inj_ready && is_req) begin
      if (msg_crit) crit_req_count    <= crit_req_count + 1'b1;
      else          noncrit_req_count <= noncrit_req_count + 1'b1;
    end
  end

  // A controller must pass base classes only.
  assert property (@(posedge clk) disable iff (!rst_n)
                   inj_valid |-> !is_crit_vnet(inj_msg.vnet))
    else $error("net_iface: controller passed a critical vnet number");

endmodule
