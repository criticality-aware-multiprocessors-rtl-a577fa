// route_unit: routing function of a switch.
//
// Given the node a message is for, returns the output port of this node's
// switch it must leave by. Port 0 is always the node's own (local) port.
//
//   Hypercube (default, NUM_NODES = 2^D): port d+1 links to the node whose
//     number differs in bit d. A message leaves by the port of the lowest
//     bit in which its destination differs from this node (dimension-order
//     routing, a shortest path).
//   2D torus (NUM_NODES = X*X): ports 1..4 lead to +x, -x, +y, -y
//     neighbours with wrap-around; x is corrected first, then y, each in
//     the shorter direction (+ on a tie).
//   Crossbar: one central switch with a port per node; port p leads to
//     node p, so the port is the destination itself.
//
// Purely combinational. The topologies come from the paper; the
// dimension-order rule and the port numbering are this design's choices.
module route_unit
  import cam_pkg::*;
#(
  parameter topology_e   TOPOLOGY  = TOPO_HYPERCUBE,
  parameter int unsigned NUM_NODES = 16,
  parameter int unsigned NUM_PORTS = 5,
  parameter int unsigned NODE_ID   = 0
) (
  input  logic [NODE_ID_W-1:0]           dest,
  output logic [$clog2(NUM_PORTS)-1:0]   port
);

  localparam int unsigned PW = $clog2(NUM_PORTS);
  localparam int unsigned D  = $clog2(NUM_NODES);
  // Torus side length: the integer square root of NUM_NODES.
  function automatic int unsigned isqrt(int unsigned n);
    int unsigned r;
    r = 0;
    while ((r + 1) * (r + 1) <= n) r++;
    return r;
  endfunction
  localparam int unsigned X = isqrt(NUM_NODES);

  always_comb begin
    port = '0;
    unique case (TOPOLOGY)
      TOPO_HYPERCUBE: begin
        logic [NODE_ID_W-1:0] diff;
        diff = dest ^ NODE_ID_W'(NODE_ID);
        for (int d = D - 1; d >= 0; d--)
          if (diff[d]) port = PW'(d + 1);
      end
      TOPO_TORUS_2D: begin
        int unsigned mx, my, dx, dy, tx, ty;
        mx = NODE_ID % X;
        my = NODE_ID / X;
        tx = int'(dest) % X;
        ty = int'(dest) / X;
        dx = (tx + X - mx) % X;
        dy = (ty + X - my) % X;
        if (dx != 0)      port = (dx <= X / 2) ? PW'(1) : PW'(2);
        else if (dy != 0) port = (dy <= X / 2) ? PW'(3) : PW'(4);
      end
      default: port = PW'(dest);   // crossbar
    endcase
  end

endmodule
