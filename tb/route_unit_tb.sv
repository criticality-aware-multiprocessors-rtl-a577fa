// Self-checking test of route_unit. For the 16-node hypercube, the 4x4
// torus and the 16-port crossbar, one routing unit per node is built; every
// (source, destination) pair is walked hop by hop through the units, using
// neighbour rules computed here, and must reach the destination by a
// shortest path (Hamming distance on the hypercube, wrap-around Manhattan
// distance on the torus, x before y).
module route_unit_tb;
  import cam_pkg::*;
  localparam int N = 16, X = 4;
  int checks = 0, failures = 0;
  logic [NODE_ID_W-1:0] dest;
  logic [2:0] hc_port [N];
  logic [2:0] to_port [N];
  logic [3:0] xb_port;

  for (genvar n = 0; n < N; n++) begin : g_n
    route_unit #(.TOPOLOGY(TOPO_HYPERCUBE), .NUM_NODES(N), .NUM_PORTS(5), .NODE_ID(n))
      u_hc (.dest(dest), .port(hc_port[n]));
    route_unit #(.TOPOLOGY(TOPO_TORUS_2D), .NUM_NODES(N), .NUM_PORTS(5), .NODE_ID(n))
      u_to (.dest(dest), .port(to_port[n]));
  end
  route_unit #(.TOPOLOGY(TOPO_CROSSBAR), .NUM_NODES(N), .NUM_PORTS(N), .NODE_ID(0))
    u_xb (.dest(dest), .port(xb_port));

  function automatic int popcount(int v);
    int c = 0;
    for (int i = 0; i < 32; i++) c += (v >> i) & 1;
    return c;
  endfunction
  function automatic int ring(int a, int b);
    int d = (b - a + X) % X;
    return d <= X / 2 ? d : X - d;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < N; s++)
      for (int d = 0; d < N; d++) begin
        int cur, hops, p, x, y;
        bit xdone;
        dest = NODE_ID_W'(d);
        #1;
        // Crossbar.
        checks++;
        if (xb_port != 4'(d)) begin failures++; $display("crossbar port for %0d", d); end
        // Hypercube.
        cur = s; hops = 0;
        while (hops < 10) begin
          p = hc_port[cur];
          if (p == 0) break;
          cur = cur ^ (1 << (p - 1));
          hops++;
        end
        checks++;
        if (cur != d || hops != popcount(s ^ d)) begin
          failures++;
          $display("hypercube %0d->%0d ended at %0d after %0d hops", s, d, cur, hops);
        end
        // Torus.
        cur = s; hops = 0; xdone = 0;
        while (hops < 10) begin
          p = to_port[cur];
          if (p == 0) break;
          x = cur % X; y = cur / X;
          if (p >= 3) xdone = 1;
          else if (xdone) begin failures++; $display("torus x after y"); end
          case (p)
            1: x = (x + 1) % X;
            2: x = (x + X - 1) % X;
            3: y = (y + 1) % X;
            default: y = (y + X - 1) % X;
          endcase
          cur = y * X + x;
          hops++;
        end
        checks++;
        if (cur != d || hops != ring(s % X, d % X) + ring(s / X, d / X)) begin
          failures++;
          $display("torus %0d->%0d ended at %0d after %0d hops", s, d, cur, hops);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
