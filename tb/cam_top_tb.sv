// End-to-end test of cam_top at its default size: 16 nodes in a hypercube,
// link bandwidth 125, critical-first links.
//
// Phase 1 checks the latency of single messages on an idle network: a
// message crossing H links (the last one to the destination node) becomes
// visible at the destination H*(L+1)-1 cycles after it is accepted, L being
// 64 cycles for a control and 576 for a data message.
//
// Phase 2 runs a small lock-style program on every node, in the manner of
// the shared-counter microbenchmark: outside the lock a node issues
// non-critical requests; it then executes the magic instruction (flag on),
// issues requests for shared counters, waits for their data, executes the
// magic instruction again (flag off) and repeats. Each request goes to the
// block's home node, whose directory model answers with data or forwards
// the request to an owner node that answers instead; answers inherit the
// request's criticality. The testbench plays the processors and the
// coherence controllers; the network is the design under test.
//
// Phase 3 sends a burst of requests from every node to one directory, so
// that buffers fill and the network holds back injection.
//
// Checked: every message reaches its destination once, on the right class
// of virtual network; every request gets exactly one answer with its
// criticality; the request counters agree. Mechanisms that must occur at
// least once: flag toggles, critical and non-critical requests, forwarded
// requests, multi-hop routes, contention at a link buffer, a critical
// message overtaking a non-critical one, injection and ejection back-pressure.
module cam_top_tb;
  import cam_pkg::*;
  localparam int N = 16;
  localparam int CTRL_L = 64, DATA_L = 576;
  localparam int ITER = 4;          // lock iterations per node
  localparam int NC_REQ = 3;        // non-critical requests per iteration
  localparam int C_REQ = 2;         // critical requests per iteration
  localparam int BURST = 24;        // requests per node in the final burst

  logic clk = 0, rst_n = 0;
  logic [N-1:0] magic_toggle = '0, crit;
  logic [N-1:0] inj_valid = '0, inj_ready, ej_valid, ej_ready = '1;
  msg_t inj_msg [N];
  msg_t ej_msg [N];
  logic [31:0] crit_req_count [N], noncrit_req_count [N];
  logic [31:0] total_util_cycles, total_contention_cycles, total_crit_bypass;

  cam_top dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int popcount(int v);
    int c = 0;
    for (int i = 0; i < 8; i++) c += (v >> i) & 1;
    return c;
  endfunction

  // ------------------------------------------------------------ node models
  msg_t q [N][$];                 // outgoing messages of each node
  bit   phase2 = 0;
  int   state [N];                // 0 work, 1 enter, 2 critical, 3 exit, 4 done
  int   iter [N], issued [N], outstanding [N];
  int   seq [N];
  bit   exp_crit [int];           // request id -> criticality
  int   pending = 0;
  int   n_toggle = 0, n_crit_req = 0, n_nc_req = 0, n_fwd = 0, n_resp = 0;
  int   n_far = 0, inj_stall = 0, ej_stall = 0, n_msgs_in = 0, n_msgs_out = 0;
  int   max_hops = 0;

  function automatic msg_t new_req(int n, bit c);
    msg_t m;
    int id;
    m = '0;
    id = (n << 12) | (seq[n] & 12'hFFF);
    seq[n]++;
    // Shared counters for critical requests, private lines otherwise.
    m.addr = c ? 32'(($urandom_range(0, 7) << 6) | ($urandom_range(0, 1) << 10))
               : 32'(32'h10000 + ($urandom_range(0, 4095) << 6));
    m.dest = NODE_ID_W'((m.addr >> 6) % N);
    m.vnet = VNET_REQUEST;
    m.crit = 1'b0;                // the network interface adds the flag
    m.tag  = 16'(id);
    exp_crit[id] = c;
    return m;
  endfunction

  // Handshakes are sampled at the clock edge.
  always @(posedge clk) if (rst_n) begin
    for (int n = 0; n < N; n++) begin
      if (inj_valid[n] && !inj_ready[n]) inj_stall++;
      if (ej_valid[n] && !ej_ready[n]) ej_stall++;
      if (inj_valid[n] && inj_ready[n]) begin
        void'(q[n].pop_front());
        n_msgs_in++;
      end
      if (ej_valid[n] && ej_ready[n] && phase2) begin
        msg_t m, r;
        int id, h;
        m = ej_msg[n];
        id = int'(m.tag);
        n_msgs_out++;
        h = popcount(int'(m.src) ^ n);
        if (h > max_hops) max_hops = h;
        if (h >= 2) n_far++;
        check(m.dest == NODE_ID_W'(n), "delivered to its destination");
        check(exp_crit.exists(id) && m.crit == exp_crit[id],
              $sformatf("class of message %0h (vnet %0d crit %0b)", id, m.vnet, m.crit));
        r = '0;
        r.addr = m.addr;
        r.tag  = m.tag;
        r.crit = m.crit;          // answers inherit the criticality
        case (m.vnet)
          VNET_REQUEST: begin
            if (m.addr[10]) begin // owned elsewhere: forward to the owner
              r.vnet = VNET_FORWARD;
              r.dest = NODE_ID_W'((n + 5) % N);
              if (r.dest == NODE_ID_W'(id >> 12)) r.dest = NODE_ID_W'((n + 6) % N);
              r.is_data = 1'b0;
              n_fwd++;
            end else begin
              r.vnet = VNET_RESPONSE;
              r.dest = NODE_ID_W'(id >> 12);
              r.is_data = 1'b1;
            end
            q[n].push_back(r);
          end
          VNET_FORWARD: begin
            r.vnet = VNET_RESPONSE;
            r.dest = NODE_ID_W'(id >> 12);
            r.is_data = 1'b1;
            q[n].push_back(r);
          end
          default: begin          // answer to this node's request
            check(int'(id >> 12) == n, "answer reached its requester");
            check(m.is_data, "answer carries data");
            exp_crit.delete(id);
            if (outstanding[n] > 0) outstanding[n]--;
            pending--;
            n_resp++;
          end
        endcase
      end
    end
  end

  // Processor programs and output drive, between clock edges.
  always @(negedge clk) begin
    for (int n = 0; n < N; n++) begin
      magic_toggle[n] = 1'b0;
      if (phase2) begin
        case (state[n])
          0: if (issued[n] < NC_REQ) begin
               if (outstanding[n] < 2 && $urandom_range(0, 3) == 0) begin
                 q[n].push_back(new_req(n, 0));
                 issued[n]++; outstanding[n]++; pending++; n_nc_req++;
               end
             end else if (outstanding[n] == 0) begin
               magic_toggle[n] = 1'b1;           // lock acquired
               n_toggle++; issued[n] = 0; state[n] = 2;
             end
          2: if (issued[n] < C_REQ) begin
               if (outstanding[n] < 1) begin
                 q[n].push_back(new_req(n, 1));
                 issued[n]++; outstanding[n]++; pending++; n_crit_req++;
               end
             end else if (outstanding[n] == 0) begin
               magic_toggle[n] = 1'b1;           // about to release the lock
               n_toggle++; issued[n] = 0; iter[n]++;
               state[n] = (iter[n] == ITER) ? 4 : 0;
             end
          default: ;
        endcase
      end
      inj_valid[n] = (q[n].size() != 0);
      inj_msg[n]   = (q[n].size() != 0) ? q[n][0] : '0;
      ej_ready[n]  = phase2 ? ($urandom_range(0, 7) != 0) : 1'b1;
    end
  end

  // ------------------------------------------------------------- sequencing
  task automatic lone(input int s, input int d, input bit data);
    int t0, h, expl, L;
    msg_t m;
    m = '0;
    m.dest = NODE_ID_W'(d);
    m.vnet = data ? VNET_RESPONSE : VNET_REQUEST;
    m.is_data = data;
    m.tag = 16'hF000;
    q[s].push_back(m);
    do @(posedge clk); while (!(inj_valid[s] && inj_ready[s]));
    t0 = cyc + 1;                   // accepted at this edge
    while (!(ej_valid[d])) @(negedge clk);
    h = popcount(s ^ d) + 1;
    L = data ? DATA_L : CTRL_L;
    expl = h * (L + 1) - 1;
    check(cyc - t0 == expl, $sformatf("latency %0d->%0d: %0d cycles, expected %0d", s, d, cyc - t0, expl));
    check(ej_msg[d].tag == 16'hF000 && ej_msg[d].src == NODE_ID_W'(s), "lone message content");
    @(negedge clk);
  endtask

  initial begin
    foreach (state[n]) begin state[n] = 0; iter[n] = 0; issued[n] = 0; outstanding[n] = 0; seq[n] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // Phase 1: idle-network latency.
    lone(0, 15, 0);
    lone(15, 0, 1);
    lone(6, 6, 0);
    n_msgs_in = 0;
    // Phase 2: lock program on every node.
    phase2 = 1;
    while (!(pending == 0 && n_toggle == 2 * N * ITER)) @(negedge clk);
    repeat (10) @(negedge clk);
    // Phase 3: every node sends a burst of requests to node 0's directory,
    // enough to fill the link buffers on the way and hold back injection.
    for (int n = 1; n < N; n++)
      for (int j = 0; j < BURST; j++) begin
        msg_t m;
        m = new_req(n, 0);
        m.addr = 32'(32'h20000 + (j << 11));
        m.dest = '0;
        q[n].push_back(m);
        pending++; n_nc_req++;
      end
    while (pending != 0) @(negedge clk);
    repeat (10) @(negedge clk);
    phase2 = 0;
    begin
      int sc = 0, sn = 0;
      for (int n = 0; n < N; n++) begin sc += crit_req_count[n]; sn += noncrit_req_count[n]; end
      check(sc == n_crit_req + 0, $sformatf("critical request count %0d vs %0d", sc, n_crit_req));
      check(sn == n_nc_req + 2, $sformatf("non-critical request count %0d vs %0d", sn, n_nc_req + 2));
      check(n_msgs_in == n_msgs_out, $sformatf("messages in %0d out %0d", n_msgs_in, n_msgs_out));
      check(exp_crit.num() == 0, "no request left unanswered");
      check(crit == '0, "all flags cleared after the last unlock");
      // Mechanisms.
      check(n_toggle > 0, "magic-instruction toggles");
      check(n_crit_req > 0 && n_nc_req > 0, "critical and non-critical requests");
      check(n_fwd > 0, "forwarded requests");
      check(max_hops == 4 && n_far > 0, "multi-hop routes");
      check(total_contention_cycles > 0, "contention at a link buffer");
      check(total_crit_bypass > 0, "critical message overtook a non-critical one");
      check(inj_stall > 0, "injection back-pressure");
      check(ej_stall > 0, "ejection back-pressure");
      $display("cycles %0d: toggles %0d, requests crit %0d / non-crit %0d, forwards %0d, answers %0d",
               cyc, n_toggle, sc, sn, n_fwd, n_resp);
      $display("links %0d: utilisation %0d cycles, contention %0d cycles, overtakes %0d, stalls inj %0d ej %0d",
               N * 5, total_util_cycles, total_contention_cycles, total_crit_bypass, inj_stall, ej_stall);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
