// cam_micro_run: one run of the shared-counter lock program on one network
// configuration, used by cam_micro_tb.
//
// Two workloads run one after the other, the network being reset between
// them: `micro' touches COUNTERS shared counters per critical section,
// `micro(1/3)' a third as many (COUNTERS/3, at least one).
// Every node repeats ITER times: issue NC_REQ non-critical requests to
// private lines (up to four outstanding), execute the magic instruction
// (flag on), read-modify-write COUNTERS shared counters one after another
// (one critical request each, answered with data by the counter's home
// directory), execute the magic instruction again (flag off). Directory
// models answer every request with data after DIR_DELAY cycles.
// Outputs the cycle at which the last node finished, the average latency
// of critical and non-critical requests, and the link statistics.
module cam_micro_run
  import cam_pkg::*;
#(
  parameter int          NUM_NODES      = 16,
  parameter topology_e   TOPOLOGY       = TOPO_HYPERCUBE,
  parameter int          LINK_BANDWIDTH = 125,
  parameter bit          CRIT_PRIORITY  = 1'b1,
  parameter int          ITER           = 4,
  parameter int          NC_REQ         = 6,
  parameter int          COUNTERS       = 3,
  parameter int          SEED           = 1
) (
  input  logic clk,
  input  logic rst_n,
  output bit   all_done,
  output int   failures,
  output int   checks,
  // results per workload: [0] micro, [1] micro(1/3)
  output int   cycles     [2],
  output real  crit_lat   [2],
  output real  nc_lat     [2],
  output int   n_crit     [2],
  output int   contention [2],
  output int   overtakes  [2],
  output int   util       [2]
);
  bit done;
  int wl = 0;                      // workload being run
  int counters;
  logic run_rst_n = 0;             // network reset, also between workloads
  assign counters = (wl == 0) ? COUNTERS : ((COUNTERS / 3 > 0) ? COUNTERS / 3 : 1);
  localparam int N = NUM_NODES;
  localparam int DIR_DELAY = 4;

  logic [N-1:0] magic_toggle = '0, crit;
  logic [N-1:0] inj_valid = '0, inj_ready, ej_valid, ej_ready = '1;
  msg_t inj_msg [N];
  msg_t ej_msg [N];
  logic [31:0] crit_req_count [N], noncrit_req_count [N];
  logic [31:0] total_util_cycles, total_contention_cycles, total_crit_bypass;

  cam_top #(
    .NUM_NODES(NUM_NODES), .TOPOLOGY(TOPOLOGY),
    .LINK_BANDWIDTH(LINK_BANDWIDTH), .CRIT_PRIORITY(CRIT_PRIORITY)
  ) dut (
    .clk, .rst_n(run_rst_n), .magic_toggle, .crit, .inj_valid, .inj_ready, .inj_msg,
    .ej_valid, .ej_ready, .ej_msg, .crit_req_count, .noncrit_req_count,
    .total_util_cycles, .total_contention_cycles, .total_crit_bypass
  );

  int cyc = 0;
  always @(posedge clk) if (run_rst_n) cyc <= cyc + 1;

  msg_t q [N][$];
  msg_t dq [N][$];               // directory answers waiting DIR_DELAY
  int   dt [N][$];
  int   state [N], iter [N], issued [N], outstanding [N], seq [N];
  int   t_issue [int];
  bit   is_c [int];
  int   finished = 0;
  longint sum_c = 0, sum_n = 0;
  int   cnt_c = 0, cnt_n = 0;
  int   rng;

  task automatic clear();
    foreach (state[n]) begin
      state[n] = 0; iter[n] = 0; issued[n] = 0; outstanding[n] = 0; seq[n] = 0;
      q[n].delete(); dq[n].delete(); dt[n].delete();
    end
    t_issue.delete(); is_c.delete();
    finished = 0; sum_c = 0; sum_n = 0; cnt_c = 0; cnt_n = 0;
    rng = SEED;
    done = 0;
  endtask

  initial begin
    failures = 0; checks = 0; all_done = 0;
    clear();
    wait (rst_n);
    for (int w = 0; w < 2; w++) begin
      @(negedge clk);
      wl = w;
      clear();
      run_rst_n = 0;
      repeat (2) @(negedge clk);
      cyc = 0;
      run_rst_n = 1;
      wait (done);
      @(negedge clk);
    end
    all_done = 1;
  end

  // Deterministic pseudo-random numbers, identical for the runs compared.
  function automatic int rnd(int range);
    rng = rng * 1103515245 + 12345;
    return ((rng >>> 8) & 32'h7fffff) % range;
  endfunction

  function automatic msg_t new_req(int n, bit c, int k);
    msg_t m;
    int id;
    m = '0;
    id = (n << 12) | (seq[n] & 12'hFFF);
    seq[n]++;
    m.addr = c ? 32'(k << 6) : 32'(32'h10000 + (rnd(4096) << 6));
    m.dest = NODE_ID_W'((m.addr >> 6) % N);
    m.vnet = VNET_REQUEST;
    m.tag  = 16'(id);
    t_issue[id] = cyc;
    is_c[id] = c;
    return m;
  endfunction

  always @(posedge clk) if (run_rst_n && !done) begin
    for (int n = 0; n < N; n++) begin
      if (inj_valid[n] && inj_ready[n]) void'(q[n].pop_front());
      if (ej_valid[n] && ej_ready[n]) begin
        msg_t m, r;
        int id;
        m = ej_msg[n];
        id = int'(m.tag);
        checks++;
        if (m.dest != NODE_ID_W'(n) || !is_c.exists(id) || m.crit != is_c[id]) failures++;
        if (m.vnet == VNET_REQUEST) begin
          r = '0;
          r.addr = m.addr; r.tag = m.tag; r.crit = m.crit;
          r.vnet = VNET_RESPONSE; r.dest = NODE_ID_W'(id >> 12); r.is_data = 1'b1;
          dq[n].push_back(r);
          dt[n].push_back(cyc + DIR_DELAY);
        end else begin
          if (is_c[id]) begin sum_c += cyc - t_issue[id]; cnt_c++; end
          else          begin sum_n += cyc - t_issue[id]; cnt_n++; end
          is_c.delete(id);
          outstanding[n]--;
        end
      end
      while (dq[n].size() != 0 && dt[n][0] <= cyc) begin
        q[n].push_back(dq[n].pop_front());
        void'(dt[n].pop_front());
      end
    end
  end

  always @(negedge clk) if (run_rst_n && !done) begin
    for (int n = 0; n < N; n++) begin
      magic_toggle[n] = 1'b0;
      case (state[n])
        0: if (issued[n] < NC_REQ) begin
             if (outstanding[n] < 4) begin
               q[n].push_back(new_req(n, 0, 0));
               issued[n]++; outstanding[n]++;
             end
           end else if (outstanding[n] == 0) begin
             magic_toggle[n] = 1'b1; issued[n] = 0; state[n] = 1;
           end
        1: if (issued[n] < counters) begin
             if (outstanding[n] == 0) begin
               q[n].push_back(new_req(n, 1, issued[n]));
               issued[n]++; outstanding[n]++;
             end
           end else if (outstanding[n] == 0) begin
             magic_toggle[n] = 1'b1; issued[n] = 0; iter[n]++;
             state[n] = (iter[n] == ITER) ? 2 : 0;
             if (iter[n] == ITER) finished++;
           end
        default: ;
      endcase
      inj_valid[n] = (q[n].size() != 0);
      inj_msg[n]   = (q[n].size() != 0) ? q[n][0] : '0;
    end
    if (finished == N) begin
      done = 1;
      cycles[wl] = cyc;
      crit_lat[wl] = (cnt_c != 0) ? real'(sum_c) / cnt_c : 0.0;
      nc_lat[wl]   = (cnt_n != 0) ? real'(sum_n) / cnt_n : 0.0;
      n_crit[wl] = 0;
      for (int k = 0; k < N; k++) n_crit[wl] += int'(crit_req_count[k]);
      contention[wl] = int'(total_contention_cycles);
      overtakes[wl]  = int'(total_crit_bypass);
      util[wl]       = int'(total_util_cycles);
      checks++;
      if (n_crit[wl] != N * ITER * counters || cnt_c != n_crit[wl]) failures++;
    end
  end
endmodule
