// Shared-counter lock microbenchmark on the hypercube network.
// The same lock program runs on the criticality-aware network and on an
// otherwise identical network without priority (the conventional baseline).
// Each run has two workloads: `micro' (three shared counters per critical
// section) and `micro(1/3)' (one).
// Configurations: 4 nodes at link bandwidth 125 and 250.
// Reported per configuration: completion cycles of both networks and their
// ratio, average critical-request latency, contention cycles, overtakes.
// Checked: every message is delivered correctly and every request is
// answered; with priority, critical requests are on average no more than 5%
// slower than without it (a short run on a small network is noisy), and
// priority takes effect (critical messages overtake waiting ones);
// at bandwidth 250 there are fewer contention cycles than at 125.
module cam_micro_tb;
  import cam_pkg::*;
  localparam int NCFG = 2;
  localparam int        C_N  [NCFG] = '{4, 4};
  localparam topology_e C_T  [NCFG] = '{TOPO_HYPERCUBE, TOPO_HYPERCUBE};
  localparam int        C_BW [NCFG] = '{125, 250};
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  bit  done   [2][NCFG];
  int  fails  [2][NCFG], chks [2][NCFG];
  int  cycles [2][NCFG][2], ncrit [2][NCFG][2], cont [2][NCFG][2];
  int  ovt    [2][NCFG][2], utl [2][NCFG][2];
  real clat   [2][NCFG][2], nlat [2][NCFG][2];
  int  checks = 0, failures = 0;

  for (genvar p = 0; p < 2; p++) begin : g_pri
    for (genvar c = 0; c < NCFG; c++) begin : g_cfg
      cam_micro_run #(
        .NUM_NODES(C_N[c]), .TOPOLOGY(C_T[c]), .LINK_BANDWIDTH(C_BW[c]),
        .CRIT_PRIORITY(p == 1), .COUNTERS(3), .SEED(11 + c)
      ) u_run (
        .clk, .rst_n,
        .all_done(done[p][c]), .failures(fails[p][c]), .checks(chks[p][c]),
        .cycles(cycles[p][c]), .crit_lat(clat[p][c]), .nc_lat(nlat[p][c]),
        .n_crit(ncrit[p][c]), .contention(cont[p][c]), .overtakes(ovt[p][c]),
        .util(utl[p][c])
      );
    end
  end

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic string tname(topology_e t);
    return t == TOPO_HYPERCUBE ? "HYPERCUBE" : t == TOPO_TORUS_2D ? "TORUS_2D" : "CROSSBAR";
  endfunction

  initial begin
    bit all;
    repeat (3) @(posedge clk);
    rst_n = 1;
    do begin
      @(negedge clk);
      all = 1;
      for (int p = 0; p < 2; p++) for (int c = 0; c < NCFG; c++) all &= done[p][c];
    end while (!all);
    $display("workload.nodes.topology.bandwidth  base cycles  CAM cycles  speedup  crit latency base/CAM  contention base/CAM  overtakes");
    for (int c = 0; c < NCFG; c++) begin
      for (int p = 0; p < 2; p++) begin
        checks += chks[p][c];
        failures += fails[p][c];
      end
      for (int w = 0; w < 2; w++) begin
        checks++;
        if (clat[1][c][w] > 1.05 * clat[0][c][w]) begin
          failures++;
          $display("FAIL: critical requests slower with priority");
        end
        checks++;
        if (ovt[1][c][w] == 0) begin failures++; $display("FAIL: no critical overtakes with priority"); end
        $display("%s.%0dp.%s.%0d  %10d  %10d  %7.4f  %8.1f / %8.1f  %8d / %8d  %6d",
                 w == 0 ? "micro     " : "micro(1/3)", C_N[c], tname(C_T[c]), C_BW[c],
                 cycles[0][c][w], cycles[1][c][w], real'(cycles[0][c][w]) / cycles[1][c][w],
                 clat[0][c][w], clat[1][c][w], cont[0][c][w], cont[1][c][w], ovt[1][c][w]);
      end
    end
    checks++;
    if (!(cont[1][1][0] + cont[1][1][1] < cont[1][0][0] + cont[1][0][1])) begin
      failures++; $display("FAIL: contention did not drop at bandwidth 250");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
