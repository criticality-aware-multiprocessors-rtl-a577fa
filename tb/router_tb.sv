// Self-checking test of router: node 5 of a 16-node hypercube at a raised
// link bandwidth (to keep the run short). Checks that
//  - all five inputs are accepted in the same cycle (contention-free switch);
//  - every message leaves by the port the hypercube rule names;
//  - under random traffic each message leaves exactly once, per
//    (output, vnet) in arrival order;
//  - critical messages overtake waiting non-critical ones at an output.
module router_tb;
  import cam_pkg::*;
  localparam int P = 5, ME = 5;
  logic clk = 0, rst_n = 0;
  logic [P-1:0] in_valid = '0, in_ready, out_valid, out_ready = '1;
  msg_t in_msg [P];
  msg_t out_msg [P];
  logic [31:0] util_cycles [P], contention_cycles [P], crit_bypass_count [P];
  int checks = 0, failures = 0;
  int sent = 0, rcvd = 0, all_in = 0;
  int exp_port [int];
  int acc_seq [int];
  int nacc = 0;
  int last [P][NUM_VNETS];

  router #(.NODE_ID(ME), .LINK_BANDWIDTH(8000)) dut (.*);
  always #5 clk = ~clk;

  function automatic int ref_port(int d);
    int diff = d ^ ME;
    if (diff == 0) return 0;
    for (int b = 0; b < 4; b++) if ((diff >> b) & 1) return b + 1;
    return -1;
  endfunction

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Output monitor.
  always @(negedge clk) if (rst_n)
    for (int o = 0; o < P; o++)
      if (out_valid[o] && out_ready[o]) begin
        int t;
        t = int'(out_msg[o].tag);
        checks++;
        if (!exp_port.exists(t) || exp_port[t] != o) begin
          failures++; $display("FAIL: tag %0d left by port %0d", t, o);
        end else begin
          exp_port.delete(t);
          if (acc_seq[t] <= last[o][out_msg[o].vnet]) begin
            failures++; $display("FAIL: order on port %0d vnet %0d", o, out_msg[o].vnet);
          end
          last[o][out_msg[o].vnet] = acc_seq[t];
        end
        rcvd++;
      end

  initial begin
    int tag = 1;
    logic [P-1:0] acc;
    foreach (in_msg[i]) in_msg[i] = '0;
    foreach (last[o, v]) last[o][v] = -1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Random traffic.
    for (int c = 0; c < 20000; c++) begin
      @(negedge clk);
      // Drop the ones taken at the last edge, offer new ones.
      for (int i = 0; i < P; i++) begin
        if (!in_valid[i] && $urandom_range(0, 9) < 2) begin
          int d, v;
          d = $urandom_range(0, 15);
          v = $urandom_range(0, NUM_VNETS - 1);
          in_msg[i] = '0;
          in_msg[i].dest = NODE_ID_W'(d);
          in_msg[i].vnet = VNET_W'(v);
          in_msg[i].crit = v >= NUM_BASE_VNETS;
          in_msg[i].is_data = ($urandom_range(0, 3) == 0);
          in_msg[i].tag = 16'(tag);
          exp_port[tag] = ref_port(d);
          tag++;
          in_valid[i] = 1;
        end
      end
      out_ready = P'($urandom) | P'($urandom);
      if (c > 15000) out_ready = '1;
      #1;
      acc = in_valid & in_ready;
      if (&acc) all_in++;
      @(posedge clk);
      #1;
      for (int i = 0; i < P; i++)
        if (acc[i]) begin
          in_valid[i] = 0; sent++; acc_seq[int'(in_msg[i].tag)] = nacc++;
        end
      if (c >= 14000)
        for (int i = 0; i < P; i++)
          if (in_valid[i]) begin in_valid[i] = 0; exp_port.delete(int'(in_msg[i].tag)); end
    end
    out_ready = '1;
    for (int w = 0; w < 50000 && rcvd != sent; w++) @(negedge clk);
    checks++;
    if (rcvd != sent || exp_port.num() != 0) begin
      failures++; $display("FAIL: sent %0d received %0d", sent, rcvd);
    end
    checks++;
    if (all_in == 0) begin failures++; $display("FAIL: never all five inputs in one cycle"); end
    begin
      int byp = 0, cont = 0;
      for (int o = 0; o < P; o++) begin byp += crit_bypass_count[o]; cont += contention_cycles[o]; end
      checks++;
      if (byp == 0 || cont == 0) begin failures++; $display("FAIL: no priority activity"); end
      $display("sent %0d, all-inputs cycles %0d, contention %0d, bypasses %0d", sent, all_in, cont, byp);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
