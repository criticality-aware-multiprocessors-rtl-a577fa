// Self-checking test of throttle at the default link bandwidth (125):
//  1. latency of a lone control and a lone data message on an idle link
//     (ceil(bytes*1000/125) cycles: 64 and 576);
//  2. a directed case: non-critical messages waiting, critical ones arrive
//     later, all critical ones must leave first; contention and bypass
//     counters checked;
//  3. random traffic from all write ports with a stalling next hop: every
//     message delivered once, per-vnet order kept, and no non-critical
//     message picked while a critical one was waiting.
module throttle_tb;
  import cam_pkg::*;
  localparam int NW = 5;
  localparam int CTRL_L = 64, DATA_L = 576;
  logic clk = 0, rst_n = 0;
  logic [NW-1:0] wr_en = '0;
  msg_t wr_msg [NW];
  logic [NUM_VNETS-1:0] space_ok;
  logic out_valid, out_ready = 1;
  msg_t out_msg;
  logic [31:0] util_cycles, contention_cycles, crit_bypass_count;
  int checks = 0, failures = 0;
  int cyc = 0;

  throttle #(.NW(NW)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic msg_t mk(int tag, int vnet, bit data);
    msg_t m;
    m = '0;
    m.tag = 16'(tag);
    m.vnet = VNET_W'(vnet);
    m.crit = vnet >= NUM_BASE_VNETS;
    m.is_data = data;
    m.addr = 32'(tag * 64);
    return m;
  endfunction

  // Bookkeeping for the random phase.
  int wcyc [int];      // tag -> write edge
  int pcyc [int];      // tag -> pick edge
  int vn   [int];      // tag -> vnet
  int last_tag [NUM_VNETS];
  int n_out = 0;
  bit rnd = 0;
  logic prev_valid = 0;

  // Output monitor for the random phase.
  always @(negedge clk) if (rnd) begin
    if (out_valid && !prev_valid) begin
      int t, L;
      t = int'(out_msg.tag);
      L = out_msg.is_data ? DATA_L : CTRL_L;
      if (!wcyc.exists(t)) begin
        checks++; failures++; $display("FAIL: unknown tag %0d", t);
      end else begin
        pcyc[t] = cyc - L + 1;
        checks++;
        if (t <= last_tag[vn[t]]) begin failures++; $display("FAIL: order on vnet %0d", vn[t]); end
        last_tag[vn[t]] = t;
      end
    end
    prev_valid = out_valid && !out_ready;
    if (out_valid && out_ready) n_out++;
  end

  initial begin
    int t0, lat, tag;
    msg_t got [$];
    foreach (wr_msg[i]) wr_msg[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- 1. latency
    foreach (wr_msg[i]) wr_msg[i] = '0;
    for (int d = 0; d < 2; d++) begin
      @(negedge clk);
      wr_en = 5'b00100; wr_msg[2] = mk(100 + d, 1, d[0]);
      @(posedge clk); t0 = cyc + 1;
      @(negedge clk); wr_en = '0;
      while (!out_valid) @(negedge clk);
      lat = cyc - t0;
      check(lat == (d ? DATA_L : CTRL_L), $sformatf("latency %0d for %s", lat, d ? "data" : "control"));
      check(out_msg.tag == 16'(100 + d), "latency message tag");
      @(negedge clk);
    end
    check(util_cycles == 32'(CTRL_L + DATA_L), $sformatf("utilisation %0d", util_cycles));
    check(contention_cycles == 0, "no contention yet");

    // ---- 2. directed priority
    @(negedge clk);
    out_ready = 0;
    wr_en = 5'b00001; wr_msg[0] = mk(1, 0, 0);          // goes into the link
    @(negedge clk);
    wr_en = 5'b01110;                                   // three non-critical
    wr_msg[1] = mk(2, 0, 0); wr_msg[2] = mk(3, 1, 0); wr_msg[3] = mk(4, 2, 0);
    @(negedge clk);
    wr_en = 5'b10011;                                   // three critical
    wr_msg[0] = mk(5, 3, 0); wr_msg[1] = mk(6, 4, 0); wr_msg[4] = mk(7, 5, 0);
    @(negedge clk);
    wr_en = 5'b00001; wr_msg[0] = mk(8, 1, 0);          // one more non-critical
    @(negedge clk);
    wr_en = '0;
    repeat (100) @(negedge clk);
    check(contention_cycles > 90, $sformatf("contention counted (%0d)", contention_cycles));
    out_ready = 1;
    while (got.size() < 8) begin
      if (out_valid && out_ready) got.push_back(out_msg);
      @(negedge clk);
    end
    check(got[0].tag == 1, "message already on the link leaves first");
    for (int i = 1; i <= 3; i++) check(got[i].crit, $sformatf("position %0d is critical", i));
    for (int i = 4; i <= 7; i++) check(!got[i].crit, $sformatf("position %0d is non-critical", i));
    check(crit_bypass_count == 3, $sformatf("bypass count %0d", crit_bypass_count));

    // ---- 3. random traffic
    repeat (5) @(negedge clk);
    foreach (last_tag[v]) last_tag[v] = -1;
    rnd = 1;
    tag = 1000;
    for (int c = 0; c < 60000; c++) begin
      @(negedge clk);
      out_ready = ($urandom_range(0, 3) != 0);
      wr_en = '0;
      if (c < 50000)
        for (int i = 0; i < NW; i++) begin
          int v;
          v = $urandom_range(0, NUM_VNETS - 1);
          if ($urandom_range(0, 999) < 3 && space_ok[v]) begin
            wr_en[i] = 1;
            wr_msg[i] = mk(tag, v, $urandom_range(0, 7) == 0);
            wcyc[tag] = cyc + 1;
            vn[tag] = v;
            tag++;
          end
        end
    end
    rnd = 0;
    check(n_out == wcyc.num(), $sformatf("delivered %0d of %0d", n_out, wcyc.num()));
    // Priority rule: a non-critical pick never happens while a critical
    // message sits in the buffers.
    begin
      int viol = 0, pairs = 0;
      foreach (pcyc[n]) if (vn[n] < NUM_BASE_VNETS)
        foreach (pcyc[c]) if (vn[c] >= NUM_BASE_VNETS) begin
          if (wcyc[c] < pcyc[n] && pcyc[c] > pcyc[n]) viol++;
          if (pcyc[c] > pcyc[n] - 600 && pcyc[c] < pcyc[n] + 600) pairs++;
        end
      check(viol == 0, $sformatf("%0d non-critical picks while critical waited", viol));
      check(pairs > 0, "random phase mixed both kinds");
    end
    $display("random phase: %0d messages, contention %0d cycles, bypasses %0d",
             n_out, contention_cycles, crit_bypass_count);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
