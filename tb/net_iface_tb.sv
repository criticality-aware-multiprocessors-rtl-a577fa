// Self-checking test of net_iface: random messages of every class with the
// node flag on and off; checks the vnet mapping, the source field, the
// return mapping and the request counters.
module net_iface_tb;
  import cam_pkg::*;
  logic clk = 0, rst_n = 0;
  logic crit = 0;
  logic inj_valid = 0, inj_ready, net_out_valid, net_out_ready = 1;
  msg_t inj_msg, net_out_msg;
  logic net_in_valid = 0, net_in_ready, ej_valid, ej_ready = 1;
  msg_t net_in_msg, ej_msg;
  logic [31:0] crit_req_count, noncrit_req_count;
  int checks = 0, failures = 0;
  int exp_c = 0, exp_n = 0;

  net_iface #(.NODE_ID(5)) dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    inj_msg = '0; net_in_msg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      logic [VNET_W-1:0] base;
      logic inh, expc;
      @(negedge clk);
      base = VNET_W'($urandom_range(0, NUM_BASE_VNETS - 1));
      inh  = $urandom_range(0, 1);
      crit = $urandom_range(0, 1);
      net_out_ready = ($urandom_range(0, 3) != 0);
      inj_valid = 1;
      inj_msg = '{dest: 8'($urandom_range(0, 15)), src: 8'hEE, vnet: base, crit: inh,
                  is_data: 1'($urandom), addr: $urandom, tag: 16'(i)};
      expc = inh | (base == 0 && crit);
      #1;
      check(net_out_valid && inj_ready == net_out_ready, "handshake");
      check(net_out_msg.src == 8'd5, "source field");
      check(net_out_msg.crit == expc, "crit flag");
      check(net_out_msg.vnet == (expc ? base + VNET_W'(NUM_BASE_VNETS) : base), "vnet mapping");
      check(net_out_msg.dest == inj_msg.dest && net_out_msg.addr == inj_msg.addr &&
            net_out_msg.tag == inj_msg.tag && net_out_msg.is_data == inj_msg.is_data, "payload");
      if (net_out_ready && base == 0) begin
        if (expc) exp_c++; else exp_n++;
      end
      // Return direction.
      net_in_valid = 1;
      net_in_msg = '{dest: 8'd5, src: 8'($urandom_range(0, 15)),
                     vnet: VNET_W'($urandom_range(0, NUM_VNETS - 1)), crit: 1'b0,
                     is_data: 1'($urandom), addr: $urandom, tag: 16'($urandom)};
      ej_ready = $urandom_range(0, 1);
      #1;
      check(ej_valid && net_in_ready == ej_ready, "eject handshake");
      check(ej_msg.vnet == (net_in_msg.vnet >= VNET_W'(NUM_BASE_VNETS) ?
                            net_in_msg.vnet - VNET_W'(NUM_BASE_VNETS) : net_in_msg.vnet), "base class");
      check(ej_msg.crit == (net_in_msg.vnet >= VNET_W'(NUM_BASE_VNETS)), "eject crit");
      check(ej_msg.addr == net_in_msg.addr && ej_msg.tag == net_in_msg.tag, "eject payload");
    end
    @(negedge clk);
    inj_valid = 0;
    @(negedge clk);
    check(crit_req_count == 32'(exp_c), "critical request count");
    check(noncrit_req_count == 32'(exp_n), "non-critical request count");
    check(exp_c > 10 && exp_n > 10, "both kinds seen");
    $display("requests: critical %0d non-critical %0d", crit_req_count, noncrit_req_count);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
