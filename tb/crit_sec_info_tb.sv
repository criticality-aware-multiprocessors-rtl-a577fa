// Self-checking test of crit_sec_info: random magic-instruction pulses,
// flag and toggle count compared with a reference kept in the testbench.
module crit_sec_info_tb;
  logic clk = 0, rst_n = 0, magic_toggle = 0;
  logic crit;
  logic [31:0] toggle_count;
  int checks = 0, failures = 0;
  logic exp_crit = 0;
  int   exp_cnt = 0;

  crit_sec_info dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++; if (crit !== 1'b0 || toggle_count != 0) failures++;
    for (int i = 0; i < 500; i++) begin
      magic_toggle = ($urandom_range(0, 2) == 0);
      @(posedge clk);
      if (magic_toggle) begin exp_crit = ~exp_crit; exp_cnt++; end
      @(negedge clk);
      checks++;
      if (crit !== exp_crit || toggle_count != 32'(exp_cnt)) begin
        failures++;
        $display("mismatch at %0d: crit=%0b exp=%0b cnt=%0d exp=%0d", i, crit, exp_crit, toggle_count, exp_cnt);
      end
    end
    // Lock acquire / release pair: set while inside, clear after.
    magic_toggle = 0;
    if (crit) begin magic_toggle = 1; @(negedge clk); magic_toggle = 0; end
    checks++; if (crit !== 1'b0) failures++;
    magic_toggle = 1; @(negedge clk); magic_toggle = 0;
    checks++; if (crit !== 1'b1) failures++;
    repeat (5) @(negedge clk);
    checks++; if (crit !== 1'b1) failures++;
    magic_toggle = 1; @(negedge clk); magic_toggle = 0;
    checks++; if (crit !== 1'b0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
