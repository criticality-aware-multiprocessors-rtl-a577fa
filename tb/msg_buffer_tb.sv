// Self-checking test of msg_buffer: random multi-port writes and reads,
// compared with a queue model; checks order (port order within a cycle),
// the space_ok rule and the fill level.
module msg_buffer_tb;
  localparam int DEPTH = 16, NW = 5;
  logic clk = 0, rst_n = 0;
  logic [NW-1:0] wr_en = '0;
  logic [31:0]   wr_data [NW];
  logic space_ok, rd_valid, rd_en = 0, empty;
  logic [31:0] rd_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0, n_read = 0, full_seen = 0;
  logic [31:0] model [$];

  msg_buffer #(.T(logic [31:0]), .DEPTH(DEPTH), .NW(NW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int seq = 0;
    foreach (wr_data[i]) wr_data[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 3000; c++) begin
      @(negedge clk);
      checks++;
      if (count != $bits(count)'(model.size()) || empty != (model.size() == 0) ||
          space_ok != (model.size() + NW <= DEPTH)) begin
        failures++;
        $display("level mismatch: count=%0d model=%0d space_ok=%0b", count, model.size(), space_ok);
      end
      if (!space_ok) full_seen++;
      if (rd_valid) begin
        checks++;
        if (rd_data != model[0]) begin
          failures++;
          $display("data mismatch: got %0d expected %0d", rd_data, model[0]);
        end
      end
      // Phases: fill fast, drain fast, mixed.
      rd_en = rd_valid && ($urandom_range(0, 9) < ((c / 500) % 2 == 0 ? 3 : 9));
      wr_en = '0;
      if (space_ok)
        for (int i = 0; i < NW; i++)
          if ($urandom_range(0, 9) < ((c / 500) % 2 == 0 ? 4 : 1)) begin
            wr_en[i] = 1'b1;
            wr_data[i] = seq++;
          end
      @(posedge clk);
      if (rd_en) begin void'(model.pop_front()); n_read++; end
      for (int i = 0; i < NW; i++) if (wr_en[i]) model.push_back(wr_data[i]);
    end
    checks++;
    if (full_seen == 0 || n_read < 500) begin
      failures++;
      $display("coverage: full_seen=%0d reads=%0d", full_seen, n_read);
    end
    $display("reads=%0d cycles without space=%0d", n_read, full_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
