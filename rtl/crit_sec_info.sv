// crit_sec_info: per-processor criticality flag.
//
// Each processor owns one `crit` bit that says whether the thread running on
// it is inside a critical section. Software marks the boundaries with a
// special (magic) instruction placed right after acquiring a lock and right
// before releasing it; every such instruction flips the bit, so it is set
// while the lock is held and clear otherwise. The bit then tags the memory
// requests the processor issues as critical or not.
//
// Interface: `magic_toggle` is a one-cycle pulse per executed magic
// instruction; `crit` is the registered flag. `toggle_count` counts the
// toggles (critical-section entries plus exits) for statistics.
// Timing: `crit` changes on the clock edge that samples the pulse.
// The toggle behaviour follows the paper; clearing the flag on reset and
// the statistics counter are this design's choices.
module crit_sec_info #(
  parameter int unsigned CNT_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             magic_toggle,
  output logic             crit,
  output logic [CNT_W-1:0] toggle_count
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      crit         <= 1'b0;
      toggle_count <= '0;
    end else if (magic_toggle) begin
      crit         <= ~crit;
      toggle_count <= toggle_count + 1'b1;
    end
  end

endmodule
