// throttle: input buffer and bandwidth limit of one network link, the
// point where the criticality-aware design gives critical traffic priority.
//
// Messages bound for the link wait in one buffer per virtual network. When
// the link is free the throttle picks the next message to send: with
// CRIT_PRIORITY set, any waiting message on a critical virtual network goes
// before every non-critical one; inside each of the two sets the virtual
// networks take turns (round robin). With CRIT_PRIORITY clear all virtual
// networks share one round robin, which is the behaviour of a conventional,
// criticality-unaware link. The chosen message then occupies the link for
// as many cycles as its size takes at the link bandwidth, after which it is
// offered to the next hop, which may hold it back (`out_ready` low).
//
// Statistics: `util_cycles` counts cycles the link is occupied;
// `contention_cycles` counts cycles in which critical and non-critical
// messages both wait in the buffers (the only place the design can reorder
// them); `crit_bypass_count` counts picks of a critical message made while
// a non-critical one was waiting.
//
// Interface: write ports from the switch (`wr_en`, `wr_msg`; a message goes
// to the buffer of its own `vnet`), `space_ok` per virtual network,
// output handshake `out_valid`/`out_ready`/`out_msg`.
// Timing: a message picked in cycle t is offered from cycle t+L, where
// L = ceil(bytes*1000/LINK_BANDWIDTH); a new pick may happen in the cycle
// the previous message is taken.
// Following the paper: critical-over-non-critical priority at the link's
// input buffer, the bandwidth parameter (125) and the contention-cycle
// definition. This design's choices: round robin inside each set, the
// serialisation model and the counter widths.
module throttle
  import cam_pkg::*;
#(
  parameter int unsigned NW             = 5,
  parameter int unsigned DEPTH          = 16,
  parameter int unsigned LINK_BANDWIDTH = DEFAULT_LINK_BANDWIDTH,
  parameter bit          CRIT_PRIORITY  = 1'b1,
  parameter int unsigned CNT_W          = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [NW-1:0]        wr_en,
  input  msg_t                 wr_msg [NW],
  output logic [NUM_VNETS-1:0] space_ok,
  output logic                 out_valid,
  input  logic                 out_ready,
  output msg_t                 out_msg,
  output logic [CNT_W-1:0]     util_cycles,
  output logic [CNT_W-1:0]     contention_cycles,
  output logic [CNT_W-1:0]     crit_bypass_count
);

  localparam int unsigned CTRL_CYCLES = link_cycles(CONTROL_BYTES, LINK_BANDWIDTH);
  localparam int unsigned DATA_CYCLES = link_cycles(DATA_BYTES, LINK_BANDWIDTH);
  localparam int unsigned LW = $clog2(DATA_CYCLES + 1);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  // ---------------------------------------------------------------- buffers
  logic [NUM_VNETS-1:0] buf_valid, buf_rd;
  msg_t                 buf_data [NUM_VNETS];

  for (genvar v = 0; v < NUM_VNETS; v++) begin : g_vnet
    logic [NW-1:0]  we;
    logic [CW-1:0]  cnt;   // fill level, unused here
    logic           emp;   // same as !buf_valid
    always_comb
      for (int i = 0; i < NW; i++)
        we[i] = wr_en[i] && (wr_msg[i].vnet == VNET_W'(v));
    msg_buffer #(.T(msg_t), .DEPTH(DEPTH), .NW(NW)) u_buf (
      .clk, .rst_n,
      .wr_en   (we),
      .wr_data (wr_msg),
      .space_ok(space_ok[v]),
      .rd_valid(buf_valid[v]),
      .rd_data (buf_data[v]),
      .rd_en   (buf_rd[v]),
      .empty   (emp),
      .count   (cnt)
    );
  end

  // ------------------------------------------------------------ arbitration
  logic [NUM_VNETS-1:0] crit_mask;
  always_comb
    for (int v = 0; v < NUM_VNETS; v++) crit_mask[v] = is_crit_vnet(VNET_W'(v));

  logic any_crit, any_noncrit;
  assign any_crit    = |(buf_valid &  crit_mask);
  assign any_noncrit = |(buf_valid & ~crit_mask);

  logic [VNET_W-1:0] rr_ptr;     // vnet after the last one served
  logic              pick_any;
  logic [VNET_W-1:0] pick;

  // Round robin over the candidate set starting at rr_ptr.
  always_comb begin
    logic [NUM_VNETS-1:0] cand;
    if (CRIT_PRIORITY && any_crit) cand = buf_valid & crit_mask;
    else                           cand = buf_valid;
    pick_any = |cand;
    pick     = '0;
    for (int k = NUM_VNETS - 1; k >= 0; k--) begin
      logic [VNET_W-1:0] v;
      v = VNET_W'((int'(rr_ptr) + k) % NUM_VNETS);
      if (cand[v]) pick = v;
    end
  end

  // ------------------------------------------------------------------- link
  logic          busy;
  logic [LW-1:0] remain;     // cycles left before the message is offered
  msg_t          tx;

  assign out_valid = busy && (remain == '0);
  assign out_msg   = tx;

  logic link_free, start;
  assign link_free = !busy || (out_valid && out_ready);
  assign start     = link_free && pick_any;

  always_comb begin
    buf_rd = '0;
    if (start) buf_rd[pick] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      remain <= '0;
      rr_ptr <= '0;
    end else begin
      if (start) begin
        busy   <= 1'b1;
        remain <= LW'((buf_data[pick].is_data ? DATA_CYCLES : CTRL_CYCLES) - 1);
        rr_ptr <= VNET_W'((int'(pick) + 1) % NUM_VNETS);
      end else begin
        if (out_valid && out_ready) busy <= 1'b0;
        if (busy && remain != '0)   remain <= remain - 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (start) tx <= buf_data[pick];
  end

  // ------------------------------------------------------------- statistics
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      util_cycles       <= '0;
      contention_cycles <= '0;
      crit_bypass_count <= '0;
    end else begin
      if (busy && remain != '0 || start) util_cycles <= util_cycles + 1'b1;
      if (any_crit && any_noncrit)       contention_cycles <= contention_cycles + 1'b1;
      if (start && any_noncrit && is_crit_vnet(pick))
        crit_bypass_count <= crit_bypass_count + 1'b1;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
                   out_valid && !out_ready |=> out_valid && $stable(out_msg))
    else $error("throttle: offered message changed before it was taken");

endmodule
