// msg_buffer: message buffer of one virtual network at the input of a link.
//
// A first-in first-out queue that accepts up to NW messages in one cycle,
// one from each input port of the switch, so that the switch never has to
// make two inputs wait for each other (the modelled switch is contention
// free). Writes of one cycle are queued in port order. One message leaves
// per cycle.
//
// Interface: `wr_en[i]`/`wr_data[i]` write port i; `space_ok` is high when
// at least NW slots are free, so that every port may write this cycle
// whatever the others do; `rd_valid`/`rd_data` show the oldest message,
// `rd_en` removes it. `empty` and `count` give the fill level.
// Timing: a message written in cycle t can be read from cycle t+1.
// Depth (16) and the all-ports-at-once admission rule are this design's
// choices; the paper only names the message buffers.
module msg_buffer
  import cam_pkg::*;
#(
  parameter type         T     = msg_t,
  parameter int unsigned DEPTH = 16,
  parameter int unsigned NW    = 5
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [NW-1:0]            wr_en,
  input  T                         wr_data [NW],
  output logic                     space_ok,
  output logic                     rd_valid,
  output T                         rd_data,
  input  logic                     rd_en,
  output logic                     empty,
  output logic [$clog2(DEPTH+1)-1:0] count
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);

  T             mem [DEPTH];
  logic [PW-1:0] rd_ptr, wr_ptr;
  logic [CW-1:0] n_wr;
  logic [PW-1:0] slot [NW];

  // Slot of each write: after the writes of lower-numbered ports.
  always_comb begin
    int unsigned k;
    k = 0;
    for (int i = 0; i < NW; i++) begin
      slot[i] = PW'((int'(wr_ptr) + k) % DEPTH);
      if (wr_en[i]) k = k + 1;
    end
    n_wr = CW'(k);
  end

  assign empty    = (count == '0);
  assign rd_valid = !empty;
  assign rd_data  = mem[rd_ptr];
  assign space_ok = (32'(count) + NW <= DEPTH);

  always_ff @(posedge clk) begin
    for (int i = 0; i < NW; i++)
      if (wr_en[i]) mem[slot[i]] <= wr_data[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      wr_ptr <= PW'((int'(wr_ptr) + int'(n_wr)) % DEPTH);
      if (rd_en && !empty) rd_ptr <= PW'((int'(rd_ptr) + 1) % DEPTH);
      count <= count + n_wr - CW'(rd_en && !empty);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) (|wr_en) |-> space_ok)
    else $error("msg_buffer: write without space");
  assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> !empty)
    else $error("msg_buffer: read while empty");

endmodule
