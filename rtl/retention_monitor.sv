// retention_monitor: per-block monitor counters of a relaxed-retention STT-RAM cache.
//
// Every cache block has a 2-bit counter, a k = 4 state FSM clocked by the retention
// timer's tick (period = retention/k). A block whose data was fully (re)written starts
// in state 0. Each tick advances every valid block by one state. A block that reaches
// state k-1 is still within its retention time, but will not survive another tick, so it
// is flagged. The lowest flagged valid block is offered to the cache controller on
// exp_pending/exp_idx. The controller writes the block back if it is dirty and then
// invalidates it. An invalid block's counter is held at 0.
// Timing: restart and tick act at the next clock edge; exp_* are combinational from the
// counters and the valid vector. 512 blocks x 2 bits = 128 bytes per cache, as published.
// The k-state FSM, the period and the action at state k-1 are published. Restarting only
// on full-line writes, saturating at k-1 and the lowest-index-first scan are this
// design's choices.
module retention_monitor
  import arc_pkg::*;
#(
  parameter int unsigned NUM_LINES = CACHE_BYTES / LINE_BYTES,
  parameter int unsigned K         = MON_STATES,
  localparam int unsigned IDX_W    = $clog2(NUM_LINES),
  localparam int unsigned ST_W     = (K > 2) ? $clog2(K) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 tick,
  input  logic                 restart,
  input  logic [IDX_W-1:0]     restart_idx,
  input  logic [NUM_LINES-1:0] valid,
  output logic                 exp_pending,
  output logic [IDX_W-1:0]     exp_idx,
  output logic [ST_W-1:0]      state_of [NUM_LINES]
);

  localparam logic [ST_W-1:0] LAST = ST_W'(K - 1);

  logic [ST_W-1:0] st [NUM_LINES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_LINES; i++) st[i] <= '0;
    end else begin
      for (int i = 0; i < NUM_LINES; i++) begin
        if (restart && restart_idx == IDX_W'(i)) st[i] <= '0;
        else if (!valid[i])                      st[i] <= '0;
        else if (tick && st[i] != LAST)          st[i] <= st[i] + ST_W'(1);
      end
    end
  end

  always_comb begin
    exp_pending = 1'b0;
    exp_idx     = '0;
    for (int i = NUM_LINES - 1; i >= 0; i--) begin
      if (valid[i] && st[i] == LAST) begin
        exp_pending = 1'b1;
        exp_idx     = IDX_W'(i);
      end
    end
  end

  assign state_of = st;

endmodule
