// retention_timer: clock for the per-block monitor counters of one STT-RAM cache.
//
// The monitor counter of a block is a k-state FSM whose clock period is retention/k. The
// retention time is wall-clock time, but the cache runs at a DVFS-dependent frequency, so
// the number of core cycles per counter tick is retention/k * f. This block recomputes
// that number for every DVFS step at elaboration time (a 7-entry table) and counts core
// cycles down to it, giving a one-cycle `tick` pulse per period.
// Example: 10 us at 0.8 GHz, k = 4 -> a tick every 2000 cycles.
// When freq_idx changes, the running count is clamped to the new period so that a tick
// never comes later than one period of the new frequency (a block can age too fast,
// which is safe, but not too slow). The retention/k period is published; the down
// counter, the floor() rounding and the clamping on a frequency change are this
// design's choices.
module retention_timer
  import arc_pkg::*;
#(
  parameter int unsigned RET_NS = 10000,
  parameter int unsigned K      = MON_STATES,
  parameter int unsigned CNT_W  = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [FIDX_W-1:0] freq_idx,
  output logic              tick
);

  typedef logic [CNT_W-1:0] cnt_t;

  function automatic cnt_t period_of(input int unsigned idx);
    int unsigned p;
    p = tick_cycles(idx, RET_NS, K);
    return (p < 1) ? cnt_t'(1) : cnt_t'(p);
  endfunction

  cnt_t period_tab [NUM_FREQ];
  for (genvar i = 0; i < NUM_FREQ; i++) begin : g_tab
    assign period_tab[i] = period_of(i);
  end

  cnt_t period, remain;
  assign period = (int'(freq_idx) < NUM_FREQ) ? period_tab[freq_idx] : period_tab[NUM_FREQ-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      remain <= '0;
      tick   <= 1'b0;
    end else begin
      tick <= 1'b0;
      if (remain == '0) begin
        remain <= period - cnt_t'(1);
      end else if (remain == cnt_t'(1)) begin
        tick   <= 1'b1;
        remain <= period;
      end else if (remain > period) begin
        remain <= period;
      end else begin
        remain <= remain - cnt_t'(1);
      end
    end
  end

endmodule
