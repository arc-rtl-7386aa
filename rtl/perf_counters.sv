// perf_counters: profiling-interval performance counters of one ARC core.
//
// Before a new application is placed, it runs on a base core for a profiling interval of
// PROFILE_INSTR retired instructions (3 million). The counters collected there are the
// inputs of the core-selection model, which runs in software. This block counts the
// L1-cache features of that model: L1D hits, L1D read accesses, L1D read misses, L1D
// total misses, L1I total misses. It also counts retired instructions and cycles.
// A `start` pulse clears all counters and opens the interval. While it is open, every
// cache event pulse and the core's per-cycle retired-instruction count (0..2, a 2-wide
// core) are added. When the instruction count reaches PROFILE_INSTR the interval closes:
// `done` goes high and stays high, and the counters freeze until the next `start`. The
// counters saturate at all ones.
// The feature list and the 3M-instruction interval are published. Counter width, the
// start/done handshake and saturation are this design's choices. The memory-controller
// features of the model (bus utilization, idle time, memory read hits) belong to a memory
// controller beyond the last-level cache and are not counted here.
module perf_counters
  import arc_pkg::*;
#(
  parameter int unsigned PROFILE_INSTR = 3_000_000,
  parameter int unsigned CNT_W         = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [1:0]       instr_retired,
  input  cache_ev_t        dev,          // L1 data cache events
  input  cache_ev_t        iev,          // L1 instruction cache events
  output logic [CNT_W-1:0] l1d_hits,
  output logic [CNT_W-1:0] l1d_read_accesses,
  output logic [CNT_W-1:0] l1d_read_misses,
  output logic [CNT_W-1:0] l1d_total_misses,
  output logic [CNT_W-1:0] l1i_total_misses,
  output logic [CNT_W-1:0] instructions,
  output logic [CNT_W-1:0] cycles,
  output logic             active,
  output logic             done
);

  typedef logic [CNT_W-1:0] cnt_t;

  function automatic cnt_t sat_add(input cnt_t a, input int unsigned b);
    logic [CNT_W:0] s;
    s = {1'b0, a} + (CNT_W+1)'(b);
    return s[CNT_W] ? '1 : s[CNT_W-1:0];
  endfunction

  localparam cnt_t LIMIT = cnt_t'(PROFILE_INSTR);

  cnt_t instr_next;
  assign instr_next = sat_add(instructions, int'(instr_retired));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      l1d_hits <= '0; l1d_read_accesses <= '0; l1d_read_misses <= '0;
      l1d_total_misses <= '0; l1i_total_misses <= '0; instructions <= '0; cycles <= '0;
      active <= 1'b0; done <= 1'b0;
    end else if (start) begin
      l1d_hits <= '0; l1d_read_accesses <= '0; l1d_read_misses <= '0;
      l1d_total_misses <= '0; l1i_total_misses <= '0; instructions <= '0; cycles <= '0;
      active <= 1'b1; done <= 1'b0;
    end else if (active) begin
      l1d_hits          <= sat_add(l1d_hits, int'(dev.rd_hit) + int'(dev.wr_hit));
      l1d_read_accesses <= sat_add(l1d_read_accesses, int'(dev.rd_hit) + int'(dev.rd_miss));
      l1d_read_misses   <= sat_add(l1d_read_misses, int'(dev.rd_miss));
      l1d_total_misses  <= sat_add(l1d_total_misses, int'(dev.rd_miss) + int'(dev.wr_miss));
      l1i_total_misses  <= sat_add(l1i_total_misses, int'(iev.rd_miss) + int'(iev.wr_miss));
      cycles            <= sat_add(cycles, 1);
      instructions      <= instr_next;
      if (instr_next >= LIMIT) begin
        active <= 1'b0;
        done   <= 1'b1;
      end
    end
  end

endmodule
