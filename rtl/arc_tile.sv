// arc_tile: memory side of one asymmetric-retention core.
//
// One ARC core (the processor pipeline itself is outside this RTL) owns a DVFS controller
// capped at the core's highest frequency, a private 32 KB STT-RAM L1 data cache with the
// core's own retention time, a private 32 KB STT-RAM L1 instruction cache with 100 ms
// retention, and the profiling performance counters. The DVFS step drives both caches,
// which turn it into write cycles and retention-counter periods. CORE selects the row of
// the per-core tables in arc_pkg (0 = Core 1: 26.5 us, <=1.2 GHz ... 3 = Core 4: 400 us,
// <=2.0 GHz); RET_NS, WR_LAT_PS and FMAX_IDX default to that row. The instruction
// cache is read-only from the core side. Both caches' line ports are brought out for
// the shared LLC arbiter. Timing is that of the sub-blocks; this module adds no
// registers of its own.
module arc_tile
  import arc_pkg::*;
#(
  parameter int unsigned CORE          = 1,
  parameter int unsigned RET_NS        = CORE_RET_NS[CORE],
  parameter int unsigned WR_LAT_PS     = CORE_WR_LAT_PS[CORE],
  parameter int unsigned FMAX_IDX      = CORE_FMAX_IDX[CORE],
  parameter int unsigned IRET_NS       = ICACHE_RET_NS,
  parameter int unsigned PROFILE_INSTR = 3_000_000
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // DVFS
  input  logic                  dvfs_set_valid,
  input  logic [FIDX_W-1:0]     dvfs_set_idx,
  output logic [FIDX_W-1:0]     freq_idx,
  output logic [11:0]           freq_mhz,
  output logic [10:0]           volt_mv,
  output logic                  dvfs_clamped,
  // L1 data cache, core side
  input  logic                  d_req_valid,
  output logic                  d_req_ready,
  input  logic                  d_req_we,
  input  paddr_t                d_req_addr,
  input  word_t                 d_req_wdata,
  input  logic [WORD_BYTES-1:0] d_req_be,
  output logic                  d_resp_valid,
  output word_t                 d_resp_rdata,
  // L1 instruction cache, core side (fetch only)
  input  logic                  i_req_valid,
  output logic                  i_req_ready,
  input  paddr_t                i_req_addr,
  output logic                  i_resp_valid,
  output word_t                 i_resp_rdata,
  // profiling
  input  logic                  prof_start,
  input  logic [1:0]            instr_retired,
  output perf_stats_t           perf,
  output cache_ev_t             d_ev,
  output cache_ev_t             i_ev,
  // line ports towards the LLC: [0] data cache, [1] instruction cache
  output logic [1:0]            l_req_valid,
  input  logic [1:0]            l_req_ready,
  output line_req_t             l_req [2],
  input  logic [1:0]            l_resp_valid,
  input  line_resp_t            l_resp [2]
);

  dvfs_ctrl #(.FMAX_IDX(FMAX_IDX)) u_dvfs (
    .clk, .rst_n, .set_valid(dvfs_set_valid), .set_idx(dvfs_set_idx),
    .freq_idx, .freq_mhz_o(freq_mhz), .volt_mv, .clamped(dvfs_clamped)
  );

  stt_l1_cache #(.RET_NS(RET_NS), .WR_LAT_PS(WR_LAT_PS)) u_l1d (
    .clk, .rst_n, .freq_idx,
    .core_req_valid(d_req_valid), .core_req_ready(d_req_ready), .core_req_we(d_req_we),
    .core_req_addr(d_req_addr), .core_req_wdata(d_req_wdata), .core_req_be(d_req_be),
    .core_resp_valid(d_resp_valid), .core_resp_rdata(d_resp_rdata),
    .mem_req_valid(l_req_valid[0]), .mem_req_ready(l_req_ready[0]), .mem_req(l_req[0]),
    .mem_resp_valid(l_resp_valid[0]), .mem_resp(l_resp[0]),
    .ev(d_ev)
  );

  stt_l1_cache #(.RET_NS(IRET_NS), .WR_LAT_PS(ICACHE_WR_LAT_PS)) u_l1i (
    .clk, .rst_n, .freq_idx,
    .core_req_valid(i_req_valid), .core_req_ready(i_req_ready), .core_req_we(1'b0),
    .core_req_addr(i_req_addr), .core_req_wdata('0), .core_req_be('0),
    .core_resp_valid(i_resp_valid), .core_resp_rdata(i_resp_rdata),
    .mem_req_valid(l_req_valid[1]), .mem_req_ready(l_req_ready[1]), .mem_req(l_req[1]),
    .mem_resp_valid(l_resp_valid[1]), .mem_resp(l_resp[1]),
    .ev(i_ev)
  );

  perf_counters #(.PROFILE_INSTR(PROFILE_INSTR), .CNT_W(32)) u_perf (
    .clk, .rst_n, .start(prof_start), .instr_retired, .dev(d_ev), .iev(i_ev),
    .l1d_hits(perf.l1d_hits), .l1d_read_accesses(perf.l1d_read_accesses),
    .l1d_read_misses(perf.l1d_read_misses), .l1d_total_misses(perf.l1d_total_misses),
    .l1i_total_misses(perf.l1i_total_misses), .instructions(perf.instructions),
    .cycles(perf.cycles), .active(perf.active), .done(perf.done)
  );

endmodule
