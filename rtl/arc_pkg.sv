// arc_pkg: constants, types and timing functions shared by the asymmetric-retention
// core (ARC) memory system.
//
// Four cores differ only in the retention time of their STT-RAM L1 data cache and in the
// highest DVFS step they may use. The caps are chosen so that the data-cache write takes
// 1, 1, 2 and 3 cycles at the top frequency of cores 1..4. Cycle counts follow
// cycles = ceil(f * latency); the per-core retention times, write latencies, caps, cache
// geometry (32 KB, 4-way, 64 B lines), the 0.8-2.0 GHz range in 0.2 GHz steps, the
// 0.9-1.35 V voltage range and the 2-bit (4-state) monitor counter are the published
// configuration. Linear voltage per step, a 64-bit core word, a 33-bit physical address
// (8 GB) and the instruction-cache write latency are this design's choices.
package arc_pkg;

  // ---------------------------------------------------------------- system
  localparam int unsigned NUM_CORES = 4;

  // DVFS: step i means F_MIN_MHZ + i*F_STEP_MHZ, i = 0..NUM_FREQ-1 (0.8 .. 2.0 GHz)
  localparam int unsigned F_MIN_MHZ  = 800;
  localparam int unsigned F_STEP_MHZ = 200;
  localparam int unsigned NUM_FREQ   = 7;
  localparam int unsigned FIDX_W     = 3;
  // supply: 0.9 V at 0.8 GHz to 1.35 V at 2.0 GHz, linear per step (design choice)
  localparam int unsigned V_MIN_MV   = 900;
  localparam int unsigned V_STEP_MV  = 75;

  // Per-core configuration, index 0 = Core 1 ... 3 = Core 4
  localparam int unsigned CORE_RET_NS    [NUM_CORES] = '{26500, 10000, 75000, 400000};
  localparam int unsigned CORE_WR_LAT_PS [NUM_CORES] = '{769, 601, 981, 1389};
  localparam int unsigned CORE_FMAX_IDX  [NUM_CORES] = '{2, 4, 6, 6};   // 1.2, 1.6, 2.0, 2.0 GHz

  // Instruction caches: 100 ms retention on every core; write latency is a design choice
  localparam int unsigned ICACHE_RET_NS    = 100_000_000;
  localparam int unsigned ICACHE_WR_LAT_PS = 1389;

  // ---------------------------------------------------------------- cache geometry
  localparam int unsigned PADDR_W     = 33;          // 8 GB physical memory
  localparam int unsigned LINE_BYTES  = 64;
  localparam int unsigned LINE_BITS   = LINE_BYTES * 8;
  localparam int unsigned WORD_BYTES  = 8;
  localparam int unsigned WORD_BITS   = WORD_BYTES * 8;
  localparam int unsigned CACHE_BYTES = 32 * 1024;
  localparam int unsigned WAYS        = 4;
  localparam int unsigned MON_STATES  = 4;           // k of the monitor counter FSM
  localparam int unsigned WRC_W       = 3;           // width of a write-cycle count

  // ---------------------------------------------------------------- types
  typedef logic [PADDR_W-1:0]   paddr_t;
  typedef logic [WORD_BITS-1:0] word_t;
  typedef logic [LINE_BITS-1:0] line_t;

  // Line transaction between an L1 cache and the last-level cache.
  typedef struct packed {
    logic   we;      // 1: write back a line, 0: fetch a line
    paddr_t addr;    // line-aligned address
    line_t  data;    // write data (ignored for fetches)
  } line_req_t;

  typedef struct packed {
    line_t data;     // fetched line (undefined for write acknowledgements)
  } line_resp_t;

  // One-cycle event pulses from an L1 cache, consumed by the performance counters.
  typedef struct packed {
    logic rd_hit;
    logic rd_miss;
    logic wr_hit;
    logic wr_miss;
    logic evict_wb;     // dirty victim written back on a replacement
    logic expire_inv;   // block invalidated by its monitor counter
    logic expire_wb;    // ... and written back first because it was dirty
  } cache_ev_t;

  // Profiling-interval counter values of one core, read by the core-selection software.
  typedef struct packed {
    logic [31:0] l1d_hits;
    logic [31:0] l1d_read_accesses;
    logic [31:0] l1d_read_misses;
    logic [31:0] l1d_total_misses;
    logic [31:0] l1i_total_misses;
    logic [31:0] instructions;
    logic [31:0] cycles;
    logic        active;
    logic        done;
  } perf_stats_t;

  // ---------------------------------------------------------------- timing functions
  function automatic int unsigned step_mhz(input int unsigned idx);
    return F_MIN_MHZ + idx * F_STEP_MHZ;
  endfunction

  // ceil(f * latency): f in MHz, latency in ps -> f*lat/1e6 cycles
  function automatic int unsigned access_cycles(input int unsigned idx, input int unsigned lat_ps);
    longint unsigned prod;
    prod = longint'(step_mhz(idx)) * longint'(lat_ps);
    return int'((prod + 64'd999_999) / 64'd1_000_000);
  endfunction

  // Cycles between monitor-counter ticks: (retention / k) expressed in core cycles.
  function automatic int unsigned tick_cycles(input int unsigned idx, input int unsigned ret_ns,
                                              input int unsigned k);
    longint unsigned prod;
    prod = longint'(ret_ns) * longint'(step_mhz(idx));
    return int'(prod / (64'd1000 * longint'(k)));
  endfunction

endpackage
