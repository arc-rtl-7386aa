// arc_top: four asymmetric-retention cores sharing one last-level cache.
//
// ARC (asymmetric-retention cores) gives each core of a multicore a different STT-RAM
// L1 data-cache retention time and a different DVFS frequency cap, so that software can
// run each application on the core whose retention and write speed suit it:
//   Core 1: 26.5 us, 0.8-1.2 GHz, 1 write cycle at the cap
//   Core 2: 10 us,   0.8-1.6 GHz, 1 write cycle
//   Core 3: 75 us,   0.8-2.0 GHz, 2 write cycles
//   Core 4: 400 us,  0.8-2.0 GHz, 3 write cycles
// Each core's instruction cache uses 100 ms retention. This module builds one arc_tile
// per core (DVFS controller, L1D, L1I, performance counters) and connects their eight
// L1 line ports to a single LLC port through a round-robin arbiter. The processor
// pipelines, the LLC, main memory and the core-selection software are outside; their
// signals are the ports below. Per-core ports are arrays indexed 0..3 for Cores 1..4.
// Everything runs on one clock; each core's DVFS step sets how many of these cycles a
// retention period and a cache write take.
// The core table, the 100 ms instruction caches and the shared LLC are published; the
// single clock, the arbiter policy and the port encoding are this design's choices.
module arc_top
  import arc_pkg::*;
#(
  parameter int unsigned PROFILE_INSTR = 3_000_000
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // DVFS
  input  logic [NUM_CORES-1:0]  dvfs_set_valid,
  input  logic [FIDX_W-1:0]     dvfs_set_idx [NUM_CORES],
  output logic [FIDX_W-1:0]     freq_idx     [NUM_CORES],
  output logic [11:0]           freq_mhz     [NUM_CORES],
  output logic [10:0]           volt_mv      [NUM_CORES],
  output logic [NUM_CORES-1:0]  dvfs_clamped,
  // L1 data caches
  input  logic [NUM_CORES-1:0]  d_req_valid,
  output logic [NUM_CORES-1:0]  d_req_ready,
  input  logic [NUM_CORES-1:0]  d_req_we,
  input  paddr_t                d_req_addr  [NUM_CORES],
  input  word_t                 d_req_wdata [NUM_CORES],
  input  logic [WORD_BYTES-1:0] d_req_be    [NUM_CORES],
  output logic [NUM_CORES-1:0]  d_resp_valid,
  output word_t                 d_resp_rdata [NUM_CORES],
  // L1 instruction caches
  input  logic [NUM_CORES-1:0]  i_req_valid,
  output logic [NUM_CORES-1:0]  i_req_ready,
  input  paddr_t                i_req_addr  [NUM_CORES],
  output logic [NUM_CORES-1:0]  i_resp_valid,
  output word_t                 i_resp_rdata [NUM_CORES],
  // profiling
  input  logic [NUM_CORES-1:0]  prof_start,
  input  logic [1:0]            instr_retired [NUM_CORES],
  output perf_stats_t           perf [NUM_CORES],
  output cache_ev_t             d_ev [NUM_CORES],
  output cache_ev_t             i_ev [NUM_CORES],
  // shared last-level cache port
  output logic                  llc_req_valid,
  input  logic                  llc_req_ready,
  output line_req_t             llc_req,
  output logic [2:0]            llc_req_id,
  input  logic                  llc_resp_valid,
  input  line_resp_t            llc_resp
);

  localparam int unsigned NCL = 2 * NUM_CORES;   // client c: core c/2, c%2 = 0 data, 1 instruction

  logic [NCL-1:0] c_req_valid, c_req_ready, c_resp_valid;
  line_req_t      c_req  [NCL];
  line_resp_t     c_resp [NCL];

  for (genvar c = 0; c < NUM_CORES; c++) begin : g_core
    logic [1:0] lv, lr, rv;
    line_req_t  lq [2];
    line_resp_t lp [2];

    arc_tile #(.CORE(c), .PROFILE_INSTR(PROFILE_INSTR)) u_tile (
      .clk, .rst_n,
      .dvfs_set_valid(dvfs_set_valid[c]), .dvfs_set_idx(dvfs_set_idx[c]),
      .freq_idx(freq_idx[c]), .freq_mhz(freq_mhz[c]), .volt_mv(volt_mv[c]),
      .dvfs_clamped(dvfs_clamped[c]),
      .d_req_valid(d_req_valid[c]), .d_req_ready(d_req_ready[c]), .d_req_we(d_req_we[c]),
      .d_req_addr(d_req_addr[c]), .d_req_wdata(d_req_wdata[c]), .d_req_be(d_req_be[c]),
      .d_resp_valid(d_resp_valid[c]), .d_resp_rdata(d_resp_rdata[c]),
      .i_req_valid(i_req_valid[c]), .i_req_ready(i_req_ready[c]), .i_req_addr(i_req_addr[c]),
      .i_resp_valid(i_resp_valid[c]), .i_resp_rdata(i_resp_rdata[c]),
      .prof_start(prof_start[c]), .instr_retired(instr_retired[c]), .perf(perf[c]),
      .d_ev(d_ev[c]), .i_ev(i_ev[c]),
      .l_req_valid(lv), .l_req_ready(lr), .l_req(lq), .l_resp_valid(rv), .l_resp(lp)
    );

    for (genvar j = 0; j < 2; j++) begin : g_port
      assign c_req_valid[2*c+j] = lv[j];
      assign c_req[2*c+j]       = lq[j];
      assign lr[j]              = c_req_ready[2*c+j];
      assign rv[j]              = c_resp_valid[2*c+j];
      assign lp[j]              = c_resp[2*c+j];
    end
  end

  llc_arbiter #(.N(NCL)) u_arb (
    .clk, .rst_n,
    .c_req_valid, .c_req_ready, .c_req, .c_resp_valid, .c_resp,
    .m_req_valid(llc_req_valid), .m_req_ready(llc_req_ready), .m_req(llc_req),
    .m_resp_valid(llc_resp_valid), .m_resp(llc_resp), .m_req_id(llc_req_id)
  );

endmodule
