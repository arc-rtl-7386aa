// stt_l1_cache: relaxed-retention STT-RAM L1 cache of one ARC core.
//
// A 32 KB, 4-way, 64 B-line write-back, write-allocate cache. What makes it an ARC cache:
//  * Retention. The STT-RAM cells hold data only for RET_NS. Each block carries a 2-bit
//    monitor counter (retention_monitor) clocked every RET_NS/4 (retention_timer). When a
//    block's counter reaches state 3, the controller writes the block back if it is dirty
//    and invalidates it before the data can decay. A later reference misses (an
//    "expiration miss") and refetches the line. Expiry work has priority over new core
//    requests.
//  * DVFS-dependent write time. A write takes ceil(f * WR_LAT_PS) cycles at the current
//    DVFS step (freq_idx), e.g. 1 cycle for the 10 us / 26.5 us caches at their caps, 2 and
//    3 for the 75 us / 400 us caches at 2 GHz. Reads take one cycle at every step.
// Core side: valid/ready request (we, addr, 64-bit wdata, byte enables), one request at a
// time. A read hit answers with core_resp_valid one cycle after acceptance. A write hit
// answers in the last cycle of its array write (wr_cycles cycles after acceptance).
// Misses first write back a dirty victim, then fetch the line, write it into the array
// (wr_cycles) and replay the request as a hit.
// Memory side: valid/ready line requests (fetch or write back) to the last-level cache;
// each request is answered by exactly one mem_resp_valid pulse.
// ev pulses one event per cycle for the performance counters.
// Published: geometry, retention-counter scheme, write-back before invalidation,
// ceil(f*latency) cycles and unit reads. This design's choices: write-allocate, blocking
// operation, invalid-way-first then tree pseudo-LRU replacement, and restarting a
// block's retention only when the whole line is written (a fill).
module stt_l1_cache
  import arc_pkg::*;
#(
  parameter int unsigned RET_NS    = 10000,
  parameter int unsigned WR_LAT_PS = 601,
  parameter int unsigned SETS      = CACHE_BYTES / (LINE_BYTES * WAYS),
  localparam int unsigned NW       = WAYS,
  localparam int unsigned NUM_LINES = SETS * NW,
  localparam int unsigned OFF_W    = $clog2(LINE_BYTES),
  localparam int unsigned SET_W    = $clog2(SETS),
  localparam int unsigned WAY_W    = $clog2(NW),
  localparam int unsigned IDX_W    = SET_W + WAY_W,
  localparam int unsigned TAG_W    = PADDR_W - SET_W - OFF_W,
  localparam int unsigned WSEL_W   = $clog2(LINE_BYTES / WORD_BYTES)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [FIDX_W-1:0]    freq_idx,
  // core side
  input  logic                 core_req_valid,
  output logic                 core_req_ready,
  input  logic                 core_req_we,
  input  paddr_t               core_req_addr,
  input  word_t                core_req_wdata,
  input  logic [WORD_BYTES-1:0] core_req_be,
  output logic                 core_resp_valid,
  output word_t                core_resp_rdata,
  // last-level cache side
  output logic                 mem_req_valid,
  input  logic                 mem_req_ready,
  output line_req_t            mem_req,
  input  logic                 mem_resp_valid,
  input  line_resp_t           mem_resp,
  // events
  output cache_ev_t            ev
);

  typedef enum logic [3:0] {
    S_IDLE, S_RD_RESP, S_WR_WAIT, S_WB_REQ, S_WB_WAIT, S_FILL_REQ, S_FILL_WAIT,
    S_FILL_WR, S_REPLAY, S_EXP_REQ, S_EXP_WAIT
  } state_t;

  typedef logic [TAG_W-1:0] tag_t;

  // ------------------------------------------------------------------ storage
  tag_t                 tags  [NUM_LINES];
  logic [NUM_LINES-1:0] valid, dirty;
  logic [2:0]           plru  [SETS];

  state_t             state;
  logic               r_we;
  paddr_t             r_addr;
  word_t              r_wdata;
  logic [WORD_BYTES-1:0] r_be;
  logic [WAY_W-1:0]   r_way;        // victim / fill way
  logic [IDX_W-1:0]   r_exp_idx;

  // ------------------------------------------------------------------ timing tables
  logic [WRC_W-1:0] wrc_tab [NUM_FREQ];
  for (genvar i = 0; i < NUM_FREQ; i++) begin : g_wrc
    localparam int unsigned C = access_cycles(i, WR_LAT_PS);
    assign wrc_tab[i] = WRC_W'((C > (1 << WRC_W) - 1) ? (1 << WRC_W) - 1 : C);
  end
  logic [WRC_W-1:0] wr_cycles;
  assign wr_cycles = (int'(freq_idx) < NUM_FREQ) ? wrc_tab[freq_idx] : wrc_tab[NUM_FREQ-1];

  // ------------------------------------------------------------------ submodules
  logic tick;
  retention_timer #(.RET_NS(RET_NS), .K(MON_STATES)) u_timer (
    .clk, .rst_n, .freq_idx, .tick
  );

  logic             mon_restart;
  logic [IDX_W-1:0] mon_restart_idx;
  logic             exp_pending;
  logic [IDX_W-1:0] exp_idx;
  logic [1:0]       mon_state [NUM_LINES];
  retention_monitor #(.NUM_LINES(NUM_LINES), .K(MON_STATES)) u_mon (
    .clk, .rst_n, .tick,
    .restart(mon_restart), .restart_idx(mon_restart_idx),
    .valid, .exp_pending, .exp_idx, .state_of(mon_state)
  );

  logic             rd_en, wr_start, wr_busy, wr_done;
  logic [IDX_W-1:0] rd_idx, wr_idx;
  line_t            rd_data, wr_data;
  logic [LINE_BYTES-1:0] wr_be;
  stt_data_array #(.NUM_LINES(NUM_LINES), .LBITS(LINE_BITS)) u_data (
    .clk, .rst_n, .rd_en, .rd_idx, .rd_data,
    .wr_start, .wr_idx, .wr_data, .wr_be, .wr_cycles, .wr_busy, .wr_done
  );

  // ------------------------------------------------------------------ lookup of the current request
  // In S_IDLE the current request is the incoming one, in S_REPLAY the latched one.
  logic               c_we;
  paddr_t             c_addr;
  word_t              c_wdata;
  logic [WORD_BYTES-1:0] c_be;
  always_comb begin
    if (state == S_REPLAY) begin
      c_we = r_we; c_addr = r_addr; c_wdata = r_wdata; c_be = r_be;
    end else begin
      c_we = core_req_we; c_addr = core_req_addr; c_wdata = core_req_wdata; c_be = core_req_be;
    end
  end

  logic [SET_W-1:0]  c_set;
  tag_t              c_tag;
  logic [WSEL_W-1:0] c_wsel;
  assign c_set  = c_addr[OFF_W +: SET_W];
  assign c_tag  = c_addr[OFF_W + SET_W +: TAG_W];
  assign c_wsel = c_addr[$clog2(WORD_BYTES) +: WSEL_W];

  function automatic logic [IDX_W-1:0] line_idx(input logic [SET_W-1:0] s, input logic [WAY_W-1:0] w);
    return {s, w};
  endfunction

  logic             hit;
  logic [WAY_W-1:0] hit_way;
  logic             any_inv;
  logic [WAY_W-1:0] inv_way, victim_way;
  always_comb begin
    hit = 1'b0; hit_way = '0; any_inv = 1'b0; inv_way = '0;
    for (int w = NW - 1; w >= 0; w--) begin
      if (valid[line_idx(c_set, WAY_W'(w))] && tags[line_idx(c_set, WAY_W'(w))] == c_tag) begin
        hit = 1'b1; hit_way = WAY_W'(w);
      end
      if (!valid[line_idx(c_set, WAY_W'(w))]) begin
        any_inv = 1'b1; inv_way = WAY_W'(w);
      end
    end
    // tree pseudo-LRU: plru[0] picks the half, plru[1]/plru[2] the way inside it
    if (any_inv)                victim_way = inv_way;
    else if (!plru[c_set][0])   victim_way = plru[c_set][1] ? WAY_W'(1) : WAY_W'(0);
    else                        victim_way = plru[c_set][2] ? WAY_W'(3) : WAY_W'(2);
  end

  function automatic logic [2:0] plru_touch(input logic [2:0] p, input logic [WAY_W-1:0] w);
    logic [2:0] n;
    n = p;
    n[0] = (w < 2);            // point at the other half
    if (w < 2) n[1] = (w == 0);
    else       n[2] = (w == 2);
    return n;
  endfunction

  // ------------------------------------------------------------------ control
  logic accept;
  assign core_req_ready = (state == S_IDLE) && !exp_pending && !wr_busy;
  assign accept         = core_req_valid && core_req_ready;

  logic do_lookup;   // a lookup of the current request happens this cycle
  assign do_lookup = accept || (state == S_REPLAY);

  logic [IDX_W-1:0] victim_idx_r;
  assign victim_idx_r = line_idx(r_addr[OFF_W +: SET_W], r_way);

  always_comb begin
    rd_en = 1'b0; rd_idx = '0;
    wr_start = 1'b0; wr_idx = '0; wr_data = '0; wr_be = '0;
    mon_restart = 1'b0; mon_restart_idx = '0;
    mem_req_valid = 1'b0; mem_req = '0;
    core_resp_valid = 1'b0;
    ev = '0;

    if (do_lookup) begin
      if (hit && !c_we) begin
        rd_en = 1'b1; rd_idx = line_idx(c_set, hit_way);
      end else if (hit && c_we) begin
        wr_start = 1'b1; wr_idx = line_idx(c_set, hit_way);
        wr_data  = {(LINE_BYTES / WORD_BYTES){c_wdata}};
        wr_be    = LINE_BYTES'(c_be) << (int'(c_wsel) * WORD_BYTES);
      end else if (valid[line_idx(c_set, victim_way)] && dirty[line_idx(c_set, victim_way)]) begin
        rd_en = 1'b1; rd_idx = line_idx(c_set, victim_way);
      end
      if (state == S_IDLE) begin
        ev.rd_hit  = hit && !c_we;
        ev.rd_miss = !hit && !c_we;
        ev.wr_hit  = hit && c_we;
        ev.wr_miss = !hit && c_we;
      end
    end else if (state == S_IDLE && exp_pending && !wr_busy) begin
      if (dirty[exp_idx]) begin
        rd_en = 1'b1; rd_idx = exp_idx;
      end else begin
        ev.expire_inv = 1'b1;
      end
    end

    case (state)
      S_RD_RESP: core_resp_valid = 1'b1;
      S_WR_WAIT: core_resp_valid = wr_done;
      S_WB_REQ: begin
        mem_req_valid = 1'b1;
        mem_req.we    = 1'b1;
        mem_req.addr  = {tags[victim_idx_r], r_addr[OFF_W +: SET_W], OFF_W'(0)};
        mem_req.data  = rd_data;
      end
      S_FILL_REQ: begin
        mem_req_valid = 1'b1;
        mem_req.we    = 1'b0;
        mem_req.addr  = {r_addr[PADDR_W-1:OFF_W], OFF_W'(0)};
      end
      S_FILL_WAIT: if (mem_resp_valid) begin
        wr_start = 1'b1; wr_idx = victim_idx_r; wr_data = mem_resp.data; wr_be = '1;
        mon_restart = 1'b1; mon_restart_idx = victim_idx_r;
      end
      S_EXP_REQ: begin
        mem_req_valid = 1'b1;
        mem_req.we    = 1'b1;
        mem_req.addr  = {tags[r_exp_idx], r_exp_idx[IDX_W-1:WAY_W], OFF_W'(0)};
        mem_req.data  = rd_data;
      end
      S_EXP_WAIT: if (mem_resp_valid) begin
        ev.expire_inv = 1'b1;
        ev.expire_wb  = 1'b1;
      end
      S_WB_WAIT: ev.evict_wb = mem_resp_valid;
      default: ;
    endcase
  end

  word_t rd_word;
  logic [WSEL_W-1:0] r_wsel;
  assign r_wsel          = r_addr[$clog2(WORD_BYTES) +: WSEL_W];
  assign rd_word         = rd_data[int'(r_wsel) * WORD_BITS +: WORD_BITS];
  assign core_resp_rdata = rd_word;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      valid     <= '0;
      dirty     <= '0;
      r_we      <= 1'b0;
      r_addr    <= '0;
      r_wdata   <= '0;
      r_be      <= '0;
      r_way     <= '0;
      r_exp_idx <= '0;
      for (int s = 0; s < SETS; s++) plru[s] <= '0;
      for (int i = 0; i < NUM_LINES; i++) tags[i] <= '0;
    end else begin
      if (accept) begin
        r_we <= core_req_we; r_addr <= core_req_addr; r_wdata <= core_req_wdata; r_be <= core_req_be;
      end

      if (do_lookup) begin
        if (hit) begin
          plru[c_set] <= plru_touch(plru[c_set], hit_way);
          if (c_we) begin
            dirty[line_idx(c_set, hit_way)] <= 1'b1;
            state <= S_WR_WAIT;
          end else begin
            state <= S_RD_RESP;
          end
        end else begin
          r_way <= victim_way;
          if (valid[line_idx(c_set, victim_way)] && dirty[line_idx(c_set, victim_way)])
            state <= S_WB_REQ;
          else begin
            valid[line_idx(c_set, victim_way)] <= 1'b0;
            state <= S_FILL_REQ;
          end
        end
      end else begin
        case (state)
          S_IDLE: if (exp_pending && !wr_busy) begin
            if (dirty[exp_idx]) begin
              r_exp_idx <= exp_idx;
              state     <= S_EXP_REQ;
            end else begin
              valid[exp_idx] <= 1'b0;
            end
          end
          S_RD_RESP: state <= S_IDLE;
          S_WR_WAIT: if (wr_done) state <= S_IDLE;
          S_WB_REQ:  if (mem_req_ready) state <= S_WB_WAIT;
          S_WB_WAIT: if (mem_resp_valid) begin
            valid[victim_idx_r] <= 1'b0;
            dirty[victim_idx_r] <= 1'b0;
            state <= S_FILL_REQ;
          end
          S_FILL_REQ:  if (mem_req_ready) state <= S_FILL_WAIT;
          S_FILL_WAIT: if (mem_resp_valid) begin
            tags[victim_idx_r]  <= r_addr[OFF_W + SET_W +: TAG_W];
            valid[victim_idx_r] <= 1'b1;
            dirty[victim_idx_r] <= 1'b0;
            state <= S_FILL_WR;
          end
          S_FILL_WR: if (wr_done) state <= S_REPLAY;
          S_EXP_REQ: if (mem_req_ready) state <= S_EXP_WAIT;
          S_EXP_WAIT: if (mem_resp_valid) begin
            valid[r_exp_idx] <= 1'b0;
            dirty[r_exp_idx] <= 1'b0;
            state <= S_IDLE;
          end
          default: state <= S_IDLE;
        endcase
      end
    end
  end

  // ------------------------------------------------------------------ protocol rules
  assert property (@(posedge clk) disable iff (!rst_n)
                   mem_req_valid && !mem_req_ready |=> mem_req_valid && $stable(mem_req))
    else $error("stt_l1_cache: line request changed before it was accepted");
  assert property (@(posedge clk) disable iff (!rst_n)
                   mem_resp_valid |-> (state inside {S_WB_WAIT, S_FILL_WAIT, S_EXP_WAIT}))
    else $error("stt_l1_cache: unexpected line response");
  initial assert (NW == 4) else $error("stt_l1_cache: the pseudo-LRU tree is written for 4 ways");

endmodule
