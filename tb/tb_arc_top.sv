// tb_arc_top: end-to-end run of the four asymmetric-retention cores at full size.
// The top keeps all its default parameters (32 KB caches, published retention times,
// 3M-instruction profiling interval). A behavioural shared last-level cache with random
// latency serves all eight L1 caches. For every core, one process plays the data side
// of a 2-wide in-order core (random loads and stores over a private 8-set x 8-tag
// footprint, with idle gaps), one fetches instructions, and the retired-instruction
// count is 2 per cycle from the start of a profiling interval until it closes.
// DVFS: every core first asks for 2.0 GHz (cores 1 and 2 must be clamped to 1.2 and
// 1.6 GHz). Core 2 (10 us) then drops to 0.8 GHz, where its retention is only 8000
// cycles, and core 4 moves between steps during the run.
// Checks: load data against a word-level shadow memory; instruction data against the
// memory image; read-hit latency 1; write-hit latency ceil(f * write latency) for each
// core's cell; no data-cache hit on a line older than that core's retention time in
// wall-clock time; applied frequency and voltage; the profiling counters against the
// events counted here, and `done` after 3M instructions.
// Each mechanism must occur at least once: clamping, hits, misses, dirty evictions,
// expiry write-backs, clean expiry invalidations, expiration misses, 1-, 2- and 3-cycle
// writes, arbitration between simultaneous L1 requests, and the end of a profiling
// interval.
module tb_arc_top;
  import arc_pkg::*;
  localparam int unsigned NC = NUM_CORES;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [NC-1:0] dvfs_set_valid = '0;
  logic [FIDX_W-1:0] dvfs_set_idx [NC];
  logic [FIDX_W-1:0] freq_idx [NC];
  logic [11:0] freq_mhz [NC];
  logic [10:0] volt_mv [NC];
  logic [NC-1:0] dvfs_clamped;
  logic [NC-1:0] d_req_valid = '0, d_req_ready, d_req_we = '0, d_resp_valid;
  paddr_t d_req_addr [NC];
  word_t d_req_wdata [NC], d_resp_rdata [NC];
  logic [7:0] d_req_be [NC];
  logic [NC-1:0] i_req_valid = '0, i_req_ready, i_resp_valid;
  paddr_t i_req_addr [NC];
  word_t i_resp_rdata [NC];
  logic [NC-1:0] prof_start = '0;
  logic [1:0] instr_retired [NC];
  perf_stats_t perf [NC];
  cache_ev_t d_ev [NC], i_ev [NC];
  logic llc_req_valid, llc_req_ready = 1'b0, llc_resp_valid = 1'b0;
  line_req_t llc_req;
  logic [2:0] llc_req_id;
  line_resp_t llc_resp = '0;

  arc_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 30) $display("FAIL @%0t: %s", $time, what); end
  endtask

  // ------------------------------------------------------------ memory image
  function automatic word_t init_word(input paddr_t wa);
    return {wa[31:0] ^ 32'h5A5A_0F0F, ~wa[31:0] + 32'd7};
  endfunction
  word_t golden [paddr_t];
  line_t llc [paddr_t];
  function automatic word_t gold(input paddr_t a);
    return golden.exists(a >> 3) ? golden[a >> 3] : init_word(a >> 3);
  endfunction
  function automatic line_t llc_line(input paddr_t la);
    line_t l;
    if (llc.exists(la)) return llc[la];
    for (int w = 0; w < 8; w++) l[w*64 +: 64] = init_word((la >> 3) + paddr_t'(w));
    return l;
  endfunction

  // ------------------------------------------------------------ per-core wall clock (ps)
  longint now_ps [NC];
  initial for (int c = 0; c < NC; c++) now_ps[c] = 0;
  always @(posedge clk) for (int c = 0; c < NC; c++)
    now_ps[c] <= now_ps[c] + longint'(1_000_000 / (800 + 200 * int'(freq_idx[c])));

  // ------------------------------------------------------------ behavioural LLC
  longint fill_ps [paddr_t];
  bit     fetched [paddr_t];
  bit     evicted [paddr_t];
  paddr_t last_wb [8];
  int n_refetch [NC];
  int n_contention = 0, n_llc = 0;
  bit busy = 0;
  int lat_left;
  line_req_t pend;
  int pend_id;
  always @(posedge clk) if (rst_n) begin
    llc_resp_valid <= 1'b0;
    if ($countones(dut.c_req_valid) > 1) n_contention++;
    if (!busy) begin
      if (llc_req_valid && llc_req_ready) begin
        busy <= 1; pend <= llc_req; pend_id <= llc_req_id; lat_left <= $urandom_range(2, 12);
        llc_req_ready <= 1'b0;
        n_llc++;
        if (llc_req.we) last_wb[llc_req_id] = llc_req.addr;
      end else llc_req_ready <= ($urandom_range(0, 3) != 0);
    end else if (lat_left > 1) lat_left <= lat_left - 1;
    else begin
      busy <= 0;
      llc_resp_valid <= 1'b1;
      if (pend.we) llc[pend.addr] = pend.data;
      else begin
        llc_resp.data <= llc_line(pend.addr);
        if (pend_id % 2 == 0) begin
          if (fetched.exists(pend.addr) && !evicted[pend.addr]) n_refetch[pend_id / 2]++;
          fetched[pend.addr] = 1;
          evicted[pend.addr] = 0;
          fill_ps[pend.addr] = now_ps[pend_id / 2];
        end
      end
    end
  end

  // ------------------------------------------------------------ event counts
  int n_rhit [NC], n_rmiss [NC], n_whit [NC], n_wmiss [NC], n_evwb [NC], n_expinv [NC], n_expwb [NC];
  int n_imiss [NC], n_wcyc [NC][4];
  int n_clamp = 0;
  initial for (int c = 0; c < NC; c++) begin
    n_rhit[c] = 0; n_rmiss[c] = 0; n_whit[c] = 0; n_wmiss[c] = 0; n_evwb[c] = 0;
    n_expinv[c] = 0; n_expwb[c] = 0; n_imiss[c] = 0; n_refetch[c] = 0;
    for (int k = 0; k < 4; k++) n_wcyc[c][k] = 0;
  end
  always @(posedge clk) if (rst_n) for (int c = 0; c < NC; c++) begin
    n_evwb[c]   += int'(d_ev[c].evict_wb);
    n_expinv[c] += int'(d_ev[c].expire_inv);
    n_expwb[c]  += int'(d_ev[c].expire_wb);
    if (d_ev[c].evict_wb) evicted[last_wb[2*c]] = 1;
    n_clamp     += int'(dvfs_clamped[c]);
  end

  // feature counts over the profiling interval, from this testbench's own view
  int p_hits [NC], p_rda [NC], p_rdm [NC], p_totm [NC], p_imiss [NC];
  bit p_on [NC];
  initial for (int c = 0; c < NC; c++) begin
    p_hits[c] = 0; p_rda[c] = 0; p_rdm[c] = 0; p_totm[c] = 0; p_imiss[c] = 0; p_on[c] = 0;
  end
  always @(posedge clk) if (rst_n) for (int c = 0; c < NC; c++) begin
    if (prof_start[c]) p_on[c] = 1;
    else if (p_on[c] && perf[c].active) begin
      p_hits[c] += int'(d_req_valid[c] && d_req_ready[c] && d_ev[c].rd_hit) + int'(d_req_valid[c] && d_req_ready[c] && d_ev[c].wr_hit);
      p_rda[c]  += int'(d_req_valid[c] && d_req_ready[c] && !d_req_we[c]);
      p_rdm[c]  += int'(d_req_valid[c] && d_req_ready[c] && d_ev[c].rd_miss);
      p_totm[c] += int'(d_req_valid[c] && d_req_ready[c] && (d_ev[c].rd_miss || d_ev[c].wr_miss));
      p_imiss[c] += int'(i_req_valid[c] && i_req_ready[c] && i_ev[c].rd_miss);
    end
  end

  function automatic int wr_cyc(input int c, input int s);
    return ((800 + 200 * s) * int'(CORE_WR_LAT_PS[c]) + 999_999) / 1_000_000;
  endfunction

  // ------------------------------------------------------------ per-core drivers
  localparam int unsigned SETB = 128 * 64;     // bytes per way of a 32 KB 4-way cache
  bit traffic_done [NC];

  for (genvar gc = 0; gc < NC; gc++) begin : g_drv
    localparam int C = gc;

    task automatic d_access(input bit we, input paddr_t a, input word_t d, input logic [7:0] be);
      int t, t0;
      bit was_hit;
      word_t exp;
      @(negedge clk);
      d_req_valid[C] = 1'b1; d_req_we[C] = we; d_req_addr[C] = a; d_req_wdata[C] = d; d_req_be[C] = be;
      t = 0;
      do begin @(posedge clk); t++; end while (!d_req_ready[C] && t < 100000);
      was_hit = we ? d_ev[C].wr_hit : d_ev[C].rd_hit;
      if (we) begin if (d_ev[C].wr_hit) n_whit[C]++; else n_wmiss[C]++; end
      else    begin if (d_ev[C].rd_hit) n_rhit[C]++; else n_rmiss[C]++; end
      exp = gold(a);
      if (we) begin
        word_t n;
        n = exp;
        for (int b = 0; b < 8; b++) if (be[b]) n[b*8 +: 8] = d[b*8 +: 8];
        golden[a >> 3] = n;
      end
      if (was_hit) begin
        paddr_t la;
        la = {a[PADDR_W-1:6], 6'd0};
        check(fill_ps.exists(la) && (now_ps[C] - fill_ps[la]) < longint'(CORE_RET_NS[C]) * 1000,
              $sformatf("core %0d hit on line %h aged %0d ps", C + 1, la, now_ps[C] - fill_ps[la]));
      end
      #1 d_req_valid[C] = 1'b0;
      t0 = 1;
      while (!d_resp_valid[C] && t0 < 100000) begin @(posedge clk); t0++; #1; end
      if (was_hit && !we) check(t0 == 1, $sformatf("core %0d read hit latency %0d", C + 1, t0));
      if (was_hit && we) begin
        check(t0 == wr_cyc(C, freq_idx[C]), $sformatf("core %0d write hit %0d cycles at step %0d", C + 1, t0, freq_idx[C]));
        if (t0 < 4) n_wcyc[C][t0]++;
      end
      if (!we) check(d_resp_rdata[C] == exp, $sformatf("core %0d load %h: %h, expected %h", C + 1, a, d_resp_rdata[C], exp));
    endtask

    task automatic set_freq(input int s);
      @(negedge clk);
      dvfs_set_valid[C] = 1'b1; dvfs_set_idx[C] = FIDX_W'(s);
      @(negedge clk);
      dvfs_set_valid[C] = 1'b0;
      check(int'(freq_idx[C]) == ((s > int'(CORE_FMAX_IDX[C])) ? int'(CORE_FMAX_IDX[C]) : s),
            $sformatf("core %0d step %0d after request %0d", C + 1, freq_idx[C], s));
      check(int'(freq_mhz[C]) == 800 + 200 * int'(freq_idx[C]) && int'(volt_mv[C]) == 900 + 75 * int'(freq_idx[C]),
            $sformatf("core %0d frequency/voltage", C + 1));
    endtask

    // data side
    initial begin
      paddr_t base;
      longint ret_cycles;
      base = paddr_t'(C) << 24;
      traffic_done[C] = 0;
      dvfs_set_idx[C] = '0;
      @(posedge rst_n);
      repeat (5) @(posedge clk);
      set_freq(6);                                   // cap check: cores 1, 2 clamp
      if (C == 1) set_freq(0);                       // 10 us core at 0.8 GHz
      for (int n = 0; n < 600; n++) begin
        paddr_t a;
        a = base + paddr_t'($urandom_range(0, 7) * SETB + $urandom_range(0, 7) * 64 + $urandom_range(0, 7) * 8);
        if (C == 3 && n % 150 == 0) set_freq($urandom_range(0, 6));
        if ($urandom_range(0, 1) == 0) d_access(1, a, {$urandom, $urandom}, 8'($urandom | 1));
        else d_access(0, a, '0, '0);
        // idle gaps; long ones let blocks reach the end of their retention time
        ret_cycles = longint'(CORE_RET_NS[C]) * longint'(800 + 200 * int'(freq_idx[C])) / 1000;
        if (n % 100 == 99) repeat (int'(ret_cycles) + 100) @(posedge clk);
        else repeat ($urandom_range(0, 4)) @(posedge clk);
      end
      if (C == 3) set_freq(6);
      // read back every word this core wrote
      foreach (golden[wa]) if ((wa << 3) >> 24 == paddr_t'(C)) d_access(0, paddr_t'(wa << 3), '0, '0);
      traffic_done[C] = 1;
    end

    // instruction side: loops over a 24 KB code region
    initial begin
      int t;
      paddr_t ia;
      i_req_addr[C] = '0;
      @(posedge rst_n);
      for (int n = 0; n < 4000; n++) begin
        ia = (paddr_t'(1) << 32) + (paddr_t'(C) << 24) + paddr_t'((n * 8 + (n / 700) * 4096) % 24576);
        @(negedge clk);
        i_req_valid[C] = 1'b1; i_req_addr[C] = ia;
        t = 0;
        do begin @(posedge clk); t++; end while (!i_req_ready[C] && t < 100000);
        if (i_ev[C].rd_miss) n_imiss[C]++;
        #1 i_req_valid[C] = 1'b0;
        while (!i_resp_valid[C]) begin @(posedge clk); #1; end
        check(i_resp_rdata[C] == init_word(ia >> 3), $sformatf("core %0d fetch %h", C + 1, ia));
        repeat ($urandom_range(0, 6)) @(posedge clk);
      end
    end

    // retired instructions: 2 per cycle while the profiling interval is open
    always @(negedge clk) instr_retired[C] = (rst_n && perf[C].active) ? 2'd2 : 2'd0;
  end

  // ------------------------------------------------------------ watchdog and main sequence
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    prof_start = '1;
    @(negedge clk);
    prof_start = '0;
    wait (traffic_done[0] && traffic_done[1] && traffic_done[2] && traffic_done[3]);
    wait (perf[0].done && perf[1].done && perf[2].done && perf[3].done);
    repeat (10) @(posedge clk);
    for (int c = 0; c < NC; c++) begin
      check(perf[c].done && !perf[c].active && perf[c].instructions == 32'd3_000_000,
            $sformatf("core %0d interval closed at %0d instructions", c + 1, perf[c].instructions));
      check(perf[c].cycles == 32'd1_500_000, $sformatf("core %0d interval cycles %0d", c + 1, perf[c].cycles));
      check(perf[c].l1d_hits == 32'(p_hits[c]) && perf[c].l1d_read_accesses == 32'(p_rda[c]) &&
            perf[c].l1d_read_misses == 32'(p_rdm[c]) && perf[c].l1d_total_misses == 32'(p_totm[c]) &&
            perf[c].l1i_total_misses == 32'(p_imiss[c]),
            $sformatf("core %0d profiling features (hits %0d/%0d)", c + 1, perf[c].l1d_hits, p_hits[c]));
    end
    for (int c = 0; c < NC; c++)
      $display("core %0d: rhit=%0d rmiss=%0d whit=%0d wmiss=%0d evict_wb=%0d exp_inv=%0d exp_wb=%0d exp_miss=%0d imiss=%0d wr1=%0d wr2=%0d wr3=%0d",
               c + 1, n_rhit[c], n_rmiss[c], n_whit[c], n_wmiss[c], n_evwb[c], n_expinv[c], n_expwb[c],
               n_refetch[c], n_imiss[c], n_wcyc[c][1], n_wcyc[c][2], n_wcyc[c][3]);
    $display("clamps=%0d contention=%0d llc_transactions=%0d", n_clamp, n_contention, n_llc);
    // every mechanism must have happened
    check(n_clamp >= 2, "DVFS cap clamping");
    check(n_contention > 0, "simultaneous L1 requests arbitrated");
    for (int c = 0; c < NC; c++) begin
      check(n_rhit[c] > 0 && n_whit[c] > 0 && n_rmiss[c] > 0 && n_wmiss[c] > 0, $sformatf("core %0d hits and misses", c + 1));
      check(n_evwb[c] > 0, $sformatf("core %0d dirty eviction", c + 1));
      check(n_expwb[c] > 0, $sformatf("core %0d expiry write-back", c + 1));
      check(n_expinv[c] > n_expwb[c], $sformatf("core %0d clean expiry", c + 1));
      check(n_refetch[c] > 0, $sformatf("core %0d expiration miss", c + 1));
      check(n_imiss[c] > 0, $sformatf("core %0d instruction misses", c + 1));
    end
    check(n_wcyc[0][1] > 0 && n_wcyc[1][1] > 0, "1-cycle writes on cores 1 and 2");
    check(n_wcyc[2][2] > 0, "2-cycle writes on core 3");
    check(n_wcyc[3][3] > 0, "3-cycle writes on core 4");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
