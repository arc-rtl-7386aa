// tb_stt_l1_cache: end-to-end test of one relaxed-retention STT-RAM L1 cache.
// The cache (128 sets x 4 ways, 64 B lines) uses a short 400 ns retention time, so a
// monitor-counter tick is 80..200 cycles, and the 1.389 ns write latency of the 400 us
// cell, so writes take 2 or 3 cycles depending on the DVFS step. A behavioural
// last-level cache answers line requests after random delays. The test checks,
// independently of the cache's internals:
//  * every read returns the last value written to that word (a word-level shadow
//    memory), across hits, misses, dirty evictions and retention expiries;
//  * a read hit answers 1 cycle after acceptance, a write hit after ceil(f*1.389 ns);
//  * no hit is ever served from a line older than its retention time (wall-clock time
//    since its fill, from the DVFS step of every cycle);
//  * expiry write-backs, clean expiry invalidations, expiration misses (re-fetch of a
//    line that was not evicted), dirty evictions and both write lengths all occur.
module tb_stt_l1_cache;
  import arc_pkg::*;
  localparam int unsigned RET   = 400;     // ns
  localparam int unsigned WRLAT = 1389;    // ps
  localparam int unsigned SETS  = 128;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [FIDX_W-1:0] freq_idx = '0;
  logic core_req_valid = 1'b0, core_req_ready, core_req_we = 1'b0;
  paddr_t core_req_addr = '0;
  word_t core_req_wdata = '0;
  logic [WORD_BYTES-1:0] core_req_be = '0;
  logic core_resp_valid;
  word_t core_resp_rdata;
  logic mem_req_valid, mem_req_ready = 1'b0;
  line_req_t mem_req;
  logic mem_resp_valid = 1'b0;
  line_resp_t mem_resp = '0;
  cache_ev_t ev;

  stt_l1_cache #(.RET_NS(RET), .WR_LAT_PS(WRLAT), .SETS(SETS)) dut (
    .clk, .rst_n, .freq_idx, .core_req_valid, .core_req_ready, .core_req_we, .core_req_addr,
    .core_req_wdata, .core_req_be, .core_resp_valid, .core_resp_rdata,
    .mem_req_valid, .mem_req_ready, .mem_req, .mem_resp_valid, .mem_resp, .ev);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, what); end
  endtask

  // ------------------------------------------------------------ reference data
  function automatic word_t init_word(input paddr_t wa);
    return {wa[31:0] ^ 32'hA5A5_0000, ~wa[31:0]};
  endfunction
  word_t  golden [paddr_t];       // word address -> value (core view)
  line_t  llc    [paddr_t];       // line address -> value (memory view)
  function automatic word_t gold(input paddr_t a);
    paddr_t wa = a >> 3;
    return golden.exists(wa) ? golden[wa] : init_word(wa);
  endfunction
  function automatic line_t llc_line(input paddr_t la);
    line_t l;
    if (llc.exists(la)) return llc[la];
    for (int w = 0; w < 8; w++) l[w*64 +: 64] = init_word((la >> 3) + paddr_t'(w));
    return l;
  endfunction

  // ------------------------------------------------------------ wall clock and line ages
  longint now_ps = 0;
  longint fill_ps [paddr_t];      // line address -> time its fill completed
  int fetched [paddr_t];          // line address -> number of fetches
  bit evicted [paddr_t];          // line written back on a replacement since its fill
  int n_fill = 0, n_wb = 0, n_refetch = 0;
  always @(posedge clk) now_ps <= now_ps + longint'(1_000_000 / (800 + 200 * int'(freq_idx)));

  // ------------------------------------------------------------ behavioural LLC
  int lat_left = 0;
  line_req_t pend;
  bit busy = 0;
  always @(posedge clk) begin
    mem_resp_valid <= 1'b0;
    if (!busy) begin
      if (mem_req_valid && mem_req_ready) begin
        busy <= 1; pend <= mem_req; lat_left <= $urandom_range(1, 6);
        mem_req_ready <= 1'b0;
      end else mem_req_ready <= ($urandom_range(0, 2) != 0);
    end else if (lat_left > 1) lat_left <= lat_left - 1;
    else begin
      busy <= 0;
      mem_resp_valid <= 1'b1;
      if (pend.we) begin
        llc[pend.addr] = pend.data;
        n_wb++;
      end else begin
        mem_resp.data <= llc_line(pend.addr);
        n_fill++;
        if (fetched.exists(pend.addr) && !evicted[pend.addr]) n_refetch++;
        fetched[pend.addr] = fetched.exists(pend.addr) ? fetched[pend.addr] + 1 : 1;
        evicted[pend.addr] = 0;
        fill_ps[pend.addr] = now_ps;
      end
    end
  end
  // mark evictions (replacement write-backs) so a later re-fetch is not an expiration miss
  paddr_t last_wb;
  always @(posedge clk) begin
    if (mem_req_valid && mem_req_ready && mem_req.we) last_wb <= mem_req.addr;
    if (ev.evict_wb) evicted[last_wb] = 1;
  end

  // ------------------------------------------------------------ event counters
  int n_exp_inv = 0, n_exp_wb = 0, n_evict_wb = 0, n_w2 = 0, n_w3 = 0, n_rhit = 0, n_whit = 0;
  always @(posedge clk) if (rst_n) begin
    n_exp_inv  += int'(ev.expire_inv);
    n_exp_wb   += int'(ev.expire_wb);
    n_evict_wb += int'(ev.evict_wb);
  end

  // ------------------------------------------------------------ core driver
  function automatic int wr_cyc(input int s);
    return ((800 + 200 * s) * WRLAT + 999_999) / 1_000_000;
  endfunction

  task automatic access(input bit we, input paddr_t a, input word_t d, input logic [7:0] be);
    int t0, t;
    bit was_hit;
    word_t exp;
    @(negedge clk);
    core_req_valid = 1'b1; core_req_we = we; core_req_addr = a; core_req_wdata = d; core_req_be = be;
    t = 0;
    do begin @(posedge clk); t++; end while (!core_req_ready && t < 5000);
    was_hit = we ? ev.wr_hit : ev.rd_hit;
    check(ev.rd_hit + ev.rd_miss + ev.wr_hit + ev.wr_miss == 1 && (we ? (ev.wr_hit | ev.wr_miss) : (ev.rd_hit | ev.rd_miss)),
          "one lookup event per access");
    exp = gold(a);
    if (we) begin
      word_t n = exp;
      for (int b = 0; b < 8; b++) if (be[b]) n[b*8 +: 8] = d[b*8 +: 8];
      golden[a >> 3] = n;
    end
    if (was_hit) begin
      paddr_t la = {a[PADDR_W-1:6], 6'd0};
      check(fill_ps.exists(la) && (now_ps - fill_ps[la]) < longint'(RET) * 1000,
            $sformatf("hit on line %h aged %0d ps", la, now_ps - fill_ps[la]));
      if (we) n_whit++; else n_rhit++;
    end
    #1 core_req_valid = 1'b0;
    // t0 = cycles from the accepting edge to the edge that samples the response
    t0 = 1;
    while (!core_resp_valid && t0 < 5000) begin @(posedge clk); t0++; #1; end
    if (was_hit && !we) check(t0 == 1, $sformatf("read hit latency %0d", t0));
    if (was_hit && we) begin
      check(t0 == wr_cyc(freq_idx), $sformatf("write hit latency %0d at step %0d", t0, freq_idx));
      if (t0 == 2) n_w2++;
      if (t0 == 3) n_w3++;
    end
    if (!we) check(core_resp_rdata == exp, $sformatf("read %h: %h expected %h", a, core_resp_rdata, exp));
    @(posedge clk);
  endtask

  task automatic idle(input int n);
    repeat (n) @(posedge clk);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // Phase A: 8 lines in distinct sets, written, left to expire (dirty), read back
    for (int i = 0; i < 8; i++) access(1, paddr_t'(32'h1000 + i * 64), {$urandom, $urandom}, 8'hFF);
    for (int i = 0; i < 8; i++) access(0, paddr_t'(32'h1000 + i * 64), '0, '0);
    idle(500);
    for (int i = 0; i < 8; i++) access(0, paddr_t'(32'h1000 + i * 64 + 8), '0, '0);
    idle(500);                                       // now clean lines expire
    for (int i = 0; i < 8; i++) access(0, paddr_t'(32'h1000 + i * 64 + 16), '0, '0);
    // Phase B: random traffic, conflicts on a few sets, random DVFS steps and idle gaps
    for (int n = 0; n < 3000; n++) begin
      paddr_t a;
      int set, tg;
      if (n % 200 == 0) freq_idx = FIDX_W'($urandom_range(0, 6));
      set = $urandom_range(0, 3);
      tg  = $urandom_range(0, 7);
      a = paddr_t'(tg * SETS * 64 + set * 64 + $urandom_range(0, 7) * 8);
      if ($urandom_range(0, 1) == 0) access(1, a, {$urandom, $urandom}, 8'($urandom));
      else access(0, a, '0, '0);
      if ($urandom_range(0, 40) == 0) idle($urandom_range(50, 400));
    end
    // read back everything written
    foreach (golden[wa]) access(0, paddr_t'(wa << 3), '0, '0);
    $display("fills=%0d writebacks=%0d refetch=%0d exp_inv=%0d exp_wb=%0d evict_wb=%0d rhit=%0d whit=%0d w2=%0d w3=%0d",
             n_fill, n_wb, n_refetch, n_exp_inv, n_exp_wb, n_evict_wb, n_rhit, n_whit, n_w2, n_w3);
    check(n_exp_wb > 0, "dirty blocks written back on expiry");
    check(n_exp_inv > n_exp_wb, "clean blocks invalidated on expiry");
    check(n_refetch > 0, "expiration misses occurred");
    check(n_evict_wb > 0, "dirty victims written back");
    check(n_w2 > 0 && n_w3 > 0, "2- and 3-cycle writes");
    check(n_rhit > 0, "read hits");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
