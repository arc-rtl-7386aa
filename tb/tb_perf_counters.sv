// tb_perf_counters: checks the profiling-interval counters.
// Random cache event pulses and retired-instruction counts (0..2 per cycle) are applied;
// the test keeps its own totals of the five L1 features, instructions and cycles and
// compares them with the counters every cycle. The interval is shortened to 500
// instructions: `done` must rise in the cycle after the instruction count reaches it,
// and the counters must then freeze. A second `start` must clear everything and run a
// second interval.
module tb_perf_counters;
  import arc_pkg::*;
  localparam int unsigned LIM = 500;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [1:0] instr_retired = '0;
  cache_ev_t dev = '0, iev = '0;
  logic [31:0] hits, rda, rdm, totm, itotm, instr, cyc;
  logic active, done;
  int checks = 0, failures = 0;

  perf_counters #(.PROFILE_INSTR(LIM), .CNT_W(32)) dut (.clk, .rst_n, .start, .instr_retired,
    .dev, .iev, .l1d_hits(hits), .l1d_read_accesses(rda), .l1d_read_misses(rdm),
    .l1d_total_misses(totm), .l1i_total_misses(itotm), .instructions(instr), .cycles(cyc),
    .active, .done);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  int m_hits, m_rda, m_rdm, m_totm, m_itotm, m_instr, m_cyc;
  bit m_active, m_done;

  task automatic model_clear();
    m_hits = 0; m_rda = 0; m_rdm = 0; m_totm = 0; m_itotm = 0; m_instr = 0; m_cyc = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    model_clear(); m_active = 0; m_done = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < 2; run++) begin
      int n_done_cycles;
      n_done_cycles = 0;
      @(negedge clk); start = 1'b1;
      @(negedge clk); start = 1'b0;
      model_clear(); m_active = 1; m_done = 0;
      check(active && !done && instr == 0 && hits == 0, "cleared by start");
      while (n_done_cycles < 20) begin
        // random stimulus for this cycle
        dev = cache_ev_t'($urandom);
        dev.rd_hit = $urandom_range(0, 1); dev.rd_miss = dev.rd_hit ? 1'b0 : 1'($urandom_range(0, 1));
        dev.wr_hit = $urandom_range(0, 1); dev.wr_miss = dev.wr_hit ? 1'b0 : 1'($urandom_range(0, 1));
        iev = '0; iev.rd_miss = $urandom_range(0, 1); iev.rd_hit = !iev.rd_miss;
        instr_retired = 2'($urandom_range(0, 2));
        if (m_active) begin
          m_hits += dev.rd_hit + dev.wr_hit;
          m_rda  += dev.rd_hit + dev.rd_miss;
          m_rdm  += dev.rd_miss;
          m_totm += dev.rd_miss + dev.wr_miss;
          m_itotm += iev.rd_miss;
          m_instr += instr_retired;
          m_cyc++;
          if (m_instr >= LIM) begin m_active = 0; m_done = 1; end
        end else n_done_cycles++;
        @(negedge clk);
        check(hits == 32'(m_hits) && rda == 32'(m_rda) && rdm == 32'(m_rdm) && totm == 32'(m_totm)
              && itotm == 32'(m_itotm), $sformatf("feature counters (hits %0d/%0d)", hits, m_hits));
        check(instr == 32'(m_instr) && cyc == 32'(m_cyc), $sformatf("instr %0d/%0d cycles %0d/%0d", instr, m_instr, cyc, m_cyc));
        check(active == m_active && done == m_done, "active/done");
      end
      check(done && instr >= LIM && instr <= LIM + 1, $sformatf("interval closed at the limit: run %0d done=%0d instr=%0d t=%0t", run, done, instr, $time));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
