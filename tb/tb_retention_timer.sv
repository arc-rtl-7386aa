// tb_retention_timer: checks the monitor-counter tick period of an STT-RAM cache.
// For a 10 us retention and k = 4 the period must be 10 us / 4 = 2.5 us of wall-clock
// time at every DVFS step: 2000 cycles at 0.8 GHz ... 4000 cycles at 1.6 GHz. The test
// measures the cycles between consecutive ticks at each step and compares them with
// 2500 ns * f, then checks that after a switch from a slow to a fast step (longer
// period) and from a fast to a slow step (shorter period) the first tick comes no later
// than one period of the new step.
module tb_retention_timer;
  import arc_pkg::*;
  localparam int unsigned RET = 10000;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [FIDX_W-1:0] freq_idx = '0;
  logic tick;
  int checks = 0, failures = 0;

  retention_timer #(.RET_NS(RET), .K(4)) dut (.clk, .rst_n, .freq_idx, .tick);

  always #1 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wait_tick(output int n);
    n = 0;
    do begin @(posedge clk); n++; end while (!tick && n < 100000);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n, expect_p;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < 7; s++) begin
      freq_idx = FIDX_W'(s);
      expect_p = (RET / 4) * (800 + 200 * s) / 1000;   // 2500 ns * f(GHz)
      wait_tick(n);                                    // align after the change
      check(n <= expect_p + 1, $sformatf("step %0d: first tick after %0d cycles", s, n));
      for (int r = 0; r < 3; r++) begin
        wait_tick(n);
        check(n == expect_p, $sformatf("step %0d: period %0d, expected %0d", s, n, expect_p));
      end
    end
    // fast -> slow: new period is shorter, first tick must not be late
    freq_idx = 3'd6;
    wait_tick(n);
    repeat (10) @(posedge clk);
    freq_idx = 3'd0;
    wait_tick(n);
    check(n <= 2000 + 1, $sformatf("2.0 -> 0.8 GHz: first tick after %0d cycles", n));
    wait_tick(n);
    check(n == 2000, $sformatf("0.8 GHz period after switch %0d", n));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
