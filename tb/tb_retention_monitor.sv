// tb_retention_monitor: random test of the per-block 2-bit monitor counters.
// A 16-block instance gets random ticks, restarts (line fills) and valid bits. A
// reference model written here keeps its own state per block: state 0 after a restart
// or while invalid, +1 per tick up to k-1 = 3. Every cycle the states, exp_pending and
// the lowest flagged valid block (exp_idx) are compared with the model. A directed part
// checks that a freshly filled block is flagged after exactly three ticks.
module tb_retention_monitor;
  import arc_pkg::*;
  localparam int unsigned NL = 16;
  localparam int unsigned IW = $clog2(NL);

  logic clk = 1'b0, rst_n = 1'b0;
  logic tick = 1'b0, restart = 1'b0;
  logic [IW-1:0] restart_idx = '0;
  logic [NL-1:0] valid = '0;
  logic exp_pending;
  logic [IW-1:0] exp_idx;
  logic [1:0] st [NL];
  int checks = 0, failures = 0;
  int ref_st [NL];

  retention_monitor #(.NUM_LINES(NL), .K(4)) dut (.clk, .rst_n, .tick, .restart, .restart_idx,
    .valid, .exp_pending, .exp_idx, .state_of(st));

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic compare();
    bit pend; int idx;
    pend = 0; idx = 0;
    for (int i = NL - 1; i >= 0; i--) if (valid[i] && ref_st[i] == 3) begin pend = 1; idx = i; end
    for (int i = 0; i < NL; i++) check(int'(st[i]) == ref_st[i], $sformatf("block %0d state %0d exp %0d", i, st[i], ref_st[i]));
    check(exp_pending == pend, "exp_pending");
    if (pend) check(int'(exp_idx) == idx, $sformatf("exp_idx %0d exp %0d", exp_idx, idx));
  endtask

  // model update at each clock edge, from the inputs applied before it
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < NL; i++) begin
      if (restart && int'(restart_idx) == i) ref_st[i] <= 0;
      else if (!valid[i])                    ref_st[i] <= 0;
      else if (tick && ref_st[i] != 3)       ref_st[i] <= ref_st[i] + 1;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int flagged = 0;
    for (int i = 0; i < NL; i++) ref_st[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // directed: fill block 5, three ticks to state 3
    @(negedge clk); valid[5] = 1'b1; restart = 1'b1; restart_idx = 4'd5;
    @(negedge clk); restart = 1'b0;
    for (int t = 0; t < 3; t++) begin
      check(!exp_pending, "flagged too early");
      tick = 1'b1; @(negedge clk); tick = 1'b0; @(negedge clk);
    end
    check(exp_pending && exp_idx == 4'd5, "block 5 flagged after 3 ticks");
    compare();
    // random part
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      compare();
      if (exp_pending) flagged++;
      tick = ($urandom_range(0, 3) == 0);
      restart = ($urandom_range(0, 2) == 0);
      restart_idx = IW'($urandom_range(0, NL - 1));
      if ($urandom_range(0, 4) == 0) valid[$urandom_range(0, NL - 1)] = 1'b0;
      if (restart) valid[restart_idx] = 1'b1;
      if (exp_pending && $urandom_range(0, 1) == 0) valid[exp_idx] = 1'b0;   // controller invalidates
    end
    check(flagged > 0, "random run flagged some block");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
