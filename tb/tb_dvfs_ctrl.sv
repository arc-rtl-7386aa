// tb_dvfs_ctrl: self-checking test of the per-core DVFS setting register.
// A core capped at 1.6 GHz (step 4) gets every request 0..7 in random order. After each
// request the applied step must be min(request, cap), the frequency 800 + 200*step MHz,
// the voltage 900 + 75*step mV, and `clamped` must pulse only for requests above the cap.
// Also checks the reset step and that the setting holds when no request is made.
module tb_dvfs_ctrl;
  import arc_pkg::*;
  localparam int unsigned CAP = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic set_valid = 1'b0;
  logic [FIDX_W-1:0] set_idx = '0;
  logic [FIDX_W-1:0] freq_idx;
  logic [11:0] fmhz;
  logic [10:0] vmv;
  logic clamped;
  int checks = 0, failures = 0;

  dvfs_ctrl #(.FMAX_IDX(CAP)) dut (.clk, .rst_n, .set_valid, .set_idx, .freq_idx,
                                   .freq_mhz_o(fmhz), .volt_mv(vmv), .clamped);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic expect_step(input int s, input bit clamp);
    check(freq_idx == FIDX_W'(s), $sformatf("step %0d expected, got %0d", s, freq_idx));
    check(fmhz == 12'(800 + 200 * s), $sformatf("freq %0d MHz for step %0d", fmhz, s));
    check(vmv == 11'(900 + 75 * s), $sformatf("voltage %0d mV for step %0d", vmv, s));
    check(clamped == clamp, $sformatf("clamped=%0d for step %0d", clamped, s));
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    expect_step(0, 0);
    for (int n = 0; n < 64; n++) begin
      int r;
      r = $urandom_range(0, 7);
      @(negedge clk);
      set_valid = 1'b1; set_idx = FIDX_W'(r);
      @(negedge clk);
      set_valid = 1'b0;
      expect_step((r > CAP) ? CAP : r, r > CAP);
      @(negedge clk);
      expect_step((r > CAP) ? CAP : r, 0);
    end
    // extreme points of the published range
    @(negedge clk); set_valid = 1'b1; set_idx = 3'd0;
    @(negedge clk); set_valid = 1'b0;
    check(fmhz == 12'd800 && vmv == 11'd900, "0.8 GHz / 0.9 V");
    @(negedge clk); set_valid = 1'b1; set_idx = 3'd6;
    @(negedge clk); set_valid = 1'b0;
    check(fmhz == 12'd1600 && vmv == 11'd1200, "2.0 GHz request on a 1.6 GHz core");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
