// dvfs_ctrl: per-core DVFS setting register with the core's frequency cap.
//
// Every ARC core runs between 0.8 GHz and its own cap (1.2, 1.6, 2.0 or 2.0 GHz for
// cores 1..4). The cap keeps the core's STT-RAM write latency at the cycle count it was
// designed for. Software requests a step (0 = 0.8 GHz .. 6 = 2.0 GHz, 0.2 GHz apart) by
// pulsing set_valid with set_idx. A request above FMAX_IDX is clamped to FMAX_IDX and
// reported with a one-cycle `clamped` pulse. The applied step appears on freq_idx on the
// cycle after the request, together with the frequency in MHz and the supply voltage.
// Range, step and cap are published values. The linear 75 mV per step voltage table,
// the reset step (0.8 GHz) and the one-cycle switch are this design's choices: the
// PLL and regulator that act on these outputs are outside this block.
module dvfs_ctrl
  import arc_pkg::*;
#(
  parameter int unsigned FMAX_IDX  = 6,
  parameter int unsigned RESET_IDX = 0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              set_valid,
  input  logic [FIDX_W-1:0] set_idx,
  output logic [FIDX_W-1:0] freq_idx,
  output logic [11:0]       freq_mhz_o,
  output logic [10:0]       volt_mv,
  output logic              clamped
);

  logic [FIDX_W-1:0] cap;
  assign cap = FIDX_W'(FMAX_IDX);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      freq_idx <= FIDX_W'(RESET_IDX);
      clamped  <= 1'b0;
    end else begin
      clamped <= 1'b0;
      if (set_valid) begin
        if (set_idx > cap) begin
          freq_idx <= cap;
          clamped  <= 1'b1;
        end else begin
          freq_idx <= set_idx;
        end
      end
    end
  end

  always_comb begin
    freq_mhz_o = 12'(F_MIN_MHZ + int'(freq_idx) * F_STEP_MHZ);
    volt_mv    = 11'(V_MIN_MV + int'(freq_idx) * V_STEP_MV);
  end

  initial begin
    assert (FMAX_IDX < NUM_FREQ && RESET_IDX <= FMAX_IDX)
      else $error("dvfs_ctrl: cap or reset step out of range");
  end

endmodule
