// stt_data_array: data storage of one STT-RAM L1 cache, with STT-RAM access timing.
//
// NUM_LINES lines of LINE_BITS bits (512 x 64 B = 32 KB). Reads take one cycle: rd_data
// holds the line addressed by rd_idx on the cycle after rd_en. Writes are slow and take
// wr_cycles cycles, set by the cache from its DVFS step as ceil(f * write latency).
// wr_start latches index, data and byte enables; wr_busy is high for the whole write;
// wr_done pulses in its last cycle. The data lands in the array at the end of that cycle
// and is readable from the next one. A read issued while a write is busy returns the old
// contents; the cache controller never does this. One-cycle reads and multi-cycle,
// frequency-dependent writes are published. The byte-enable port and the commit at the
// end of the write are this design's choices. The magnetic cells themselves are written
// as a register array.
module stt_data_array
  import arc_pkg::*;
#(
  parameter int unsigned NUM_LINES = CACHE_BYTES / LINE_BYTES,
  parameter int unsigned LBITS     = LINE_BITS,
  localparam int unsigned IDX_W    = $clog2(NUM_LINES),
  localparam int unsigned NBYTES   = LBITS / 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rd_en,
  input  logic [IDX_W-1:0]  rd_idx,
  output logic [LBITS-1:0]  rd_data,
  input  logic              wr_start,
  input  logic [IDX_W-1:0]  wr_idx,
  input  logic [LBITS-1:0]  wr_data,
  input  logic [NBYTES-1:0] wr_be,
  input  logic [WRC_W-1:0]  wr_cycles,
  output logic              wr_busy,
  output logic              wr_done
);

  logic [LBITS-1:0]  mem [NUM_LINES];
  logic [IDX_W-1:0]  w_idx;
  logic [LBITS-1:0]  w_data;
  logic [NBYTES-1:0] w_be;
  logic [WRC_W-1:0]  w_left;     // cycles of the current write still to go, incl. this one

  assign wr_busy = (w_left != '0);
  assign wr_done = (w_left == WRC_W'(1));

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_idx];
    if (wr_done) begin
      for (int b = 0; b < NBYTES; b++)
        if (w_be[b]) mem[w_idx][b*8 +: 8] <= w_data[b*8 +: 8];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_left <= '0;
      w_idx  <= '0;
      w_data <= '0;
      w_be   <= '0;
    end else if (wr_start && !wr_busy) begin
      w_left <= (wr_cycles == '0) ? WRC_W'(1) : wr_cycles;
      w_idx  <= wr_idx;
      w_data <= wr_data;
      w_be   <= wr_be;
    end else if (wr_busy) begin
      w_left <= w_left - WRC_W'(1);
    end
  end

  // A write may only start when the previous one has finished.
  assert property (@(posedge clk) disable iff (!rst_n) wr_start |-> !wr_busy)
    else $error("stt_data_array: write started while busy");

endmodule
