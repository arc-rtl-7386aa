// tb_stt_data_array: checks STT-RAM array timing and contents.
// A 32-line instance is written and read at random with byte enables and write lengths
// of 1, 2 and 3 cycles (the published write-cycle counts). A shadow array written here
// predicts every read. For each write the test counts the cycles from wr_start to
// wr_done (must equal wr_cycles), checks wr_busy over the whole write, and checks that
// the old contents stay visible until the write completes (once a line has been fully
// written, since the array has no reset and starts with unknown contents). Reads must
// return data one cycle after rd_en.
module tb_stt_data_array;
  import arc_pkg::*;
  localparam int unsigned NL = 32;
  localparam int unsigned LB = 128;
  localparam int unsigned NB = LB / 8;
  localparam int unsigned IW = $clog2(NL);

  logic clk = 1'b0, rst_n = 1'b0;
  logic rd_en = 1'b0, wr_start = 1'b0;
  logic [IW-1:0] rd_idx = '0, wr_idx = '0;
  logic [LB-1:0] rd_data, wr_data = '0;
  logic [NB-1:0] wr_be = '0;
  logic [WRC_W-1:0] wr_cycles = 3'd1;
  logic wr_busy, wr_done;
  logic [LB-1:0] shadow [NL];
  int checks = 0, failures = 0;
  bit known [NL];                 // line content known to the shadow array

  stt_data_array #(.NUM_LINES(NL), .LBITS(LB)) dut (.clk, .rst_n, .rd_en, .rd_idx, .rd_data,
    .wr_start, .wr_idx, .wr_data, .wr_be, .wr_cycles, .wr_busy, .wr_done);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [LB-1:0] rnd_line();
    logic [LB-1:0] v;
    for (int i = 0; i < LB / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic do_read(input int idx);
    @(negedge clk); rd_en = 1'b1; rd_idx = IW'(idx);
    @(negedge clk); rd_en = 1'b0;
    check(rd_data == shadow[idx], $sformatf("read line %0d", idx));
  endtask

  task automatic do_write(input int idx, input logic [LB-1:0] d, input logic [NB-1:0] be, input int cyc);
    int n;
    @(negedge clk);
    wr_start = 1'b1; wr_idx = IW'(idx); wr_data = d; wr_be = be; wr_cycles = WRC_W'(cyc);
    @(negedge clk);
    wr_start = 1'b0;
    n = 1;
    while (!wr_done && n < 20) begin
      check(wr_busy, "busy during write");
      // old contents still visible during the write
      rd_en = 1'b1; rd_idx = IW'(idx);
      @(negedge clk); n++;
      rd_en = 1'b0;
      if (known[idx]) check(rd_data == shadow[idx], "old data visible during write");
    end
    check(wr_busy, "busy in last cycle");
    check(n == cyc, $sformatf("write took %0d cycles, expected %0d", n, cyc));
    for (int b = 0; b < NB; b++) if (be[b]) shadow[idx][b*8 +: 8] = d[b*8 +: 8];
    if (be == '1) known[idx] = 1;
    @(negedge clk);
    check(!wr_busy, "idle after write");
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < NL; i++) begin
      shadow[i] = '0;
      known[i] = 0;
      do_write(i, rnd_line(), '1, 1 + (i % 3));
    end
    for (int n = 0; n < 400; n++) begin
      if ($urandom_range(0, 1) == 0) do_read($urandom_range(0, NL - 1));
      else do_write($urandom_range(0, NL - 1), rnd_line(), NB'({$urandom, $urandom}), $urandom_range(1, 3));
    end
    for (int i = 0; i < NL; i++) do_read(i);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
