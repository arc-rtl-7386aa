// tb_llc_arbiter: checks the round-robin sharing of the LLC port by 8 L1 clients.
// Each client issues random line requests (fetch or write-back, tagged with the
// client's number in the address) and holds them until accepted, as an L1 does. A
// behavioural LLC accepts with random ready and answers after a random delay with data
// derived from the request address. The test checks that every request reaches the LLC
// unchanged, exactly one response returns to the right client with the right data, no
// second request is forwarded while one is outstanding, and that while all clients are
// busy the grants rotate in round-robin order.
module tb_llc_arbiter;
  import arc_pkg::*;
  localparam int unsigned N = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [N-1:0] c_req_valid = '0, c_req_ready, c_resp_valid;
  line_req_t c_req [N];
  line_resp_t c_resp [N];
  logic m_req_valid, m_req_ready = 1'b0, m_resp_valid = 1'b0;
  line_req_t m_req;
  line_resp_t m_resp = '0;
  logic [2:0] m_req_id;
  int checks = 0, failures = 0;

  llc_arbiter #(.N(N)) dut (.clk, .rst_n, .c_req_valid, .c_req_ready, .c_req, .c_resp_valid,
    .c_resp, .m_req_valid, .m_req_ready, .m_req, .m_resp_valid, .m_resp, .m_req_id);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, what); end
  endtask

  function automatic line_t resp_of(input paddr_t a);
    return {16{a[31:0]}};
  endfunction

  // LLC model
  bit outstanding = 0;
  int wait_n = 0;
  paddr_t o_addr;
  int o_id = 0;
  int last_grant = N - 1;
  bit all_busy;
  int rr_checked = 0;
  always @(posedge clk) if (rst_n) begin
    m_resp_valid <= 1'b0;
    if (m_req_valid && m_req_ready) begin
      check(!outstanding, "second request forwarded while one is outstanding");
      check(m_req == c_req[m_req_id] && c_req_valid[m_req_id], "forwarded request matches client");
      check(m_req.addr[7:5] == m_req_id, "request comes from the granted client");
      if (all_busy) begin
        check(int'(m_req_id) == (last_grant + 1) % N, $sformatf("round robin: got %0d after %0d", m_req_id, last_grant));
        rr_checked++;
      end
      last_grant = m_req_id;
      outstanding = 1; o_addr = m_req.addr; o_id = m_req_id; wait_n = $urandom_range(1, 4);
      m_req_ready <= 1'b0;
    end else if (outstanding) begin
      if (wait_n > 1) wait_n--;
      else begin
        m_resp_valid <= 1'b1; m_resp.data <= resp_of(o_addr); outstanding = 0;
      end
    end else m_req_ready <= ($urandom_range(0, 1) == 1);
  end
  always_comb all_busy = &c_req_valid;

  // clients
  int sent [N], got [N];
  for (genvar c = 0; c < N; c++) begin : g_cl
    paddr_t my_addr;
    initial begin
      sent[c] = 0; got[c] = 0; c_req[c] = '0;
      @(posedge rst_n);
      for (int k = 0; k < 60; k++) begin
        @(negedge clk);
        my_addr = paddr_t'({$urandom_range(0, 255), 3'(c), 5'd0});
        c_req[c].we = $urandom_range(0, 1);
        c_req[c].addr = my_addr;
        c_req[c].data = {16{$urandom}};
        c_req_valid[c] = 1'b1;
        do @(posedge clk); while (!c_req_ready[c]);
        sent[c]++;
        #1 c_req_valid[c] = 1'b0;
        do @(posedge clk); while (!c_resp_valid[c]);
        check(c_resp[c].data == resp_of(my_addr), $sformatf("client %0d data", c));
        got[c]++;
        if (k < 30) repeat ($urandom_range(0, 3)) @(posedge clk);
      end
    end
  end

  // no response to a client without a request in flight
  always @(posedge clk) if (rst_n) check($onehot0(c_resp_valid), "at most one response");

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    wait (got[0] == 60 && got[1] == 60 && got[2] == 60 && got[3] == 60 &&
          got[4] == 60 && got[5] == 60 && got[6] == 60 && got[7] == 60);
    repeat (5) @(posedge clk);
    check(rr_checked > 20, $sformatf("round-robin order checked %0d times", rr_checked));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
