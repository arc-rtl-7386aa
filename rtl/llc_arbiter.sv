// llc_arbiter: shares the single last-level-cache port among the L1 caches.
//
// All ARC cores' private L1 caches (N = 8: a data and an instruction cache per core) talk
// to one shared last-level cache. Each client offers a line request with valid/ready.
// The arbiter grants one client at a time in round-robin order, starting after the last
// granted client. It forwards the request to the LLC port and holds the grant until the
// LLC answers with m_resp_valid. That answer is returned to the granted client only.
// One transaction is outstanding at a time. The LLC must answer no earlier than the cycle
// after it accepted a request. Timing: a request seen while the arbiter is idle is
// offered on m_req_valid in the same cycle (combinational grant). The shared LLC is
// published; its interconnect is not described, so round robin with one outstanding
// transaction is this design's choice.
module llc_arbiter
  import arc_pkg::*;
#(
  parameter int unsigned N = 2 * NUM_CORES,
  localparam int unsigned ID_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // clients
  input  logic [N-1:0]      c_req_valid,
  output logic [N-1:0]      c_req_ready,
  input  line_req_t         c_req [N],
  output logic [N-1:0]      c_resp_valid,
  output line_resp_t        c_resp [N],
  // last-level cache port
  output logic              m_req_valid,
  input  logic              m_req_ready,
  output line_req_t         m_req,
  input  logic              m_resp_valid,
  input  line_resp_t        m_resp,
  output logic [ID_W-1:0]   m_req_id
);

  typedef enum logic [1:0] {A_IDLE, A_REQ, A_WAIT} astate_t;
  astate_t          st;
  logic [ID_W-1:0]  owner, last;

  // round-robin choice among the valid clients, starting after `last`
  logic             found;
  logic [ID_W-1:0]  pick;
  always_comb begin
    found = 1'b0;
    pick  = '0;
    for (int k = 1; k <= N; k++) begin
      int unsigned c;
      c = (int'(last) + k) % N;
      if (!found && c_req_valid[c]) begin
        found = 1'b1;
        pick  = ID_W'(c);
      end
    end
  end

  logic [ID_W-1:0] cur;
  assign cur = (st == A_IDLE) ? pick : owner;

  always_comb begin
    m_req_valid = ((st == A_IDLE) && found) || (st == A_REQ);
    m_req       = c_req[cur];
    m_req_id    = cur;
    c_req_ready = '0;
    if (m_req_valid && m_req_ready) c_req_ready[cur] = 1'b1;
    c_resp_valid = '0;
    if (st == A_WAIT && m_resp_valid) c_resp_valid[owner] = 1'b1;
    for (int i = 0; i < N; i++) c_resp[i] = m_resp;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= A_IDLE;
      owner <= '0;
      last  <= ID_W'(N - 1);
    end else begin
      case (st)
        A_IDLE: if (found) begin
          owner <= pick;
          last  <= pick;
          st    <= m_req_ready ? A_WAIT : A_REQ;
        end
        A_REQ:  if (m_req_ready) st <= A_WAIT;
        A_WAIT: if (m_resp_valid) st <= A_IDLE;
        default: st <= A_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) $onehot0(c_resp_valid))
    else $error("llc_arbiter: response to more than one client");
  assert property (@(posedge clk) disable iff (!rst_n) m_resp_valid |-> st == A_WAIT)
    else $error("llc_arbiter: LLC response without an outstanding request");

endmodule
