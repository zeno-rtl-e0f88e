// mem_arbiter: round-robin arbiter that lets several requesters share one
// memory port, one transaction at a time.
//
// The Zeno node has more than one unit that reaches memory (the core's MMU,
// the Namespace operation unit, the network interface serving remote
// requests); the paper does not say how they share it. This arbiter is this
// design's choice: when idle it grants the lowest-numbered requester at or
// after the one after the last winner, passes that request to the slave,
// holds the grant until the slave's response arrives and routes the response
// back to the winner only.
//
// Interface: per master m_req_valid/m_req_ready/m_req and a one-cycle
// m_rsp_valid with m_rsp; toward the slave s_req_valid/s_req_ready/s_req and
// s_rsp_valid/s_rsp. Timing: the request is passed on combinationally in the
// cycle after the grant is taken (one cycle of arbitration latency); the
// response is passed on combinationally.
//
// Lint note: rst_n is the asynchronous reset of the flip-flops and also the
// disable condition of the handshake assertions, so the linter sees it
// used both asynchronously and synchronously. The assertions only observe;
// no synchronous logic is built from rst_n.
//
// Outputs copied from inputs: every master's m_rsp carries the slave's
// response unchanged; only m_rsp_valid says whose it is, which keeps the
// response path free of multiplexers.
module mem_arbiter import zeno_pkg::*; #(
  parameter int N = 2,
  localparam int IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  m_req_valid,
  output logic [N-1:0]  m_req_ready,
  input  mreq_t         m_req [N],
  output logic [N-1:0]  m_rsp_valid,
  output mrsp_t         m_rsp [N],
  output logic          s_req_valid,
  input  logic          s_req_ready,
  output mreq_t         s_req,
  input  logic          s_rsp_valid,
  input  mrsp_t         s_rsp
);
  typedef enum logic [1:0] {A_IDLE, A_REQ, A_WAIT} astate_t;
  astate_t       st;
  logic [IW-1:0] owner, last;

  logic [IW-1:0] pick;
  logic          any;
  always_comb begin
    pick = '0;
    any  = 1'b0;
    for (int k = N; k >= 1; k--) begin
      int unsigned c;
      c = (32'(last) + 32'(k)) % N;
      if (m_req_valid[c]) begin pick = IW'(c); any = 1'b1; end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= A_IDLE; owner <= '0; last <= IW'(N - 1);
    end else begin
      unique case (st)
        A_IDLE: if (any) begin owner <= pick; last <= pick; st <= A_REQ; end
        A_REQ:  if (s_req_ready) st <= A_WAIT;
        A_WAIT: if (s_rsp_valid) st <= A_IDLE;
        default: st <= A_IDLE;
      endcase
    end
  end

  always_comb begin
    s_req_valid = (st == A_REQ) && m_req_valid[owner];
    s_req       = m_req[owner];
    for (int i = 0; i < N; i++) begin
      m_req_ready[i] = (st == A_REQ) && (owner == IW'(i)) && s_req_ready;
      m_rsp_valid[i] = (st == A_WAIT) && (owner == IW'(i)) && s_rsp_valid;
      m_rsp[i]       = s_rsp;
    end
  end

  // a granted master must keep its request up until it is taken
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           st == A_REQ |-> m_req_valid[owner]);
endmodule
