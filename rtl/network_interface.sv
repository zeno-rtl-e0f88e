// network_interface: the Zeno node's network interface (NI) for remote
// memory access.
//
// The paper's NI does two things: it sends Namespace capability memory
// requests to remote nodes, and it serves requests that arrive from other
// nodes after the same Namespace permission checks the MMU makes (a remote
// node is never trusted to have checked). A straightforward NI, the paper
// says, reuses the cache hierarchy and MMU of a core and attaches them to a
// DMA engine. Here the NI holds its own MMU (an nlb instance) for the
// serving side.
//
// Sending (client) side, two channels of one outstanding request each:
//   ch0 - requests from this node whose physical address belongs to another
//         node: data accesses travel as Namespace requests {ID, virtual
//         address, access}, hardware accesses to metadata and page tables
//         (sys) as physical requests;
//   ch1 - physical reads the serving MMU needs from other nodes (metadata
//         records and page-table entries whose home is elsewhere).
// Serving side:
//   NS requests  - go through the NI's MMU (metadata check, translation) and
//                  then to local memory; a translation that does not land in
//                  this node's memory is refused with an F_NET fault;
//   sys requests - go straight to local memory.
// Three physical networks of identical routers are used, one for Namespace
// requests, one for sys requests and one for responses. Responses are
// always accepted, sys requests only need local memory, and Namespace
// requests only wait on sys requests, so no cycle of waits can form. The
// split into three networks is this design's choice; the paper leaves the
// interconnect open.
//
// Interface: the client channel ch0 uses the memory valid/ready request and
// response-pulse convention; the network ports use valid/ready per network
// (index 0 NS requests, 1 sys requests, 2 responses); two memory master
// ports (ns and sys) go to this node's memory arbiter.
//
// Lint note: rst_n is the asynchronous reset of the flip-flops and also the
// disable condition of the handshake assertions, so the linter sees it
// used both asynchronously and synchronously. The assertions only observe;
// no synchronous logic is built from rst_n.
module network_interface import zeno_pkg::*; #(
  parameter int NODE_ID       = 0,
  parameter int MD_ENTRIES    = 128,
  parameter int MD_WAYS       = 8,
  parameter int TLB_ENTRIES   = 1024,
  parameter int TLB_WAYS      = 8,
  parameter bit MD_MISS_FAULT = 1'b0
) (
  input  logic              clk,
  input  logic              rst_n,
  // client channel 0
  input  logic              c_req_valid,
  output logic              c_req_ready,
  input  mreq_t             c_req,
  output logic              c_rsp_valid,
  output mrsp_t             c_rsp,
  // network: injection and ejection, [0] nsreq, [1] sysreq, [2] rsp
  output logic [2:0]        inj_valid,
  input  logic [2:0]        inj_ready,
  output pkt_t              inj_pkt [3],
  input  logic [2:0]        ej_valid,
  output logic [2:0]        ej_ready,
  input  pkt_t              ej_pkt [3],
  // local memory, serving side
  output logic              mn_req_valid,
  input  logic              mn_req_ready,
  output mreq_t             mn_req,
  input  logic              mn_rsp_valid,
  input  mrsp_t             mn_rsp,
  output logic              ms_req_valid,
  input  logic              ms_req_ready,
  output mreq_t             ms_req,
  input  logic              ms_rsp_valid,
  input  mrsp_t             ms_rsp,
  // metadata cache maintenance for the serving MMU
  input  logic              inv,
  input  logic [NSID_W-1:0] inv_id,
  input  logic              flush
);
  localparam logic [NODE_W-1:0] ME = NODE_W'(NODE_ID);

  // ------------------------------------------------------------------
  // client channels
  // ------------------------------------------------------------------
  typedef enum logic [1:0] {C_IDLE, C_SEND, C_WAIT} cstate_t;
  cstate_t cst [2];
  pkt_t    cpkt [2];
  logic [1:0] creq_v, creq_rdy, crsp_v;
  mreq_t   creq [2];
  mrsp_t   crsp [2];

  // channel 1 is driven by the serving MMU below
  logic    s1_valid;
  mreq_t   s1_req;

  always_comb begin
    creq_v[0] = c_req_valid; creq[0] = c_req;
    creq_v[1] = s1_valid;    creq[1] = s1_req;
  end

  // which network a channel's packet goes to: 0 nsreq, 1 sysreq
  logic [1:0] cnet;
  always_comb for (int c = 0; c < 2; c++) cnet[c] = (cpkt[c].kind == PK_SYSREQ);

  // injection arbitration for the two request networks: channel 1 first
  logic [1:0] csend;     // channel c's packet taken this cycle
  always_comb begin
    csend = '0;
    for (int n = 0; n < 2; n++) begin
      inj_valid[n] = 1'b0;
      inj_pkt[n]   = cpkt[0];
      if (cst[1] == C_SEND && cnet[1] == n[0]) begin
        inj_valid[n] = 1'b1; inj_pkt[n] = cpkt[1];
        if (inj_ready[n]) csend[1] = 1'b1;
      end else if (cst[0] == C_SEND && cnet[0] == n[0]) begin
        inj_valid[n] = 1'b1; inj_pkt[n] = cpkt[0];
        if (inj_ready[n]) csend[0] = 1'b1;
      end
    end
  end

  // responses are always taken
  assign ej_ready[2] = 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < 2; c++) begin cst[c] <= C_IDLE; cpkt[c] <= '0; end
      crsp_v <= '0; crsp[0] <= '0; crsp[1] <= '0;
    end else begin
      crsp_v <= '0;
      for (int c = 0; c < 2; c++) begin
        unique case (cst[c])
          C_IDLE: if (creq_v[c]) begin
            cpkt[c].kind <= creq[c].sys ? PK_SYSREQ : PK_NSREQ;
            cpkt[c].src  <= ME;
            cpkt[c].dst  <= pa_node(creq[c].pa);
            cpkt[c].chan <= c[0];
            cpkt[c].req  <= creq[c];
            cpkt[c].rsp  <= '0;
            cst[c] <= C_SEND;
          end
          C_SEND: if (csend[c]) cst[c] <= C_WAIT;
          C_WAIT: if (ej_valid[2] && ej_pkt[2].chan == c[0]) begin
            crsp_v[c] <= 1'b1; crsp[c] <= ej_pkt[2].rsp; cst[c] <= C_IDLE;
          end
          default: cst[c] <= C_IDLE;
        endcase
      end
    end
  end

  assign creq_rdy[0] = (cst[0] == C_IDLE);
  assign creq_rdy[1] = (cst[1] == C_IDLE);
  assign c_req_ready = creq_rdy[0];
  assign c_rsp_valid = crsp_v[0];
  assign c_rsp       = crsp[0];

  // ------------------------------------------------------------------
  // serving side: Namespace requests through the NI's own MMU
  // ------------------------------------------------------------------
  typedef enum logic [1:0] {V_IDLE, V_BUSY, V_RSP} vstate_t;
  vstate_t nst, sst;
  logic    s_sent;
  pkt_t    nreq_pkt, sreq_pkt;
  mrsp_t   nrsp_q, srsp_q;

  logic   nlb_req_valid, nlb_req_ready, nlb_rsp_valid;
  mrsp_t  nlb_rsp;
  logic   nm_valid, nm_ready, nm_rsp_valid;
  mreq_t  nm_req;
  mrsp_t  nm_rsp;

  assign ej_ready[0]   = (nst == V_IDLE) && nlb_req_ready;
  assign nlb_req_valid = (nst == V_IDLE) && ej_valid[0];

  nlb #(.MD_ENTRIES(MD_ENTRIES), .MD_WAYS(MD_WAYS), .TLB_ENTRIES(TLB_ENTRIES),
        .TLB_WAYS(TLB_WAYS), .MD_MISS_FAULT(MD_MISS_FAULT)) u_nlb (
    .clk, .rst_n,
    .req_valid(nlb_req_valid), .req_ready(nlb_req_ready), .req(ej_pkt[0].req), .req_tag(1'b1),
    .rsp_valid(nlb_rsp_valid), .rsp(nlb_rsp),
    .mem_req_valid(nm_valid), .mem_req_ready(nm_ready), .mem_req(nm_req),
    .mem_rsp_valid(nm_rsp_valid), .mem_rsp(nm_rsp),
    .inv, .inv_id, .flush,
    .md_hits(), .md_misses(), .tlb_hits(), .tlb_misses());

  // steer the serving MMU's memory accesses: local memory, remote sys
  // read through channel 1, or refuse a data access that is not local
  typedef enum logic [1:0] {M_NONE, M_LOCAL, M_REMOTE, M_REFUSE} msel_t;
  msel_t msel, mcur;
  logic  m_busy;
  always_comb begin
    if (pa_node(nm_req.pa) == ME) msel = M_LOCAL;
    else if (nm_req.sys)          msel = M_REMOTE;
    else                          msel = M_REFUSE;
  end
  assign mn_req_valid = nm_valid && !m_busy && msel == M_LOCAL;
  assign mn_req       = nm_req;
  assign s1_valid     = nm_valid && !m_busy && msel == M_REMOTE;
  assign s1_req       = nm_req;
  always_comb begin
    unique case (msel)
      M_LOCAL:  nm_ready = !m_busy && mn_req_ready;
      M_REMOTE: nm_ready = !m_busy && creq_rdy[1];
      default:  nm_ready = !m_busy;
    endcase
  end

  logic refuse_rsp;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_busy <= 1'b0; mcur <= M_NONE; refuse_rsp <= 1'b0;
    end else begin
      refuse_rsp <= 1'b0;
      if (nm_valid && nm_ready) begin
        m_busy <= 1'b1; mcur <= msel;
        if (msel == M_REFUSE) refuse_rsp <= 1'b1;
      end
      if (nm_rsp_valid) begin m_busy <= 1'b0; mcur <= M_NONE; end
    end
  end
  always_comb begin
    nm_rsp_valid = 1'b0;
    nm_rsp       = '{rdata: '0, fault: F_NET};
    unique case (mcur)
      M_LOCAL:  begin nm_rsp_valid = mn_rsp_valid; nm_rsp = mn_rsp; end
      M_REMOTE: begin nm_rsp_valid = crsp_v[1];    nm_rsp = crsp[1]; end
      M_REFUSE: nm_rsp_valid = refuse_rsp;
      default:  ;
    endcase
  end

  // ------------------------------------------------------------------
  // serving side: sys requests straight to memory
  // ------------------------------------------------------------------
  assign ej_ready[1]  = (sst == V_IDLE);
  assign ms_req_valid = (sst == V_BUSY) && !s_sent;
  assign ms_req       = sreq_pkt.req;

  // response injection: NS side first
  logic ns_inj, sys_inj;
  always_comb begin
    ns_inj = 1'b0; sys_inj = 1'b0;
    inj_valid[2] = 1'b0;
    inj_pkt[2]   = '0;
    if (nst == V_RSP) begin
      inj_valid[2] = 1'b1;
      inj_pkt[2]   = '{kind: PK_RSP, src: ME, dst: nreq_pkt.src, chan: nreq_pkt.chan, req: '0, rsp: nrsp_q};
      ns_inj       = inj_ready[2];
    end else if (sst == V_RSP) begin
      inj_valid[2] = 1'b1;
      inj_pkt[2]   = '{kind: PK_RSP, src: ME, dst: sreq_pkt.src, chan: sreq_pkt.chan, req: '0, rsp: srsp_q};
      sys_inj      = inj_ready[2];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nst <= V_IDLE; sst <= V_IDLE; nreq_pkt <= '0; sreq_pkt <= '0;
      nrsp_q <= '0; srsp_q <= '0; s_sent <= 1'b0;
    end else begin
      unique case (nst)
        V_IDLE: if (ej_valid[0] && ej_ready[0]) begin nreq_pkt <= ej_pkt[0]; nst <= V_BUSY; end
        V_BUSY: if (nlb_rsp_valid) begin nrsp_q <= nlb_rsp; nst <= V_RSP; end
        V_RSP:  if (ns_inj) nst <= V_IDLE;
        default: nst <= V_IDLE;
      endcase
      unique case (sst)
        V_IDLE: if (ej_valid[1]) begin sreq_pkt <= ej_pkt[1]; s_sent <= 1'b0; sst <= V_BUSY; end
        V_BUSY: begin
          if (ms_req_valid && ms_req_ready) s_sent <= 1'b1;
          if (ms_rsp_valid) begin srsp_q <= ms_rsp; sst <= V_RSP; end
        end
        V_RSP:  if (sys_inj) sst <= V_IDLE;
        default: sst <= V_IDLE;
      endcase
    end
  end

  // a request packet must be addressed to this node
  a_dst_ns:  assert property (@(posedge clk) disable iff (!rst_n) ej_valid[0] |-> ej_pkt[0].dst == ME);
  a_dst_sys: assert property (@(posedge clk) disable iff (!rst_n) ej_valid[1] |-> ej_pkt[1].dst == ME);
  a_dst_rsp: assert property (@(posedge clk) disable iff (!rst_n) ej_valid[2] |-> ej_pkt[2].dst == ME);
endmodule
