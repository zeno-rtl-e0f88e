// nlb: the Zeno MMU ("NLB"): Metadata Cache, Namespace-TLB, page-table
// walker and permission checks in front of the memory system.
//
// Every access carries a Namespace ID (with its tag bit) and a virtual
// address. In one cycle the Metadata Cache is searched with the Namespace ID
// and the N-TLB with the Root ID from the metadata and the VPN, as in the
// paper's node figure. Then:
//   * untagged ID                 -> NS fault, nothing else happens.
//   * metadata miss               -> either an NS fault (MD_MISS_FAULT=1) or
//                                    the record is read from the Namespace's
//                                    home share of the Distributed Namespace
//                                    Directory (five sys reads: min, max,
//                                    permissions, page-table PPN, Root ID),
//                                    filled into the cache and looked up
//                                    again (the paper names both options).
//   * permission check fails      -> NS fault; the access never reaches
//                                    memory (the cache read/write is only
//                                    passed on for a checked access).
//   * N-TLB miss                  -> page walk from the metadata page-table
//                                    PPN, N-TLB fill.
//   * otherwise the physical access {PPN, offset} goes out on the memory
//     port (sys=0, with nsid/va so a remote network interface can check it
//     again) and its response is returned.
// The caches in the paper sit between this unit and DRAM; they are
// unchanged by Zeno and are not part of this RTL, so physical accesses leave
// on mem_* directly.
//
// Interface: req_valid/req_ready handshake; one request in flight; the
// response is a one-cycle rsp_valid pulse with data and fault cause.
// inv/inv_id drop a revoked Namespace from the Metadata Cache; flush empties
// both structures. Counters count metadata-cache and N-TLB hits and misses
// of first lookups, like the paper's simulator counters.
// Timing (no misses): accept, lookup, issue, then the memory's latency,
// then capture and respond: 5 cycles plus the memory latency (counted from
// the cycle the request is taken to the cycle the response is valid).
module nlb import zeno_pkg::*; #(
  parameter int MD_ENTRIES    = 128,
  parameter int MD_WAYS       = 8,
  parameter int TLB_ENTRIES   = 1024,
  parameter int TLB_WAYS      = 8,
  parameter bit MD_MISS_FAULT = 1'b0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  output logic              req_ready,
  input  mreq_t             req,       // uses nsid, va, acc, size, we, wdata, wstrb
  input  logic              req_tag,
  output logic              rsp_valid,
  output mrsp_t             rsp,
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output mreq_t             mem_req,
  input  logic              mem_rsp_valid,
  input  mrsp_t             mem_rsp,
  input  logic              inv,
  input  logic [NSID_W-1:0] inv_id,
  input  logic              flush,
  output logic [31:0]       md_hits,
  output logic [31:0]       md_misses,
  output logic [31:0]       tlb_hits,
  output logic [31:0]       tlb_misses
);
  typedef enum logic [2:0] {S_IDLE, S_LOOK, S_MDF_REQ, S_MDF_WAIT, S_PTW, S_ACC, S_AWAIT, S_RESP} state_t;
  state_t state;

  mreq_t            q;
  logic             q_tag;
  logic             relook;           // second lookup after a fill
  logic [2:0]       mdw;              // metadata word being fetched
  md_t              fmd;              // metadata being fetched
  logic [PPN_W-1:0] ppn_q;

  // lookup structures
  logic             md_hit, tlb_hit, pc_ok;
  md_t              md;
  logic [PPN_W-1:0] tlb_ppn;
  fault_t           pc_fault;

  logic             ptw_start, ptw_done, ptw_fault;
  logic [PPN_W-1:0] ptw_ppn;
  logic             ptw_mem_valid;
  mreq_t            ptw_mem_req;

  md_cache #(.ENTRIES(MD_ENTRIES), .WAYS(MD_WAYS)) u_mdc (
    .clk, .rst_n, .lookup_id(q.nsid), .hit(md_hit), .hit_md(md),
    .fill(state == S_MDF_WAIT && mem_rsp_valid && mdw == 3'(MW_ROOT) && mem_rsp.fault == F_NONE),
    .fill_id(q.nsid), .fill_md('{min_addr: fmd.min_addr, max_addr: fmd.max_addr, perm: fmd.perm,
                                pt_ppn: fmd.pt_ppn, root_id: mem_rsp.rdata}),
    .inv, .inv_id, .flush);

  ntlb #(.ENTRIES(TLB_ENTRIES), .WAYS(TLB_WAYS)) u_tlb (
    .clk, .rst_n, .lookup_root(md.root_id), .lookup_vpn(q.va[PGOFF_W +: VPN_W]),
    .hit(tlb_hit), .hit_ppn(tlb_ppn),
    .fill(ptw_done && !ptw_fault), .fill_root(md.root_id),
    .fill_vpn(q.va[PGOFF_W +: VPN_W]), .fill_ppn(ptw_ppn), .flush);

  perm_check u_pc (.md, .id_tag(q_tag), .addr(q.va), .size(q.size), .acc(q.acc),
                   .ok(pc_ok), .fault(pc_fault));

  assign ptw_start = (state == S_LOOK) && q_tag && md_hit && pc_ok && !tlb_hit;

  ptw u_ptw (.clk, .rst_n, .start(ptw_start), .root_ppn(md.pt_ppn), .vpn(q.va[PGOFF_W +: VPN_W]),
             .busy(), .done(ptw_done), .page_fault(ptw_fault), .ppn(ptw_ppn),
             .mem_req_valid(ptw_mem_valid), .mem_req_ready(mem_req_ready && state == S_PTW),
             .mem_req(ptw_mem_req), .mem_rsp_valid(mem_rsp_valid && state == S_PTW),
             .mem_rsp);

  assign req_ready = (state == S_IDLE);

  // memory port
  always_comb begin
    mem_req       = '0;
    mem_req_valid = 1'b0;
    unique case (state)
      S_PTW: begin
        mem_req       = ptw_mem_req;
        mem_req_valid = ptw_mem_valid;
      end
      S_MDF_REQ: begin
        mem_req.sys   = 1'b1;
        mem_req.pa    = dnd_addr(q.nsid, 32'(mdw));
        mem_req.size  = 4'd8;
        mem_req_valid = 1'b1;
      end
      S_ACC: begin
        mem_req       = q;
        mem_req.sys   = 1'b0;
        mem_req.pa    = {ppn_q, q.va[PGOFF_W-1:3], 3'b000};
        mem_req_valid = 1'b1;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; q <= '0; q_tag <= 1'b0; relook <= 1'b0; mdw <= '0;
      fmd <= '0; ppn_q <= '0; rsp_valid <= 1'b0; rsp <= '0;
      md_hits <= '0; md_misses <= '0; tlb_hits <= '0; tlb_misses <= '0;
    end else begin
      rsp_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (req_valid) begin
          q <= req; q_tag <= req_tag; relook <= 1'b0; state <= S_LOOK;
        end
        S_LOOK: begin
          if (!relook) begin
            if (md_hit) md_hits <= md_hits + 1; else md_misses <= md_misses + 1;
          end
          if (!q_tag) begin
            rsp <= '{rdata: '0, fault: F_UNTAGGED}; state <= S_RESP;
          end else if (!md_hit) begin
            if (MD_MISS_FAULT || relook) begin
              rsp <= '{rdata: '0, fault: F_MD_MISS}; state <= S_RESP;
            end else begin
              mdw <= 3'(MW_MIN); state <= S_MDF_REQ;
            end
          end else if (!pc_ok) begin
            rsp <= '{rdata: '0, fault: pc_fault}; state <= S_RESP;
          end else if (tlb_hit) begin
            tlb_hits <= tlb_hits + 1;
            ppn_q <= tlb_ppn; state <= S_ACC;
          end else begin
            tlb_misses <= tlb_misses + 1;
            state <= S_PTW;
          end
        end
        S_MDF_REQ: if (mem_req_ready) state <= S_MDF_WAIT;
        S_MDF_WAIT: if (mem_rsp_valid) begin
          if (mem_rsp.fault != F_NONE) begin
            rsp <= '{rdata: '0, fault: mem_rsp.fault}; state <= S_RESP;
          end else begin
            unique case (mdw)
              3'(MW_MIN):  fmd.min_addr <= mem_rsp.rdata;
              3'(MW_MAX):  fmd.max_addr <= mem_rsp.rdata;
              3'(MW_PERM): fmd.perm     <= perm_t'(mem_rsp.rdata[3:0]);
              3'(MW_PPN):  fmd.pt_ppn   <= mem_rsp.rdata[PPN_W-1:0];
              default:     ;
            endcase
            if (mdw == 3'(MW_ROOT)) begin
              relook <= 1'b1; state <= S_LOOK;   // cache filled this cycle
            end else begin
              mdw <= mdw + 3'd1; state <= S_MDF_REQ;
            end
          end
        end
        S_PTW: if (ptw_done) begin
          if (ptw_fault) begin
            rsp <= '{rdata: '0, fault: F_PAGE}; state <= S_RESP;
          end else begin
            ppn_q <= ptw_ppn; state <= S_ACC;
          end
        end
        S_ACC: if (mem_req_ready) state <= S_AWAIT;
        S_AWAIT: if (mem_rsp_valid) begin
          rsp <= mem_rsp; state <= S_RESP;
        end
        S_RESP: begin
          rsp_valid <= 1'b1; state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
