// zeno_node: one node of a Zeno system: the Namespace parts of a Zeno core,
// its MMU, the Namespace operation unit, the network interface and the
// arbitration that lets them share the node's memory.
//
// A node in the paper is a multi-core processor whose cores have an
// extended register file for Namespace IDs and an MMU with a Metadata Cache,
// a Namespace-TLB, a page-table walker and permission checks, together with
// globally shared main memory and a network interface (NI). This module
// holds, for one core:
//   * ext_regfile - the Namespace-ID registers; a finished NS_CREATE or
//                   NS_DERIVE writes its new ID there with the tag bit set,
//                   a write from the core (core_ext_we) clears the tag;
//   * nlb         - the MMU; every load, store or fetch names its Namespace
//                   through the ext-register select (0, ext1 or ext2);
//   * ns_op_unit  - NS_CREATE / NS_DERIVE / NS_REVOKE; the operand ID is
//                   read through ext1, the result goes to register nsop_rd;
//                   revocations drop the ID from both MMUs' metadata caches;
//   * two mem_arbiters and an address steer: the MMU and the NS operation
//     unit share one path that goes to local memory when the physical
//     address's node field is this node and to the NI otherwise; local
//     memory is shared by that path and the NI's two serving ports;
//   * network_interface.
// The rest of the core (the seven-stage rv64 pipeline, base register file,
// ALU) and the L1/L2 caches are outside this RTL; the node's core_* ports
// are where that pipeline would connect, and dram_* is where the node's
// memory connects. Node number, memory map and arbitration are this
// design's choices.
//
// Timing: a local access with warm Metadata Cache and N-TLB takes 7 cycles
// plus the memory latency from the request being taken to the response (5
// in the MMU, one in each of the two arbiters); see nlb, ns_op_unit and
// network_interface for the rest. When a Namespace operation finishes in
// the same cycle as a core write to the extended registers, the operation's
// result is written and the core's write is lost: the core is expected to
// wait for nsop_done, as an in-order pipeline stalled on the instruction
// would.
//
// Lint note: rst_n is the asynchronous reset of the flip-flops and also the
// disable condition of the handshake assertions in the blocks below, so the linter sees it
// used both asynchronously and synchronously. The assertions only observe;
// no synchronous logic is built from rst_n.
module zeno_node import zeno_pkg::*; #(
  parameter int NODE_ID       = 0,
  parameter int MD_ENTRIES    = 128,
  parameter int MD_WAYS       = 8,
  parameter int TLB_ENTRIES   = 1024,
  parameter int TLB_WAYS      = 8,
  parameter bit MD_MISS_FAULT = 1'b0,
  parameter int NREGS         = 32,
  parameter int REVOKE_QDEPTH = 16,
  localparam int AW = $clog2(NREGS)
) (
  input  logic              clk,
  input  logic              rst_n,
  // core: extended registers
  input  logic [AW-1:0]     core_extd_sel,
  input  logic [AW-1:0]     core_ext1_sel,
  input  logic [AW-1:0]     core_ext2_sel,
  output logic [NSID_W-1:0] core_extd_data,
  output logic [NSID_W-1:0] core_ext1_data,
  output logic [NSID_W-1:0] core_ext2_data,
  input  logic              core_ext_we,
  input  logic [AW-1:0]     core_ext_waddr,
  input  logic [NSID_W-1:0] core_ext_wdata,
  // core: memory access through a Namespace
  input  logic              core_mem_valid,
  output logic              core_mem_ready,
  input  logic [1:0]        core_mem_nsid_src,   // 0 zero, 1 ext1, 2 ext2
  input  logic [XLEN-1:0]   core_mem_va,
  input  acc_t              core_mem_acc,
  input  logic [3:0]        core_mem_size,
  input  logic [XLEN-1:0]   core_mem_wdata,
  input  logic [7:0]        core_mem_wstrb,
  output logic              core_rsp_valid,
  output logic [XLEN-1:0]   core_rsp_rdata,
  output fault_t            core_ns_fault,
  // core: Namespace operations
  input  logic              nsop_valid,
  output logic              nsop_ready,
  input  nsop_t             nsop,
  input  logic [XLEN-1:0]   nsop_min,
  input  logic [XLEN-1:0]   nsop_max,
  input  logic [2:0]        nsop_perm,
  input  logic [PPN_W-1:0]  nsop_pt_ppn,
  input  logic [AW-1:0]     nsop_rd,
  output logic              nsop_done,
  output fault_t            nsop_fault,
  output logic [NSID_W-1:0] nsop_id,
  // performance counters of the core's MMU
  output logic [31:0]       md_hits,
  output logic [31:0]       md_misses,
  output logic [31:0]       tlb_hits,
  output logic [31:0]       tlb_misses,
  input  logic              mmu_flush,
  // node memory
  output logic              dram_req_valid,
  input  logic              dram_req_ready,
  output mreq_t             dram_req,
  input  logic              dram_rsp_valid,
  input  mrsp_t             dram_rsp,
  // network
  output logic [2:0]        inj_valid,
  input  logic [2:0]        inj_ready,
  output pkt_t              inj_pkt [3],
  input  logic [2:0]        ej_valid,
  output logic [2:0]        ej_ready,
  input  pkt_t              ej_pkt [3]
);
  localparam logic [NODE_W-1:0] ME = NODE_W'(NODE_ID);

  // ---------------- extended register file ----------------
  logic [NSID_W-1:0] nsid;
  logic              nsid_tag, extd_tag_unused;
  logic              x_we, x_wtag;
  logic [AW-1:0]     x_waddr;
  logic [NSID_W-1:0] x_wdata;
  logic [AW-1:0]     rd_q;
  nsop_t             op_q;
  logic [1:0]        ext1_sel_src;

  always_comb begin
    if (nsop_done && nsop_fault == F_NONE && op_q != NS_REVOKE) begin
      x_we = 1'b1; x_waddr = rd_q; x_wdata = nsop_id; x_wtag = 1'b1;
    end else begin
      x_we = core_ext_we; x_waddr = core_ext_waddr; x_wdata = core_ext_wdata; x_wtag = 1'b0;
    end
  end

  // a Namespace operation reads its operand ID (and its tag) through ext1
  assign ext1_sel_src = nsop_valid ? 2'd1 : core_mem_nsid_src;

  ext_regfile #(.NREGS(NREGS)) u_xrf (
    .clk, .rst_n,
    .extd_sel(core_extd_sel), .ext1_sel(core_ext1_sel), .ext2_sel(core_ext2_sel),
    .extd_data(core_extd_data), .ext1_data(core_ext1_data), .ext2_data(core_ext2_data),
    .extd_tag(extd_tag_unused),
    .nsid_src(ext1_sel_src), .nsid, .nsid_tag,
    .we(x_we), .waddr(x_waddr), .wdata(x_wdata), .wtag(x_wtag));

  // ---------------- MMU ----------------
  mreq_t core_req;
  logic  c_mvalid, c_mready, c_mrsp_valid;
  mreq_t c_mreq;
  mrsp_t c_mrsp, core_rsp;
  logic  inv, nlb_ready;
  logic [NSID_W-1:0] inv_id;

  always_comb begin
    core_req       = '0;
    core_req.nsid  = nsid;
    core_req.va    = core_mem_va;
    core_req.acc   = core_mem_acc;
    core_req.size  = core_mem_size;
    core_req.we    = (core_mem_acc == ACC_STORE);
    core_req.wdata = core_mem_wdata;
    core_req.wstrb = core_mem_wstrb;
  end

  nlb #(.MD_ENTRIES(MD_ENTRIES), .MD_WAYS(MD_WAYS), .TLB_ENTRIES(TLB_ENTRIES),
        .TLB_WAYS(TLB_WAYS), .MD_MISS_FAULT(MD_MISS_FAULT)) u_nlb (
    .clk, .rst_n,
    .req_valid(core_mem_valid && !nsop_valid), .req_ready(nlb_ready), .req(core_req), .req_tag(nsid_tag),
    .rsp_valid(core_rsp_valid), .rsp(core_rsp),
    .mem_req_valid(c_mvalid), .mem_req_ready(c_mready), .mem_req(c_mreq),
    .mem_rsp_valid(c_mrsp_valid), .mem_rsp(c_mrsp),
    .inv, .inv_id, .flush(mmu_flush),
    .md_hits, .md_misses, .tlb_hits, .tlb_misses);

  assign core_mem_ready = nlb_ready && !nsop_valid;
  assign core_rsp_rdata = core_rsp.rdata;
  assign core_ns_fault  = core_rsp.fault;

  // ---------------- Namespace operations ----------------
  logic  o_mvalid, o_mready, o_mrsp_valid;
  mreq_t o_mreq;
  mrsp_t o_mrsp;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin rd_q <= '0; op_q <= NS_CREATE; end
    else if (nsop_valid && nsop_ready) begin rd_q <= nsop_rd; op_q <= nsop; end

  ns_op_unit #(.NODE_ID(NODE_ID), .QDEPTH(REVOKE_QDEPTH)) u_nsop (
    .clk, .rst_n,
    .op_valid(nsop_valid), .op_ready(nsop_ready), .op(nsop),
    .op_min(nsop_min), .op_max(nsop_max), .op_perm(nsop_perm), .op_pt_ppn(nsop_pt_ppn),
    .op_id(nsid), .op_id_tag(nsid_tag),
    .done(nsop_done), .fault(nsop_fault), .new_id(nsop_id),
    .mem_req_valid(o_mvalid), .mem_req_ready(o_mready), .mem_req(o_mreq),
    .mem_rsp_valid(o_mrsp_valid), .mem_rsp(o_mrsp),
    .inv, .inv_id);

  // ---------------- node path: MMU + NS ops -> local or remote ----------------
  logic [1:0] na_req_valid, na_req_ready, na_rsp_valid;
  mreq_t      na_req [2];
  mrsp_t      na_rsp [2];
  logic       p_valid, p_ready, p_rsp_valid;
  mreq_t      p_req;
  mrsp_t      p_rsp;

  always_comb begin
    na_req_valid = {o_mvalid, c_mvalid};
    na_req[0]    = c_mreq;
    na_req[1]    = o_mreq;
    c_mready     = na_req_ready[0];
    o_mready     = na_req_ready[1];
    c_mrsp_valid = na_rsp_valid[0];
    o_mrsp_valid = na_rsp_valid[1];
    c_mrsp       = na_rsp[0];
    o_mrsp       = na_rsp[1];
  end

  mem_arbiter #(.N(2)) u_node_arb (
    .clk, .rst_n,
    .m_req_valid(na_req_valid), .m_req_ready(na_req_ready), .m_req(na_req),
    .m_rsp_valid(na_rsp_valid), .m_rsp(na_rsp),
    .s_req_valid(p_valid), .s_req_ready(p_ready), .s_req(p_req),
    .s_rsp_valid(p_rsp_valid), .s_rsp(p_rsp));

  logic  is_local, to_remote_q;
  logic  l_valid, l_ready, l_rsp_valid;
  logic  r_valid, r_ready, r_rsp_valid;
  mrsp_t l_rsp, r_rsp;
  assign is_local = (pa_node(p_req.pa) == ME);
  assign l_valid  = p_valid && is_local;
  assign r_valid  = p_valid && !is_local;
  assign p_ready  = is_local ? l_ready : r_ready;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) to_remote_q <= 1'b0;
    else if (p_valid && p_ready) to_remote_q <= !is_local;

  assign p_rsp_valid = to_remote_q ? r_rsp_valid : l_rsp_valid;
  assign p_rsp       = to_remote_q ? r_rsp : l_rsp;

  // ---------------- network interface ----------------
  logic  mn_valid, mn_ready, mn_rsp_valid, ms_valid, ms_ready, ms_rsp_valid;
  mreq_t mn_req, ms_req;
  mrsp_t mn_rsp, ms_rsp;

  network_interface #(.NODE_ID(NODE_ID), .MD_ENTRIES(MD_ENTRIES), .MD_WAYS(MD_WAYS),
                      .TLB_ENTRIES(TLB_ENTRIES), .TLB_WAYS(TLB_WAYS),
                      .MD_MISS_FAULT(MD_MISS_FAULT)) u_ni (
    .clk, .rst_n,
    .c_req_valid(r_valid), .c_req_ready(r_ready), .c_req(p_req),
    .c_rsp_valid(r_rsp_valid), .c_rsp(r_rsp),
    .inj_valid, .inj_ready, .inj_pkt, .ej_valid, .ej_ready, .ej_pkt,
    .mn_req_valid(mn_valid), .mn_req_ready(mn_ready), .mn_req,
    .mn_rsp_valid(mn_rsp_valid), .mn_rsp,
    .ms_req_valid(ms_valid), .ms_req_ready(ms_ready), .ms_req,
    .ms_rsp_valid(ms_rsp_valid), .ms_rsp,
    .inv, .inv_id, .flush(mmu_flush));

  // ---------------- local memory arbitration ----------------
  logic [2:0] da_req_valid, da_req_ready, da_rsp_valid;
  mreq_t      da_req [3];
  mrsp_t      da_rsp [3];
  always_comb begin
    da_req_valid = {ms_valid, mn_valid, l_valid};
    da_req[0] = p_req;  da_req[1] = mn_req;  da_req[2] = ms_req;
    l_ready  = da_req_ready[0]; mn_ready = da_req_ready[1]; ms_ready = da_req_ready[2];
    l_rsp_valid  = da_rsp_valid[0]; mn_rsp_valid = da_rsp_valid[1]; ms_rsp_valid = da_rsp_valid[2];
    l_rsp = da_rsp[0]; mn_rsp = da_rsp[1]; ms_rsp = da_rsp[2];
  end

  mem_arbiter #(.N(3)) u_dram_arb (
    .clk, .rst_n,
    .m_req_valid(da_req_valid), .m_req_ready(da_req_ready), .m_req(da_req),
    .m_rsp_valid(da_rsp_valid), .m_rsp(da_rsp),
    .s_req_valid(dram_req_valid), .s_req_ready(dram_req_ready), .s_req(dram_req),
    .s_rsp_valid(dram_rsp_valid), .s_rsp(dram_rsp));
endmodule
