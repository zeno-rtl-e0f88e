// zeno_system: a multi-node Zeno system, the top of this RTL.
//
// MESH_X x MESH_Y Zeno nodes joined by 2D meshes. The default of 2 x 2 is
// the paper's four-node example system; the paper evaluates meshes from
// 2x2 to 8x8 and the parameters take those sizes. Every node sees the same
// Namespaces: an ID made on one node can be used on any other, metadata
// lives on the ID's home node, and data lives wherever the Namespace's page
// table maps it; whatever is not local travels through the network
// interfaces, which check every Namespace request they serve.
//
// Each node has three routers, one per network (Namespace requests, sys
// requests, responses; see network_interface). Node n sits at
// x = n mod MESH_X, y = n div MESH_X; router port 1 faces y-1, 2 x+1,
// 3 y+1, 4 x-1, port 0 is the node. Ports at the mesh edge are tied off.
//
// Ports: per node, the core side of zeno_node (where each node's rv64
// pipeline connects) and the node's memory port (where its DRAM connects),
// as arrays indexed by node number. All parameters default to the paper's
// synthesized configuration (1024-entry 8-way N-TLB, 128-entry 8-way
// Metadata Cache) and its four-node example.
//
// Lint note: rst_n is the asynchronous reset of the flip-flops and also the
// disable condition of the handshake assertions in the blocks below, so the linter sees it
// used both asynchronously and synchronously. The assertions only observe;
// no synchronous logic is built from rst_n.
module zeno_system import zeno_pkg::*; #(
  parameter int MESH_X        = 2,
  parameter int MESH_Y        = 2,
  parameter int MD_ENTRIES    = 128,
  parameter int MD_WAYS       = 8,
  parameter int TLB_ENTRIES   = 1024,
  parameter int TLB_WAYS      = 8,
  parameter bit MD_MISS_FAULT = 1'b0,
  parameter int NREGS         = 32,
  parameter int REVOKE_QDEPTH = 16,
  parameter int ROUTER_DEPTH  = 2,
  localparam int N  = MESH_X * MESH_Y,
  localparam int AW = $clog2(NREGS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [AW-1:0]     core_extd_sel     [N],
  input  logic [AW-1:0]     core_ext1_sel     [N],
  input  logic [AW-1:0]     core_ext2_sel     [N],
  output logic [NSID_W-1:0] core_extd_data    [N],
  output logic [NSID_W-1:0] core_ext1_data    [N],
  output logic [NSID_W-1:0] core_ext2_data    [N],
  input  logic [N-1:0]      core_ext_we,
  input  logic [AW-1:0]     core_ext_waddr    [N],
  input  logic [NSID_W-1:0] core_ext_wdata    [N],
  input  logic [N-1:0]      core_mem_valid,
  output logic [N-1:0]      core_mem_ready,
  input  logic [1:0]        core_mem_nsid_src [N],
  input  logic [XLEN-1:0]   core_mem_va       [N],
  input  acc_t              core_mem_acc      [N],
  input  logic [3:0]        core_mem_size     [N],
  input  logic [XLEN-1:0]   core_mem_wdata    [N],
  input  logic [7:0]        core_mem_wstrb    [N],
  output logic [N-1:0]      core_rsp_valid,
  output logic [XLEN-1:0]   core_rsp_rdata    [N],
  output fault_t            core_ns_fault     [N],
  input  logic [N-1:0]      nsop_valid,
  output logic [N-1:0]      nsop_ready,
  input  nsop_t             nsop              [N],
  input  logic [XLEN-1:0]   nsop_min          [N],
  input  logic [XLEN-1:0]   nsop_max          [N],
  input  logic [2:0]        nsop_perm         [N],
  input  logic [PPN_W-1:0]  nsop_pt_ppn       [N],
  input  logic [AW-1:0]     nsop_rd           [N],
  output logic [N-1:0]      nsop_done,
  output fault_t            nsop_fault        [N],
  output logic [NSID_W-1:0] nsop_id           [N],
  output logic [31:0]       md_hits           [N],
  output logic [31:0]       md_misses         [N],
  output logic [31:0]       tlb_hits          [N],
  output logic [31:0]       tlb_misses        [N],
  input  logic [N-1:0]      mmu_flush,
  output logic [N-1:0]      dram_req_valid,
  input  logic [N-1:0]      dram_req_ready,
  output mreq_t             dram_req          [N],
  input  logic [N-1:0]      dram_rsp_valid,
  input  mrsp_t             dram_rsp          [N]
);
  // router port wiring, per network and node
  logic [4:0] r_in_valid  [3][N];
  logic [4:0] r_in_ready  [3][N];
  pkt_t       r_in_pkt    [3][N][5];
  logic [4:0] r_out_valid [3][N];
  logic [4:0] r_out_ready [3][N];
  pkt_t       r_out_pkt   [3][N][5];

  logic [2:0] n_inj_valid [N], n_inj_ready [N], n_ej_valid [N], n_ej_ready [N];
  pkt_t       n_inj_pkt   [N][3];
  pkt_t       n_ej_pkt    [N][3];

  for (genvar i = 0; i < N; i++) begin : g_node
    localparam int X = i % MESH_X;
    localparam int Y = i / MESH_X;

    zeno_node #(.NODE_ID(i), .MD_ENTRIES(MD_ENTRIES), .MD_WAYS(MD_WAYS),
                .TLB_ENTRIES(TLB_ENTRIES), .TLB_WAYS(TLB_WAYS), .MD_MISS_FAULT(MD_MISS_FAULT),
                .NREGS(NREGS), .REVOKE_QDEPTH(REVOKE_QDEPTH)) u_node (
      .clk, .rst_n,
      .core_extd_sel(core_extd_sel[i]), .core_ext1_sel(core_ext1_sel[i]), .core_ext2_sel(core_ext2_sel[i]),
      .core_extd_data(core_extd_data[i]), .core_ext1_data(core_ext1_data[i]), .core_ext2_data(core_ext2_data[i]),
      .core_ext_we(core_ext_we[i]), .core_ext_waddr(core_ext_waddr[i]), .core_ext_wdata(core_ext_wdata[i]),
      .core_mem_valid(core_mem_valid[i]), .core_mem_ready(core_mem_ready[i]),
      .core_mem_nsid_src(core_mem_nsid_src[i]), .core_mem_va(core_mem_va[i]),
      .core_mem_acc(core_mem_acc[i]), .core_mem_size(core_mem_size[i]),
      .core_mem_wdata(core_mem_wdata[i]), .core_mem_wstrb(core_mem_wstrb[i]),
      .core_rsp_valid(core_rsp_valid[i]), .core_rsp_rdata(core_rsp_rdata[i]),
      .core_ns_fault(core_ns_fault[i]),
      .nsop_valid(nsop_valid[i]), .nsop_ready(nsop_ready[i]), .nsop(nsop[i]),
      .nsop_min(nsop_min[i]), .nsop_max(nsop_max[i]), .nsop_perm(nsop_perm[i]),
      .nsop_pt_ppn(nsop_pt_ppn[i]), .nsop_rd(nsop_rd[i]),
      .nsop_done(nsop_done[i]), .nsop_fault(nsop_fault[i]), .nsop_id(nsop_id[i]),
      .md_hits(md_hits[i]), .md_misses(md_misses[i]), .tlb_hits(tlb_hits[i]), .tlb_misses(tlb_misses[i]),
      .mmu_flush(mmu_flush[i]),
      .dram_req_valid(dram_req_valid[i]), .dram_req_ready(dram_req_ready[i]), .dram_req(dram_req[i]),
      .dram_rsp_valid(dram_rsp_valid[i]), .dram_rsp(dram_rsp[i]),
      .inj_valid(n_inj_valid[i]), .inj_ready(n_inj_ready[i]), .inj_pkt(n_inj_pkt[i]),
      .ej_valid(n_ej_valid[i]), .ej_ready(n_ej_ready[i]), .ej_pkt(n_ej_pkt[i]));

    for (genvar n = 0; n < 3; n++) begin : g_net
      // port 0: the node
      assign r_in_valid[n][i][0]  = n_inj_valid[i][n];
      assign r_in_pkt[n][i][0]    = n_inj_pkt[i][n];
      assign n_inj_ready[i][n]    = r_in_ready[n][i][0];
      assign n_ej_valid[i][n]     = r_out_valid[n][i][0];
      assign n_ej_pkt[i][n]       = r_out_pkt[n][i][0];
      assign r_out_ready[n][i][0] = n_ej_ready[i][n];

      // ports 1..4: neighbours; out of port p enters the neighbour's
      // opposite port (1<->3, 2<->4)
      for (genvar p = 1; p < 5; p++) begin : g_port
        localparam int NX = (p == 2) ? X + 1 : (p == 4) ? X - 1 : X;
        localparam int NY = (p == 3) ? Y + 1 : (p == 1) ? Y - 1 : Y;
        localparam int OPP = (p == 1) ? 3 : (p == 2) ? 4 : (p == 3) ? 1 : 2;
        if (NX >= 0 && NX < MESH_X && NY >= 0 && NY < MESH_Y) begin : g_link
          localparam int J = NY * MESH_X + NX;
          assign r_in_valid[n][J][OPP]  = r_out_valid[n][i][p];
          assign r_in_pkt[n][J][OPP]    = r_out_pkt[n][i][p];
          assign r_out_ready[n][i][p]   = r_in_ready[n][J][OPP];
        end else begin : g_edge
          assign r_in_valid[n][i][p]  = 1'b0;
          assign r_in_pkt[n][i][p]    = '0;
          assign r_out_ready[n][i][p] = 1'b1;
        end
      end

      mesh_router #(.MESH_X(MESH_X), .MESH_Y(MESH_Y), .X(X), .Y(Y), .DEPTH(ROUTER_DEPTH)) u_rt (
        .clk, .rst_n,
        .in_valid(r_in_valid[n][i]), .in_ready(r_in_ready[n][i]), .in_pkt(r_in_pkt[n][i]),
        .out_valid(r_out_valid[n][i]), .out_ready(r_out_ready[n][i]), .out_pkt(r_out_pkt[n][i]));
    end
  end
endmodule
