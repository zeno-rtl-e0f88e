// zeno_system_tb: end-to-end test of the four-node Zeno system at its
// default size (2x2 mesh, 128-entry 8-way Metadata Caches, 1024-entry 8-way
// N-TLBs), with one behavioural memory per node.
//
// Start-up, as firmware would do it: each node n gets a page table at its
// own page 0x100 that maps 16 pages from virtual 0x4000_0000 with page i on
// node i mod 4, and the default Namespace (ID 0, home node 0) is written to
// node 0's directory. Then, on all nodes at once:
//   1. a local store and load through the default Namespace, with the
//      warm-path latency checked;
//   2. NS_CREATE of a 64 KiB read-write Namespace over the node's page table;
//   3. a Get-transfer phase in the manner of the paper's first workload:
//      every node reads a whole 4 KiB page that lives on each node through
//      its own Namespace, after writing a few words of each; remote pages
//      are served by the owner's network interface, which fetches the
//      Namespace's metadata and page-table entries from the creating node;
// and finally, on node 0 with the others idle, the rest of the Namespace
// life cycle: NS_DERIVE of a narrow read-only child, its bounds and
// permission faults on a remote page, an unmapped page, a forged ID, a
// refused widening derive, NS_REVOKE of the parent and the child refused.
// Each mechanism is counted and one that never happened counts a failure.
module zeno_system_tb;
  import zeno_pkg::*;
  localparam int N = 4;
  localparam int LAT = 100;        // memory latency in cycles (the paper's DRAM figure)
  localparam int WORDS = 512;      // one 4 KiB page
  localparam logic [63:0] BASE = 64'h4000_0000;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [4:0]  core_extd_sel [N], core_ext1_sel [N], core_ext2_sel [N], core_ext_waddr [N], nsop_rd [N];
  logic [63:0] core_extd_data [N], core_ext1_data [N], core_ext2_data [N], core_ext_wdata [N];
  logic [N-1:0] core_ext_we, core_mem_valid, core_mem_ready, core_rsp_valid;
  logic [1:0]  core_mem_nsid_src [N];
  logic [63:0] core_mem_va [N], core_mem_wdata [N], core_rsp_rdata [N];
  acc_t        core_mem_acc [N];
  logic [3:0]  core_mem_size [N];
  logic [7:0]  core_mem_wstrb [N];
  fault_t      core_ns_fault [N], nsop_fault [N];
  logic [N-1:0] nsop_valid, nsop_ready, nsop_done, mmu_flush;
  nsop_t       nsop [N];
  logic [63:0] nsop_min [N], nsop_max [N], nsop_id [N];
  logic [2:0]  nsop_perm [N];
  logic [43:0] nsop_pt_ppn [N];
  logic [31:0] md_hits [N], md_misses [N], tlb_hits [N], tlb_misses [N];
  logic [N-1:0] dram_req_valid, dram_req_ready, dram_rsp_valid;
  mreq_t       dram_req [N];
  mrsp_t       dram_rsp [N];

  zeno_system dut (.*);

  for (genvar i = 0; i < N; i++) begin : g_mem
    dram_model #(.LATENCY(LAT)) u_mem (
      .clk, .rst_n, .req_valid(dram_req_valid[i]), .req_ready(dram_req_ready[i]), .req(dram_req[i]),
      .rsp_valid(dram_rsp_valid[i]), .rsp(dram_rsp[i]));
  end

  function automatic void poke(int n, logic [PA_W-1:0] pa, logic [63:0] d);
    case (n)
      0: g_mem[0].u_mem.poke(pa, d);
      1: g_mem[1].u_mem.poke(pa, d);
      2: g_mem[2].u_mem.poke(pa, d);
      default: g_mem[3].u_mem.poke(pa, d);
    endcase
  endfunction

  function automatic logic [63:0] peek(int n, logic [PA_W-1:0] pa);
    case (n)
      0: return g_mem[0].u_mem.peek(pa);
      1: return g_mem[1].u_mem.peek(pa);
      2: return g_mem[2].u_mem.peek(pa);
      default: return g_mem[3].u_mem.peek(pa);
    endcase
  endfunction

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  function automatic logic [63:0] pte(logic [43:0] p, bit leaf);
    return {10'd0, p, 6'd0, leaf ? 4'b0111 : 4'b0001};
  endfunction

  // data page of node n's Namespace, virtual page i
  function automatic logic [43:0] data_ppn(int n, int i);
    return {8'(i % N), 36'h800 + 36'(16 * n + i)};
  endfunction

  function automatic logic [63:0] pattern(int n, int i, int w);
    return {8'hd0, 8'(n), 16'(i), 32'(w * 7 + 1)};
  endfunction

  // ---------------- mechanism counters ----------------
  int n_ns_pkt, n_sys_pkt, n_rsp_pkt, n_router_stall;
  int n_create, n_derive, n_revoke, n_untagged, n_bounds, n_perm, n_invalid, n_page, n_nsop_refused;
  int n_remote_load, n_local_load;
  always @(posedge clk) if (rst_n)
    for (int i = 0; i < N; i++) begin
      if (dut.n_inj_valid[i][0] && dut.n_inj_ready[i][0]) n_ns_pkt++;
      if (dut.n_inj_valid[i][1] && dut.n_inj_ready[i][1]) n_sys_pkt++;
      if (dut.n_inj_valid[i][2] && dut.n_inj_ready[i][2]) n_rsp_pkt++;
      for (int k = 0; k < 3; k++)
        for (int p = 1; p < 5; p++)
          if (dut.r_in_valid[k][i][p] && !dut.r_in_ready[k][i][p]) n_router_stall++;
    end

  // ---------------- per-node drivers ----------------
  task automatic access(int n, logic [1:0] src, logic [4:0] r1, logic [63:0] va, acc_t acc,
                        logic [63:0] wd, output fault_t f, output logic [63:0] rd, output int cyc);
    @(negedge clk);
    core_mem_nsid_src[n] = src; core_ext1_sel[n] = r1; core_mem_va[n] = va; core_mem_acc[n] = acc;
    core_mem_size[n] = 8; core_mem_wdata[n] = wd; core_mem_wstrb[n] = 8'hff; core_mem_valid[n] = 1;
    do @(posedge clk); while (!core_mem_ready[n]);
    #1 core_mem_valid[n] = 0;
    cyc = 1;
    while (!core_rsp_valid[n]) begin @(posedge clk); #1 cyc++; end
    f = core_ns_fault[n]; rd = core_rsp_rdata[n];
    case (f)
      F_UNTAGGED: n_untagged++;
      F_BOUNDS:   n_bounds++;
      F_PERM:     n_perm++;
      F_INVALID:  n_invalid++;
      F_PAGE:     n_page++;
      default: ;
    endcase
  endtask

  task automatic ns_op(int n, nsop_t o, logic [4:0] opnd, logic [63:0] mn, logic [63:0] mx,
                       logic [2:0] p, logic [43:0] ppn, logic [4:0] rd, output fault_t f, output logic [63:0] id);
    @(negedge clk);
    nsop[n] = o; core_ext1_sel[n] = opnd; nsop_min[n] = mn; nsop_max[n] = mx; nsop_perm[n] = p;
    nsop_pt_ppn[n] = ppn; nsop_rd[n] = rd; nsop_valid[n] = 1;
    do @(posedge clk); while (!nsop_ready[n]);
    #1 nsop_valid[n] = 0;
    while (!nsop_done[n]) begin @(posedge clk); #1; end
    f = nsop_fault[n]; id = nsop_id[n];
    @(posedge clk);
    if (f == F_NONE) case (o)
      NS_CREATE: n_create++;
      NS_DERIVE: n_derive++;
      default:   n_revoke++;
    endcase
    else if (f == F_NS_OP) n_nsop_refused++;
    else if (f == F_UNTAGGED) n_untagged++;
    else if (f == F_INVALID) n_invalid++;
  endtask

  // phases 1-3 for node n
  task automatic node_run(int n);
    fault_t f; logic [63:0] rd, id; int cyc, errs;
    // 1. default Namespace, page n is this node's own memory
    access(n, 0, 0, BASE + 64'(n * 4096 + 8), ACC_STORE, 64'hab00 + 64'(n), f, rd, cyc);
    chk(f == F_NONE, $sformatf("node %0d store through default Namespace", n));
    access(n, 0, 0, BASE + 64'(n * 4096 + 8), ACC_LOAD, 0, f, rd, cyc);
    chk(f == F_NONE && rd == 64'hab00 + 64'(n), $sformatf("node %0d load through default Namespace", n));
    // 2. NS_CREATE
    ns_op(n, NS_CREATE, 0, BASE, BASE + 64'hffff, 3'b011, {8'(n), 36'h100}, 5'd1, f, id);
    chk(f == F_NONE && id == {8'(n), 40'd0, 16'd1}, $sformatf("node %0d NS_CREATE id %h", n, id));
    // 3. Get transfer: stores to each page, then read each page whole
    for (int i = 0; i < N; i++)
      for (int w = 0; w < 4; w++) begin
        access(n, 1, 1, BASE + 64'(i * 4096 + w * 8), ACC_STORE, 64'hee00_0000 + 64'(n * 256 + i * 16 + w), f, rd, cyc);
        chk(f == F_NONE, $sformatf("node %0d store page %0d", n, i));
      end
    errs = 0;
    for (int i = 0; i < N; i++)
      for (int w = 0; w < WORDS; w++) begin
        logic [63:0] exp;
        exp = (w < 4) ? 64'hee00_0000 + 64'(n * 256 + i * 16 + w) : pattern(n, i, w);
        access(n, 1, 1, BASE + 64'(i * 4096 + w * 8), ACC_LOAD, 0, f, rd, cyc);
        if (f != F_NONE || rd != exp) errs++;
        if (i == n) n_local_load++; else n_remote_load++;
      end
    chk(errs == 0, $sformatf("node %0d get transfer: %0d wrong words", n, errs));
  endtask

  initial begin
    fault_t f; logic [63:0] rd, id_c; int cyc;
    int mm, mh, tm, th;
    for (int i = 0; i < N; i++) begin
      core_extd_sel[i] = 0; core_ext1_sel[i] = 0; core_ext2_sel[i] = 0; core_ext_waddr[i] = 0;
      core_ext_wdata[i] = 0; nsop_rd[i] = 0; core_mem_nsid_src[i] = 0; core_mem_va[i] = 0;
      core_mem_acc[i] = ACC_LOAD; core_mem_size[i] = 8; core_mem_wdata[i] = 0; core_mem_wstrb[i] = 0;
      nsop[i] = NS_CREATE; nsop_min[i] = 0; nsop_max[i] = 0; nsop_perm[i] = 0; nsop_pt_ppn[i] = 0;
    end
    core_ext_we = 0; core_mem_valid = 0; nsop_valid = 0; mmu_flush = 0;
    // firmware set-up: page tables (16 pages, page 15 left unmapped)
    for (int n = 0; n < N; n++) begin
      logic [43:0] rt;
      rt = {8'(n), 36'h100};
      poke(n, {rt, 12'(1 * 8)}, pte(rt + 1, 0));
      poke(n, {rt + 44'd1, 12'(0)}, pte(rt + 2, 0));
      for (int i = 0; i < 15; i++) poke(n, {rt + 44'd2, 12'(i * 8)}, pte(data_ppn(n, i), 1));
      for (int i = 0; i < N; i++)
        for (int w = 0; w < WORDS; w++) poke(i % N, {data_ppn(n, i), 12'(w * 8)}, pattern(n, i, w));
    end
    // default Namespace 0: node 0's table, so page i is on node i mod 4
    poke(0, dnd_addr(0, MW_MIN), BASE); poke(0, dnd_addr(0, MW_MAX), BASE + 64'hffff);
    poke(0, dnd_addr(0, MW_PERM), 64'b1111); poke(0, dnd_addr(0, MW_PPN), 64'h100);
    repeat (3) @(posedge clk);
    rst_n = 1;

    fork
      node_run(0);
      node_run(1);
      node_run(2);
      node_run(3);
    join

    // node 0 alone: warm-path latency, derive, faults, revoke
    access(0, 0, 0, BASE + 64'h10, ACC_LOAD, 0, f, rd, cyc);
    chk(f == F_NONE && cyc == 7 + LAT, $sformatf("warm local access latency %0d", cyc));
    ns_op(0, NS_DERIVE, 1, BASE + 64'h1000, BASE + 64'h1fff, 3'b001, 0, 5'd2, f, id_c);
    chk(f == F_NONE && id_c == 64'd2, "NS_DERIVE child on node 0");
    access(0, 1, 2, BASE + 64'h1100, ACC_LOAD, 0, f, rd, cyc);
    chk(f == F_NONE && rd == pattern(0, 1, 32), "child reads remote page 1");
    access(0, 1, 2, BASE + 64'h2010, ACC_LOAD, 0, f, rd, cyc);
    chk(f == F_BOUNDS, "child bounds fault");
    access(0, 1, 2, BASE + 64'h1100, ACC_STORE, 64'hbad, f, rd, cyc);
    chk(f == F_PERM && peek(1, {data_ppn(0, 1), 12'h100}) == pattern(0, 1, 32), "child permission fault");
    access(0, 1, 1, BASE + 64'hf000, ACC_LOAD, 0, f, rd, cyc);
    chk(f == F_PAGE, "unmapped page");
    ns_op(0, NS_DERIVE, 2, BASE, BASE + 64'hffff, 3'b001, 0, 5'd3, f, rd);
    chk(f == F_NS_OP, "widening derive refused");
    @(negedge clk); core_ext_we[0] = 1; core_ext_waddr[0] = 4; core_ext_wdata[0] = 64'd1;
    @(negedge clk); core_ext_we[0] = 0;
    access(0, 1, 4, BASE, ACC_LOAD, 0, f, rd, cyc);
    chk(f == F_UNTAGGED, "forged ID refused");
    ns_op(0, NS_REVOKE, 1, 0, 0, 0, 0, 0, f, rd);
    chk(f == F_NONE, "NS_REVOKE parent");
    access(0, 1, 2, BASE + 64'h1010, ACC_LOAD, 0, f, rd, cyc);
    chk(f == F_INVALID, "child of revoked parent refused");
    access(0, 1, 1, BASE + 64'h10, ACC_LOAD, 0, f, rd, cyc);
    chk(f == F_INVALID, "revoked parent refused");

    mm = 0; mh = 0; tm = 0; th = 0;
    for (int i = 0; i < N; i++) begin mm += md_misses[i]; mh += md_hits[i]; tm += tlb_misses[i]; th += tlb_hits[i]; end
    $display("mechanisms: md_miss=%0d md_hit=%0d tlb_miss=%0d tlb_hit=%0d ns_pkt=%0d sys_pkt=%0d rsp_pkt=%0d router_stall=%0d",
             mm, mh, tm, th, n_ns_pkt, n_sys_pkt, n_rsp_pkt, n_router_stall);
    $display("mechanisms: create=%0d derive=%0d revoke=%0d refused_op=%0d untagged=%0d bounds=%0d perm=%0d invalid=%0d page=%0d local=%0d remote=%0d",
             n_create, n_derive, n_revoke, n_nsop_refused, n_untagged, n_bounds, n_perm, n_invalid, n_page,
             n_local_load, n_remote_load);
    chk(mm > 0, "metadata miss happened");         chk(mh > 0, "metadata hit happened");
    chk(tm > 0, "N-TLB miss happened");            chk(th > 0, "N-TLB hit happened");
    chk(n_ns_pkt > 0, "Namespace request packets"); chk(n_sys_pkt > 0, "sys request packets");
    chk(n_rsp_pkt == n_ns_pkt + n_sys_pkt, "one response per request");
    chk(n_create == N, "creates");  chk(n_derive == 1, "derives");   chk(n_revoke == 1, "revokes");
    chk(n_nsop_refused > 0, "refused operation"); chk(n_untagged > 0, "untagged fault");
    chk(n_bounds > 0, "bounds fault"); chk(n_perm > 0, "permission fault");
    chk(n_invalid > 0, "invalid fault"); chk(n_page > 0, "page fault");
    chk(n_local_load > 0 && n_remote_load > 0, "local and remote loads");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
