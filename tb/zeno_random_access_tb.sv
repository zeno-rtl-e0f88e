// zeno_random_access_tb: the Random Memory Access workload on the four-node
// Zeno system at its default size (2x2 mesh, 128-entry 8-way Metadata
// Caches, 1024-entry 8-way N-TLBs), memory latency 100 cycles.
//
// The workload accesses 4-byte items at random in an array of 128
// Namespaces of 32 KiB each, spread evenly over the system. Here every node
// creates 32 of the 128 Namespaces (one per extended register; IDs cannot be
// kept in memory since memory tags are not modelled) and then makes random
// 4-byte loads and stores to its own 32 Namespaces. The 8 pages of each
// Namespace are spread over all four nodes (global page g of node n lives on
// node g mod 4), so three accesses in four are remote and are checked again
// by the owning node's network interface, whose MMU then has to hold the
// metadata of all 128 Namespaces. One access in sixteen deliberately uses a
// neighbouring Namespace's address with the wrong ID and must end in a
// bounds fault without touching memory.
//
// Set-up (what firmware would do): one Sv39 page table per node at its page
// 0x100 mapping 256 virtual pages from 0x4000_0000; all data words filled
// with a known pattern. A shadow copy of the data gives the expected value
// of every load. At the end each node's Metadata-Cache misses must equal
// the number of Namespaces it touched (first touch only: the cache holds all
// of them) and its N-TLB misses must lie between the number of pages it
// touched and its number of in-bounds accesses.
module zeno_random_access_tb;
  import zeno_pkg::*;
  localparam int N      = 4;
  localparam int LAT    = 100;
  localparam int NS_PER = 32;          // Namespaces per node: 4 x 32 = 128
  localparam int PAGES  = 8;           // 32 KiB per Namespace
  localparam int WORDS  = 512;
  localparam int ACCESSES = 1024;      // random accesses per node
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

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  function automatic logic [63:0] pte(logic [43:0] p, bit leaf);
    return {10'd0, p, 6'd0, leaf ? 4'b0111 : 4'b0001};
  endfunction

  // global page g (0..255) of node n's Namespaces lives on node g mod 4
  function automatic logic [43:0] data_ppn(int n, int g);
    return {8'(g % N), 36'h4000 + 36'(256 * n + g)};
  endfunction

  function automatic logic [63:0] pattern(int n, int g, int w);
    return {8'hc0, 8'(n), 16'(g), 32'(w * 13 + 5)};
  endfunction

  logic [63:0] shadow [N][NS_PER*PAGES][WORDS];

  // ---------------- mechanism counters ----------------
  int n_local [N], n_remote [N], n_bounds [N], n_loads [N], n_stores [N];
  int n_ns_pkt, n_sys_pkt, n_rsp_pkt;
  always @(posedge clk) if (rst_n)
    for (int i = 0; i < N; i++) begin
      if (dut.n_inj_valid[i][0] && dut.n_inj_ready[i][0]) n_ns_pkt++;
      if (dut.n_inj_valid[i][1] && dut.n_inj_ready[i][1]) n_sys_pkt++;
      if (dut.n_inj_valid[i][2] && dut.n_inj_ready[i][2]) n_rsp_pkt++;
    end

  task automatic access(int n, logic [4:0] r1, logic [63:0] va, acc_t acc, logic [63:0] wd,
                        logic [7:0] strb, output fault_t f, output logic [63:0] rd);
    @(negedge clk);
    core_mem_nsid_src[n] = 2'd1; core_ext1_sel[n] = r1; core_mem_va[n] = va; core_mem_acc[n] = acc;
    core_mem_size[n] = 4; core_mem_wdata[n] = wd; core_mem_wstrb[n] = strb; core_mem_valid[n] = 1;
    do @(posedge clk); while (!core_mem_ready[n]);
    #1 core_mem_valid[n] = 0;
    while (!core_rsp_valid[n]) begin @(posedge clk); #1; end
    f = core_ns_fault[n]; rd = core_rsp_rdata[n];
  endtask

  task automatic create(int n, int k, output fault_t f, output logic [63:0] id);
    @(negedge clk);
    nsop[n] = NS_CREATE; core_ext1_sel[n] = 0;
    nsop_min[n] = BASE + 64'(k * PAGES * 4096); nsop_max[n] = BASE + 64'((k + 1) * PAGES * 4096 - 1);
    nsop_perm[n] = 3'b011; nsop_pt_ppn[n] = {8'(n), 36'h100}; nsop_rd[n] = 5'(k); nsop_valid[n] = 1;
    do @(posedge clk); while (!nsop_ready[n]);
    #1 nsop_valid[n] = 0;
    while (!nsop_done[n]) begin @(posedge clk); #1; end
    f = nsop_fault[n]; id = nsop_id[n];
    @(posedge clk);
  endtask

  task automatic node_run(int n);
    fault_t f; logic [63:0] rd, id;
    bit touched_ns [NS_PER];
    bit touched_pg [NS_PER*PAGES];
    int n_ns, n_pg, errs, inb;
    for (int k = 0; k < NS_PER; k++) begin
      create(n, k, f, id);
      chk(f == F_NONE && id == {8'(n), 40'd0, 16'(k + 1)}, $sformatf("node %0d NS_CREATE %0d id %h", n, k, id));
    end
    foreach (touched_ns[k]) touched_ns[k] = 0;
    foreach (touched_pg[g]) touched_pg[g] = 0;
    errs = 0; inb = 0;
    for (int a = 0; a < ACCESSES; a++) begin
      int k, g, w, half;
      logic [63:0] va, wd, exp;
      logic [7:0] strb;
      bit st, wrong;
      k = int'($urandom % NS_PER);
      g = k * PAGES + int'($urandom % PAGES);
      w = int'($urandom % WORDS);
      half = int'($urandom % 2);
      st = ($urandom % 4) == 0;
      wrong = ($urandom % 16) == 0;
      va = BASE + 64'(g * 4096 + w * 8 + half * 4);
      strb = half ? 8'hf0 : 8'h0f;
      wd = {$urandom, $urandom};
      if (wrong) begin
        // the right address, the ID of the next Namespace over
        access(n, 5'((k + 1) % NS_PER), va, st ? ACC_STORE : ACC_LOAD, wd, strb, f, rd);
        if (f != F_BOUNDS) begin errs++; $display("node %0d: wrong-ID access gave fault %0d", n, f); end
        else n_bounds[n]++;
        continue;
      end
      inb++;
      touched_ns[k] = 1; touched_pg[g] = 1;
      if ((g % N) == n) n_local[n]++; else n_remote[n]++;
      if (st) begin
        access(n, 5'(k), va, ACC_STORE, wd, strb, f, rd);
        for (int b = 0; b < 8; b++) if (strb[b]) shadow[n][g][w][8*b +: 8] = wd[8*b +: 8];
        if (f != F_NONE) begin errs++; $display("node %0d: store fault %0d", n, f); end
        n_stores[n]++;
      end else begin
        access(n, 5'(k), va, ACC_LOAD, 0, 8'h00, f, rd);
        exp = shadow[n][g][w];
        if (f != F_NONE || rd != exp) begin
          errs++; $display("node %0d: load va %h fault %0d got %h exp %h", n, va, f, rd, exp);
        end
        n_loads[n]++;
      end
    end
    chk(errs == 0, $sformatf("node %0d: %0d wrong accesses", n, errs));
    n_ns = 0; n_pg = 0;
    foreach (touched_ns[k]) n_ns += int'(touched_ns[k]);
    foreach (touched_pg[g]) n_pg += int'(touched_pg[g]);
    $display("node %0d: Namespaces touched %0d, pages %0d, md miss/hit %0d/%0d, tlb miss/hit %0d/%0d, local %0d remote %0d",
             n, n_ns, n_pg, md_misses[n], md_hits[n], tlb_misses[n], tlb_hits[n], n_local[n], n_remote[n]);
    chk(int'(md_misses[n]) == n_ns, $sformatf("node %0d metadata misses %0d, Namespaces touched %0d", n, md_misses[n], n_ns));
    chk(int'(tlb_misses[n]) >= n_pg && int'(tlb_misses[n]) <= inb,
        $sformatf("node %0d N-TLB misses %0d against %0d pages, %0d accesses", n, tlb_misses[n], n_pg, inb));
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin
      core_extd_sel[i] = 0; core_ext1_sel[i] = 0; core_ext2_sel[i] = 0; core_ext_waddr[i] = 0;
      core_ext_wdata[i] = 0; nsop_rd[i] = 0; core_mem_nsid_src[i] = 0; core_mem_va[i] = 0;
      core_mem_acc[i] = ACC_LOAD; core_mem_size[i] = 4; core_mem_wdata[i] = 0; core_mem_wstrb[i] = 0;
      nsop[i] = NS_CREATE; nsop_min[i] = 0; nsop_max[i] = 0; nsop_perm[i] = 0; nsop_pt_ppn[i] = 0;
      n_local[i] = 0; n_remote[i] = 0; n_bounds[i] = 0; n_loads[i] = 0; n_stores[i] = 0;
    end
    core_ext_we = 0; core_mem_valid = 0; nsop_valid = 0; mmu_flush = 0;
    // page tables: root 0x100 -> 0x101 -> 0x102, 256 leaves from VPN 0
    for (int n = 0; n < N; n++) begin
      logic [43:0] rt;
      rt = {8'(n), 36'h100};
      poke(n, {rt, 12'(1 * 8)}, pte(rt + 1, 0));
      poke(n, {rt + 44'd1, 12'(0)}, pte(rt + 2, 0));
      for (int g = 0; g < NS_PER * PAGES; g++) begin
        poke(n, {rt + 44'd2, 12'(g * 8)}, pte(data_ppn(n, g), 1));
        for (int w = 0; w < WORDS; w++) begin
          shadow[n][g][w] = pattern(n, g, w);
          poke(g % N, {data_ppn(n, g), 12'(w * 8)}, pattern(n, g, w));
        end
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    fork
      node_run(0);
      node_run(1);
      node_run(2);
      node_run(3);
    join

    begin
      int loc, rem, bnd, ld, st;
      loc = 0; rem = 0; bnd = 0; ld = 0; st = 0;
      for (int i = 0; i < N; i++) begin
        loc += n_local[i]; rem += n_remote[i]; bnd += n_bounds[i]; ld += n_loads[i]; st += n_stores[i];
      end
      $display("mechanisms: loads=%0d stores=%0d local=%0d remote=%0d bounds=%0d ns_pkt=%0d sys_pkt=%0d rsp_pkt=%0d",
               ld, st, loc, rem, bnd, n_ns_pkt, n_sys_pkt, n_rsp_pkt);
      chk(loc > 0 && rem > 0, "local and remote accesses");
      chk(ld > 0 && st > 0, "loads and stores");
      chk(bnd > 0, "wrong-ID accesses refused");
      chk(n_ns_pkt >= rem, "one Namespace request per remote access");
      chk(n_sys_pkt > 0, "remote metadata and page-table reads");
      chk(n_rsp_pkt == n_ns_pkt + n_sys_pkt, "one response per request");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
