// zeno_integer_sort_tb: the bucket step of the Integer Sort workload on the
// four-node Zeno system at its default size (2x2 mesh, 128-entry 8-way
// Metadata Caches, 1024-entry 8-way N-TLBs), memory latency 100 cycles.
//
// The workload sorts 64k 4-byte integers with a bucket sort, one Namespace
// per bucket. Here the 65536 keys start evenly split over the four nodes,
// each node's share in a 64 KiB key Namespace in its own memory (extended
// register 0). Every node creates 31 bucket Namespaces (registers 1..31, one
// 4 KiB page each, bucket b of a node placed on node b mod 4, so 124 buckets
// in all), then loads each of its keys through the key Namespace and stores
// it into the bucket that covers its value range (value * 31 / 2**32), all
// as 4-byte accesses. Three bucket stores in four cross the mesh and are
// checked again by the owner's network interface. The sort inside each
// bucket is ordinary computation and is not part of this test; nor is
// collecting the buckets on one node, since IDs cannot move between nodes
// in this design (memory tags are not modelled).
//
// Checks: every load returns the key that was placed there; afterwards the
// bucket pages are read straight from the memories and must hold exactly
// the keys of their range, in the order the node met them; each node's
// Metadata Cache misses once per Namespace (32) and its N-TLB once per page
// (16 + 31), the memory latency being the paper's DRAM figure.
module zeno_integer_sort_tb;
  import zeno_pkg::*;
  localparam int N       = 4;
  localparam int LAT     = 100;
  localparam int KEYS    = 65536 / N;   // keys per node
  localparam int KPAGES  = KEYS * 4 / 4096;
  localparam int BUCKETS = 31;
  localparam int BCAP    = 1024;        // keys per bucket page
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



  // virtual pages 0..KPAGES-1: keys (local); KPAGES + b: bucket b on node b mod 4
  function automatic logic [43:0] key_ppn(int n, int p);
    return {8'(n), 36'h4000 + 36'(p)};
  endfunction
  function automatic logic [43:0] bkt_ppn(int n, int b);
    return {8'(b % N), 36'h5000 + 36'(64 * n + b)};
  endfunction

  logic [31:0] keys [N][KEYS];
  int n_local [N], n_remote [N];
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

  task automatic create(int n, logic [63:0] mn, logic [63:0] mx, logic [4:0] rd, output fault_t f,
                        output logic [63:0] id);
    @(negedge clk);
    nsop[n] = NS_CREATE; core_ext1_sel[n] = 0; nsop_min[n] = mn; nsop_max[n] = mx;
    nsop_perm[n] = 3'b011; nsop_pt_ppn[n] = {8'(n), 36'h100}; nsop_rd[n] = rd; nsop_valid[n] = 1;
    do @(posedge clk); while (!nsop_ready[n]);
    #1 nsop_valid[n] = 0;
    while (!nsop_done[n]) begin @(posedge clk); #1; end
    f = nsop_fault[n]; id = nsop_id[n];
    @(posedge clk);
  endtask

  function automatic int bucket_of(logic [31:0] k);
    return int'((64'(k) * BUCKETS) >> 32);
  endfunction

  task automatic node_run(int n);
    fault_t f; logic [63:0] rd, id;
    int cnt [BUCKETS];
    int errs, bad_bkt;
    create(n, BASE, BASE + 64'(KPAGES * 4096 - 1), 5'd0, f, id);
    chk(f == F_NONE, $sformatf("node %0d key Namespace", n));
    for (int b = 0; b < BUCKETS; b++) begin
      create(n, BASE + 64'((KPAGES + b) * 4096), BASE + 64'((KPAGES + b + 1) * 4096 - 1), 5'(b + 1), f, id);
      chk(f == F_NONE && id == {8'(n), 40'd0, 16'(b + 2)}, $sformatf("node %0d bucket %0d id %h", n, b, id));
      cnt[b] = 0;
    end
    errs = 0;
    for (int i = 0; i < KEYS; i++) begin
      logic [31:0] k;
      int b;
      access(n, 5'd0, BASE + 64'(i * 4), ACC_LOAD, 0, 8'h00, f, rd);
      k = (i % 2) ? rd[63:32] : rd[31:0];
      if (f != F_NONE || k != keys[n][i]) begin
        errs++; if (errs < 5) $display("node %0d key %0d: fault %0d got %h exp %h", n, i, f, k, keys[n][i]);
      end
      n_local[n]++;
      b = bucket_of(k);
      if (cnt[b] >= BCAP) begin errs++; continue; end
      access(n, 5'(b + 1), BASE + 64'((KPAGES + b) * 4096 + cnt[b] * 4), ACC_STORE,
             {k, k}, (cnt[b] % 2) ? 8'hf0 : 8'h0f, f, rd);
      if (f != F_NONE) begin errs++; if (errs < 5) $display("node %0d bucket store fault %0d", n, f); end
      if ((b % N) == n) n_local[n]++; else n_remote[n]++;
      cnt[b]++;
    end
    chk(errs == 0, $sformatf("node %0d: %0d wrong accesses", n, errs));
    // independent check of the buckets, straight from memory
    begin
      int pos [BUCKETS];
      bad_bkt = 0;
      foreach (pos[b]) pos[b] = 0;
      for (int i = 0; i < KEYS; i++) begin
        int b;
        logic [63:0] w;
        logic [31:0] got;
        b = bucket_of(keys[n][i]);
        w = peek(b % N, {bkt_ppn(n, b), 12'(pos[b] / 2 * 8)});
        got = (pos[b] % 2) ? w[63:32] : w[31:0];
        if (got != keys[n][i]) bad_bkt++;
        pos[b]++;
      end
      for (int b = 0; b < BUCKETS; b++) if (pos[b] != cnt[b]) bad_bkt++;
    end
    chk(bad_bkt == 0, $sformatf("node %0d: %0d misplaced keys", n, bad_bkt));
    $display("node %0d: md miss/hit %0d/%0d, tlb miss/hit %0d/%0d, local %0d remote %0d",
             n, md_misses[n], md_hits[n], tlb_misses[n], tlb_hits[n], n_local[n], n_remote[n]);
    chk(md_misses[n] == 32'(BUCKETS + 1), $sformatf("node %0d metadata misses %0d", n, md_misses[n]));
    chk(tlb_misses[n] == 32'(KPAGES + BUCKETS), $sformatf("node %0d N-TLB misses %0d", n, tlb_misses[n]));
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin
      core_extd_sel[i] = 0; core_ext1_sel[i] = 0; core_ext2_sel[i] = 0; core_ext_waddr[i] = 0;
      core_ext_wdata[i] = 0; nsop_rd[i] = 0; core_mem_nsid_src[i] = 0; core_mem_va[i] = 0;
      core_mem_acc[i] = ACC_LOAD; core_mem_size[i] = 4; core_mem_wdata[i] = 0; core_mem_wstrb[i] = 0;
      nsop[i] = NS_CREATE; nsop_min[i] = 0; nsop_max[i] = 0; nsop_perm[i] = 0; nsop_pt_ppn[i] = 0;
      n_local[i] = 0; n_remote[i] = 0;
    end
    core_ext_we = 0; core_mem_valid = 0; nsop_valid = 0; mmu_flush = 0;
    for (int n = 0; n < N; n++) begin
      logic [43:0] rt;
      rt = {8'(n), 36'h100};
      poke(n, {rt, 12'(1 * 8)}, pte(rt + 1, 0));
      poke(n, {rt + 44'd1, 12'(0)}, pte(rt + 2, 0));
      for (int p = 0; p < KPAGES; p++) poke(n, {rt + 44'd2, 12'(p * 8)}, pte(key_ppn(n, p), 1));
      for (int b = 0; b < BUCKETS; b++) poke(n, {rt + 44'd2, 12'((KPAGES + b) * 8)}, pte(bkt_ppn(n, b), 1));
      for (int i = 0; i < KEYS; i++) keys[n][i] = $urandom;
      for (int i = 0; i < KEYS; i += 2)
        poke(n, {key_ppn(n, i * 4 / 4096), 12'((i * 4) % 4096)}, {keys[n][i + 1], keys[n][i]});
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
      int loc, rem;
      loc = 0; rem = 0;
      for (int i = 0; i < N; i++) begin loc += n_local[i]; rem += n_remote[i]; end
      $display("mechanisms: local=%0d remote=%0d ns_pkt=%0d sys_pkt=%0d rsp_pkt=%0d",
               loc, rem, n_ns_pkt, n_sys_pkt, n_rsp_pkt);
      chk(loc > 0 && rem > 0, "local and remote accesses");
      chk(n_ns_pkt == rem, "one Namespace request per remote bucket store");
      chk(n_sys_pkt > 0, "remote metadata and page-table reads");
      chk(n_rsp_pkt == n_ns_pkt + n_sys_pkt, "one response per request");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
