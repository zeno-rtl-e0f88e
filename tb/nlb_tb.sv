// nlb_tb: checks the Zeno MMU with a behavioural memory holding metadata
// records and a page table. Covers: metadata miss -> fetch from the DND,
// N-TLB miss -> page walk, warm hits and their latency, store then load,
// bounds, permission, untagged-ID and revoked-Namespace faults (none of
// which may reach memory), a child Namespace that shares its root's N-TLB
// entries, an unmapped page, and the fault-on-metadata-miss option.
module nlb_tb;
  import zeno_pkg::*;
  localparam int LAT = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, req_ready, req_tag, rsp_valid;
  mreq_t req; mrsp_t rsp;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  mreq_t mem_req; mrsp_t mem_rsp;
  logic inv, flush; logic [63:0] inv_id;
  logic [31:0] md_hits, md_misses, tlb_hits, tlb_misses;

  nlb #(.MD_ENTRIES(16), .MD_WAYS(4), .TLB_ENTRIES(32), .TLB_WAYS(4)) dut (.*);
  dram_model #(.LATENCY(LAT)) mem (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
                                   .req(mem_req), .rsp_valid(mem_rsp_valid), .rsp(mem_rsp));

  // the same MMU built to fault on a metadata miss
  logic f_ready, f_rsp_valid, f_mvalid, f_mready, f_mrsp_valid;
  mrsp_t f_rsp, f_mrsp; mreq_t f_mreq;
  nlb #(.MD_ENTRIES(16), .MD_WAYS(4), .TLB_ENTRIES(32), .TLB_WAYS(4), .MD_MISS_FAULT(1'b1)) dut_f (
    .clk, .rst_n, .req_valid, .req_ready(f_ready), .req, .req_tag, .rsp_valid(f_rsp_valid), .rsp(f_rsp),
    .mem_req_valid(f_mvalid), .mem_req_ready(f_mready), .mem_req(f_mreq),
    .mem_rsp_valid(f_mrsp_valid), .mem_rsp(f_mrsp), .inv, .inv_id, .flush,
    .md_hits(), .md_misses(), .tlb_hits(), .tlb_misses());
  dram_model #(.LATENCY(LAT)) mem_f (.clk, .rst_n, .req_valid(f_mvalid), .req_ready(f_mready),
                                     .req(f_mreq), .rsp_valid(f_mrsp_valid), .rsp(f_mrsp));

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  function automatic void put_md(logic [63:0] id, logic [63:0] mn, logic [63:0] mx, logic [3:0] perm,
                                 logic [43:0] ppn, logic [63:0] root);
    mem.poke(dnd_addr(id, MW_MIN), mn);   mem.poke(dnd_addr(id, MW_MAX), mx);
    mem.poke(dnd_addr(id, MW_PERM), 64'(perm)); mem.poke(dnd_addr(id, MW_PPN), 64'(ppn));
    mem.poke(dnd_addr(id, MW_ROOT), root);
  endfunction

  function automatic logic [63:0] pte(logic [43:0] p, bit leaf);
    return {10'd0, p, 6'd0, leaf ? 4'b0111 : 4'b0001};
  endfunction

  task automatic access(logic [63:0] id, bit tag, logic [63:0] va, acc_t acc, logic [63:0] wd,
                        output mrsp_t r, output int cyc);
    @(negedge clk);
    req = '0; req.nsid = id; req.va = va; req.acc = acc; req.size = 8; req.we = (acc == ACC_STORE);
    req.wdata = wd; req.wstrb = 8'hff; req_tag = tag; req_valid = 1;
    @(posedge clk); #1 req_valid = 0;
    cyc = 1;
    while (!rsp_valid) begin @(posedge clk); #1 cyc++; end
    r = rsp;
  endtask

  localparam logic [63:0] ROOT  = 64'h0000_0000_0000_0001;
  localparam logic [63:0] CHILD = 64'h0000_0000_0000_0002;
  localparam logic [63:0] RO    = 64'h0000_0000_0000_0003;

  initial begin
    mrsp_t r; int cyc, n0;
    req_valid = 0; req = '0; req_tag = 0; inv = 0; inv_id = 0; flush = 0;
    // page table of ROOT: va 0x4000_0000.. -> node 0 pages 0x800.. (4 KiB)
    mem.poke({44'h100, 12'(1 * 8)}, pte(44'h101, 0));
    mem.poke({44'h101, 12'(0 * 8)}, pte(44'h102, 0));
    for (int i = 0; i < 4; i++) mem.poke({44'h102, 12'(i * 8)}, pte(44'h800 + 44'(i), 1));
    put_md(ROOT,  64'h4000_0000, 64'h4000_3fff, 4'b1011, 44'h100, ROOT);   // v, rw
    put_md(CHILD, 64'h4000_1000, 64'h4000_10ff, 4'b1001, 44'h100, ROOT);   // v, r only
    put_md(RO,    64'h4000_0000, 64'h4000_3fff, 4'b1001, 44'h100, ROOT);
    mem.poke({44'h801, 12'h010}, 64'hdead_beef_0000_0001);
    repeat (2) @(posedge clk);
    rst_n = 1;

    n0 = mem.accesses;
    access(ROOT, 1, 64'h4000_1010, ACC_LOAD, 0, r, cyc);
    chk(r.fault == F_NONE && r.rdata == 64'hdead_beef_0000_0001, "cold load data");
    chk(mem.accesses - n0 == 5 + 3 + 1, "cold load: 5 metadata + 3 PTE + 1 data reads");
    chk(md_misses == 1 && tlb_misses == 1, "cold load counted as misses");

    n0 = mem.accesses;
    access(ROOT, 1, 64'h4000_1018, ACC_STORE, 64'h1234_5678, r, cyc);
    chk(r.fault == F_NONE && mem.accesses - n0 == 1, "warm store: one access");
    chk(mem.peek({44'h801, 12'h018}) == 64'h1234_5678, "store reached memory");
    access(ROOT, 1, 64'h4000_1018, ACC_LOAD, 0, r, cyc);
    chk(r.rdata == 64'h1234_5678, "load back");
    chk(cyc == 5 + LAT, $sformatf("warm hit latency %0d", cyc));
    chk(md_hits == 2 && tlb_hits == 2, "warm accesses counted as hits");

    n0 = mem.accesses;
    access(ROOT, 1, 64'h4000_3ffc, ACC_LOAD, 0, r, cyc);
    chk(r.fault == F_BOUNDS, "8-byte load across max");
    access(ROOT, 0, 64'h4000_1010, ACC_LOAD, 0, r, cyc);
    chk(r.fault == F_UNTAGGED, "untagged ID");
    chk(mem.accesses == n0, "refused accesses do not reach memory");

    // child: same root, narrower bounds, read-only; shares the N-TLB entry
    n0 = mem.accesses;
    access(CHILD, 1, 64'h4000_1010, ACC_LOAD, 0, r, cyc);
    chk(r.fault == F_NONE && r.rdata == 64'hdead_beef_0000_0001, "child load");
    chk(mem.accesses - n0 == 5 + 1, "child: metadata fetch, N-TLB hit via shared root");
    access(CHILD, 1, 64'h4000_1100, ACC_LOAD, 0, r, cyc);
    chk(r.fault == F_BOUNDS, "child bounds narrower than parent");
    access(CHILD, 1, 64'h4000_1010, ACC_STORE, 1, r, cyc);
    chk(r.fault == F_PERM, "child has no write");
    access(RO, 1, 64'h4000_2000, ACC_FETCH, 0, r, cyc);
    chk(r.fault == F_PERM, "no execute");

    // unmapped page inside the bounds
    mem.poke({44'h102, 12'(3 * 8)}, 64'h0);
    flush = 1; @(posedge clk); #1 flush = 0;
    access(ROOT, 1, 64'h4000_3008, ACC_LOAD, 0, r, cyc);
    chk(r.fault == F_PAGE, "unmapped page");

    // revoke ROOT: clear valid in the DND, drop it from the cache
    mem.poke(dnd_addr(ROOT, MW_PERM), 64'b0011);
    @(negedge clk); inv = 1; inv_id = ROOT; @(posedge clk); #1 inv = 0;
    access(ROOT, 1, 64'h4000_1010, ACC_LOAD, 0, r, cyc);
    chk(r.fault == F_INVALID, "revoked Namespace faults");

    // fault-on-miss variant: its own (cold) metadata cache
    @(negedge clk);
    req = '0; req.nsid = RO; req.va = 64'h4000_1010; req.acc = ACC_LOAD; req.size = 8; req_tag = 1; req_valid = 1;
    @(posedge clk); #1 req_valid = 0;
    while (!f_rsp_valid) @(posedge clk);
    chk(f_rsp.fault == F_MD_MISS && mem_f.accesses == 0, "fault-on-miss mode");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
