// zeno_node_tb: one Zeno node (node 0) with a behavioural memory; the test
// plays the rest of the network by hand. It runs the Namespace life cycle
// through the node's core-side ports: an access through the default
// Namespace (ID 0), NS_CREATE with the new tagged ID landing in an extended
// register and its record in the directory, accesses through it (metadata
// miss and page walk, then the warm-path latency), NS_DERIVE of a narrower
// read-only child, its bounds and permission faults, a refused widening
// derive, a forged (untagged) ID, NS_REVOKE of the parent that also kills
// the child, and both directions of remote traffic: a load whose page lives
// on node 1 leaves as a Namespace request packet, and a request packet from
// node 1 is checked and served by this node's network interface.
module zeno_node_tb;
  import zeno_pkg::*;
  localparam int LAT = 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [4:0]  core_extd_sel, core_ext1_sel, core_ext2_sel, core_ext_waddr, nsop_rd;
  logic [63:0] core_extd_data, core_ext1_data, core_ext2_data, core_ext_wdata;
  logic        core_ext_we, core_mem_valid, core_mem_ready, core_rsp_valid;
  logic [1:0]  core_mem_nsid_src;
  logic [63:0] core_mem_va, core_mem_wdata, core_rsp_rdata;
  acc_t        core_mem_acc;
  logic [3:0]  core_mem_size;
  logic [7:0]  core_mem_wstrb;
  fault_t      core_ns_fault, nsop_fault;
  logic        nsop_valid, nsop_ready, nsop_done, mmu_flush;
  nsop_t       nsop;
  logic [63:0] nsop_min, nsop_max, nsop_id;
  logic [2:0]  nsop_perm;
  logic [43:0] nsop_pt_ppn;
  logic [31:0] md_hits, md_misses, tlb_hits, tlb_misses;
  logic        dram_req_valid, dram_req_ready, dram_rsp_valid;
  mreq_t       dram_req;
  mrsp_t       dram_rsp;
  logic [2:0]  inj_valid, inj_ready, ej_valid, ej_ready;
  pkt_t        inj_pkt [3], ej_pkt [3];

  zeno_node #(.NODE_ID(0), .MD_ENTRIES(16), .MD_WAYS(4), .TLB_ENTRIES(32), .TLB_WAYS(4),
              .REVOKE_QDEPTH(4)) dut (.*);
  dram_model #(.LATENCY(LAT)) mem (.clk, .rst_n, .req_valid(dram_req_valid), .req_ready(dram_req_ready),
                                   .req(dram_req), .rsp_valid(dram_rsp_valid), .rsp(dram_rsp));

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  function automatic logic [63:0] pte(logic [43:0] p, bit leaf);
    return {10'd0, p, 6'd0, leaf ? 4'b0111 : 4'b0001};
  endfunction

  task automatic access(logic [1:0] src, logic [4:0] reg1, logic [63:0] va, acc_t acc, logic [63:0] wd,
                        output fault_t f, output logic [63:0] rd, output int cyc);
    @(negedge clk);
    core_mem_nsid_src = src; core_ext1_sel = reg1; core_mem_va = va; core_mem_acc = acc;
    core_mem_size = 8; core_mem_wdata = wd; core_mem_wstrb = 8'hff; core_mem_valid = 1;
    do @(posedge clk); while (!core_mem_ready);
    #1 core_mem_valid = 0;
    cyc = 1;
    while (!core_rsp_valid) begin @(posedge clk); #1 cyc++; end
    f = core_ns_fault; rd = core_rsp_rdata;
  endtask

  task automatic ns_op(nsop_t o, logic [4:0] opnd, logic [63:0] mn, logic [63:0] mx, logic [2:0] p,
                       logic [43:0] ppn, logic [4:0] rd, output fault_t f, output logic [63:0] id);
    @(negedge clk);
    nsop = o; core_ext1_sel = opnd; nsop_min = mn; nsop_max = mx; nsop_perm = p; nsop_pt_ppn = ppn;
    nsop_rd = rd; nsop_valid = 1;
    do @(posedge clk); while (!nsop_ready);
    #1 nsop_valid = 0;
    while (!nsop_done) begin @(posedge clk); #1; end
    f = nsop_fault; id = nsop_id;
    @(posedge clk);   // the new ID is written into its register at this edge
  endtask

  localparam logic [63:0] BASE = 64'h4000_0000;

  initial begin
    fault_t f; logic [63:0] rd, id_p, id_c; int cyc, mm0, tm0;
    core_extd_sel = 0; core_ext1_sel = 0; core_ext2_sel = 0; core_ext_waddr = 0; core_ext_wdata = 0;
    core_ext_we = 0; core_mem_valid = 0; core_mem_nsid_src = 0; core_mem_va = 0; core_mem_acc = ACC_LOAD;
    core_mem_size = 8; core_mem_wdata = 0; core_mem_wstrb = 0; nsop_valid = 0; nsop = NS_CREATE;
    nsop_min = 0; nsop_max = 0; nsop_perm = 0; nsop_pt_ppn = 0; nsop_rd = 0; mmu_flush = 0;
    inj_ready = 3'b111; ej_valid = 0; ej_pkt[0] = '0; ej_pkt[1] = '0; ej_pkt[2] = '0;
    // page table at ppn 0x100: pages 0..2 local (ppn 0x800+i), page 3 on node 1
    mem.poke({44'h100, 12'(1 * 8)}, pte(44'h101, 0));
    mem.poke({44'h101, 12'(0)}, pte(44'h102, 0));
    for (int i = 0; i < 3; i++) mem.poke({44'h102, 12'(i * 8)}, pte(44'h800 + 44'(i), 1));
    mem.poke({44'h102, 12'(3 * 8)}, pte({8'd1, 36'h800}, 1));
    // default Namespace 0, set up by firmware
    mem.poke(dnd_addr(0, MW_MIN), BASE); mem.poke(dnd_addr(0, MW_MAX), BASE + 64'h3fff);
    mem.poke(dnd_addr(0, MW_PERM), 64'b1111); mem.poke(dnd_addr(0, MW_PPN), 64'h100);
    repeat (2) @(posedge clk);
    rst_n = 1;

    access(0, 0, BASE + 64'h1008, ACC_STORE, 64'hcafe_0001, f, rd, cyc);
    chk(f == F_NONE && mem.peek({44'h801, 12'h008}) == 64'hcafe_0001, "store through default Namespace");

    ns_op(NS_CREATE, 0, BASE, BASE + 64'h2fff, 3'b011, 44'h100, 5'd5, f, id_p);
    chk(f == F_NONE && id_p == 64'd1, "NS_CREATE returns {node 0, seq 1}");
    @(negedge clk); core_extd_sel = 5;
    #1 chk(core_extd_data == id_p, $sformatf("new ID in ext register 5: %h vs %h", core_extd_data, id_p));
    chk(mem.peek(dnd_addr(id_p, MW_MAX)) == BASE + 64'h2fff && mem.peek(dnd_addr(id_p, MW_PERM)) == 64'b1011 &&
        mem.peek(dnd_addr(id_p, MW_ROOT)) == id_p, "directory record written");

    mm0 = md_misses; tm0 = tlb_misses;
    access(1, 5, BASE + 64'h1008, ACC_LOAD, 0, f, rd, cyc);
    chk(f == F_NONE && rd == 64'hcafe_0001, "load through created Namespace");
    chk(md_misses == mm0 + 1 && tlb_misses == tm0 + 1, "metadata miss and N-TLB miss on first use");
    access(1, 5, BASE + 64'h1010, ACC_LOAD, 0, f, rd, cyc);
    chk(f == F_NONE && cyc == 7 + LAT, $sformatf("warm local access latency %0d", cyc));

    ns_op(NS_DERIVE, 5, BASE + 64'h1000, BASE + 64'h1fff, 3'b001, 0, 5'd6, f, id_c);
    chk(f == F_NONE && id_c == 64'd2, "NS_DERIVE child");
    chk(mem.peek(dnd_addr(id_p, MW_NCHILD)) == 1 && mem.peek(dnd_addr(id_p, 8)) == id_c, "child linked to parent");
    access(1, 6, BASE + 64'h1008, ACC_LOAD, 0, f, rd, cyc);
    chk(f == F_NONE && rd == 64'hcafe_0001, $sformatf("child load inside its bounds %s %h", f.name(), rd));
    access(1, 6, BASE + 64'h2008, ACC_LOAD, 0, f, rd, cyc);
    chk(f == F_BOUNDS, "child bounds fault");
    access(1, 6, BASE + 64'h1008, ACC_STORE, 64'hbad, f, rd, cyc);
    chk(f == F_PERM && mem.peek({44'h801, 12'h008}) == 64'hcafe_0001, "child permission fault");
    ns_op(NS_DERIVE, 6, BASE, BASE + 64'h3fff, 3'b001, 0, 5'd8, f, rd);
    chk(f == F_NS_OP, "derive that widens bounds refused");

    // forged: the core writes the child's ID value into register 7
    @(negedge clk); core_ext_we = 1; core_ext_waddr = 7; core_ext_wdata = id_c; @(negedge clk); core_ext_we = 0;
    access(1, 7, BASE + 64'h1008, ACC_LOAD, 0, f, rd, cyc);
    chk(f == F_UNTAGGED, "forged ID refused by the MMU");
    ns_op(NS_REVOKE, 7, 0, 0, 0, 0, 0, f, rd);
    chk(f == F_UNTAGGED, "forged ID refused by NS_REVOKE");

    // remote serving: node 1 sends a Namespace load for the parent
    @(negedge clk);
    ej_pkt[0] = '0; ej_pkt[0].kind = PK_NSREQ; ej_pkt[0].src = 1; ej_pkt[0].dst = 0; ej_pkt[0].chan = 0;
    ej_pkt[0].req.nsid = id_p; ej_pkt[0].req.va = BASE + 64'h1008; ej_pkt[0].req.acc = ACC_LOAD;
    ej_pkt[0].req.size = 8; ej_valid[0] = 1;
    do @(posedge clk); while (!ej_ready[0]);
    #1 ej_valid[0] = 0;
    while (!inj_valid[2]) begin @(posedge clk); #1; end
    chk(inj_pkt[2].dst == 1 && inj_pkt[2].rsp.fault == F_NONE && inj_pkt[2].rsp.rdata == 64'hcafe_0001,
        "request from node 1 served");
    @(negedge clk);
    ej_pkt[0].req.va = BASE + 64'h3000; ej_valid[0] = 1;
    do @(posedge clk); while (!ej_ready[0]);
    #1 ej_valid[0] = 0;
    while (!inj_valid[2]) begin @(posedge clk); #1; end
    chk(inj_pkt[2].rsp.fault == F_BOUNDS, "request from node 1 checked against bounds");

    // remote client: page 3 of the default Namespace is on node 1
    fork
      access(0, 0, BASE + 64'h3010, ACC_LOAD, 0, f, rd, cyc);
      begin
        while (!inj_valid[0]) begin @(posedge clk); #1; end
        chk(inj_pkt[0].dst == 1 && inj_pkt[0].kind == PK_NSREQ && inj_pkt[0].req.nsid == 0 &&
            inj_pkt[0].req.va == BASE + 64'h3010, "remote load sent as a Namespace request");
        @(posedge clk);   // the packet leaves at this edge; answer a cycle later
        @(negedge clk);
        ej_pkt[2] = '0; ej_pkt[2].kind = PK_RSP; ej_pkt[2].src = 1; ej_pkt[2].dst = 0;
        ej_pkt[2].chan = inj_pkt[0].chan; ej_pkt[2].rsp.rdata = 64'h7777; ej_valid[2] = 1;
        @(negedge clk); ej_valid[2] = 0;
      end
    join
    chk(f == F_NONE && rd == 64'h7777, "remote load answered");

    ns_op(NS_REVOKE, 5, 0, 0, 0, 0, 0, f, rd);
    chk(f == F_NONE, "NS_REVOKE");
    chk(mem.peek(dnd_addr(id_p, MW_PERM))[3] == 0 && mem.peek(dnd_addr(id_c, MW_PERM))[3] == 0,
        "parent and child invalid in the directory");
    access(1, 5, BASE + 64'h1008, ACC_LOAD, 0, f, rd, cyc);
    chk(f == F_INVALID, "revoked parent refused");
    access(1, 6, BASE + 64'h1008, ACC_LOAD, 0, f, rd, cyc);
    chk(f == F_INVALID, "child of revoked parent refused");
    ns_op(NS_REVOKE, 5, 0, 0, 0, 0, 0, f, rd);
    chk(f == F_INVALID, "second revoke refused");
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
