// network_interface_tb: two network interfaces, nodes 0 and 1, joined back
// to back on all three networks, each with its own behavioural memory
// behind a memory arbiter. Node 0's client channel sends requests that
// node 1 serves. Checks: a remote Namespace load and store, served only
// after node 1's own metadata and page-table checks (bounds and permission
// faults come back and leave memory untouched); a plain physical (sys)
// read; a Namespace whose metadata lives on node 0 so that node 1's MMU
// must fetch it back over the network on its second channel; a Namespace
// whose page table points at memory that is not node 1's (refused with a
// network fault); and a revoked Namespace after a metadata-cache
// invalidation.
module network_interface_tb;
  import zeno_pkg::*;
  localparam int LAT = 2;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        c_req_valid [2], c_req_ready [2], c_rsp_valid [2];
  mreq_t       c_req [2];
  mrsp_t       c_rsp [2];
  logic [2:0]  inj_valid [2], inj_ready [2], ej_valid [2], ej_ready [2];
  pkt_t        inj_pkt [2][3], ej_pkt [2][3];
  logic [1:0]  a_req_valid [2], a_req_ready [2], a_rsp_valid [2];
  mreq_t       a_req [2][2];
  mrsp_t       a_rsp [2][2];
  logic        d_req_valid [2], d_req_ready [2], d_rsp_valid [2];
  mreq_t       d_req [2];
  mrsp_t       d_rsp [2];
  logic        inv [2];
  logic [63:0] inv_id [2];

  for (genvar i = 0; i < 2; i++) begin : g_n
    network_interface #(.NODE_ID(i), .MD_ENTRIES(16), .MD_WAYS(4), .TLB_ENTRIES(32), .TLB_WAYS(4)) u_ni (
      .clk, .rst_n,
      .c_req_valid(c_req_valid[i]), .c_req_ready(c_req_ready[i]), .c_req(c_req[i]),
      .c_rsp_valid(c_rsp_valid[i]), .c_rsp(c_rsp[i]),
      .inj_valid(inj_valid[i]), .inj_ready(inj_ready[i]), .inj_pkt(inj_pkt[i]),
      .ej_valid(ej_valid[i]), .ej_ready(ej_ready[i]), .ej_pkt(ej_pkt[i]),
      .mn_req_valid(a_req_valid[i][0]), .mn_req_ready(a_req_ready[i][0]), .mn_req(a_req[i][0]),
      .mn_rsp_valid(a_rsp_valid[i][0]), .mn_rsp(a_rsp[i][0]),
      .ms_req_valid(a_req_valid[i][1]), .ms_req_ready(a_req_ready[i][1]), .ms_req(a_req[i][1]),
      .ms_rsp_valid(a_rsp_valid[i][1]), .ms_rsp(a_rsp[i][1]),
      .inv(inv[i]), .inv_id(inv_id[i]), .flush(1'b0));
    mem_arbiter #(.N(2)) u_arb (
      .clk, .rst_n, .m_req_valid(a_req_valid[i]), .m_req_ready(a_req_ready[i]), .m_req(a_req[i]),
      .m_rsp_valid(a_rsp_valid[i]), .m_rsp(a_rsp[i]),
      .s_req_valid(d_req_valid[i]), .s_req_ready(d_req_ready[i]), .s_req(d_req[i]),
      .s_rsp_valid(d_rsp_valid[i]), .s_rsp(d_rsp[i]));
    dram_model #(.LATENCY(LAT)) u_mem (
      .clk, .rst_n, .req_valid(d_req_valid[i]), .req_ready(d_req_ready[i]), .req(d_req[i]),
      .rsp_valid(d_rsp_valid[i]), .rsp(d_rsp[i]));
    // back-to-back links: what node i injects, node 1-i ejects
    assign ej_valid[i]  = inj_valid[1-i];
    assign ej_pkt[i]    = inj_pkt[1-i];
    assign inj_ready[i] = ej_ready[1-i];
  end

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  function automatic logic [43:0] ppn_of(int node, logic [35:0] p);
    return {8'(node), p};
  endfunction

  function automatic logic [63:0] pte(logic [43:0] p, bit leaf);
    return {10'd0, p, 6'd0, leaf ? 4'b0111 : 4'b0001};
  endfunction

  function automatic void poke(int node, logic [PA_W-1:0] pa, logic [63:0] d);
    if (node == 0) g_n[0].u_mem.poke(pa, d); else g_n[1].u_mem.poke(pa, d);
  endfunction

  function automatic logic [63:0] peek(int node, logic [PA_W-1:0] pa);
    return (node == 0) ? g_n[0].u_mem.peek(pa) : g_n[1].u_mem.peek(pa);
  endfunction

  function automatic void put_md(logic [63:0] id, logic [63:0] mn, logic [63:0] mx, logic [3:0] perm,
                                 logic [43:0] ppn);
    int h = int'(nsid_node(id));
    poke(h, dnd_addr(id, MW_MIN), mn);   poke(h, dnd_addr(id, MW_MAX), mx);
    poke(h, dnd_addr(id, MW_PERM), 64'(perm)); poke(h, dnd_addr(id, MW_PPN), 64'(ppn));
    poke(h, dnd_addr(id, MW_ROOT), id);
  endfunction

  // page table at root ppn rt on node tn: va 0x4000_0000 + i*4K -> data ppn dp+i
  function automatic void put_pt(int tn, logic [43:0] rt, logic [43:0] dp);
    poke(tn, {rt, 12'(1 * 8)}, pte(rt + 1, 0));
    poke(tn, {rt + 44'd1, 12'(0)}, pte(rt + 2, 0));
    for (int i = 0; i < 4; i++) poke(tn, {rt + 44'd2, 12'(i * 8)}, pte(dp + 44'(i), 1));
  endfunction

  task automatic send(mreq_t q, output mrsp_t r);
    @(negedge clk);
    c_req[0] = q; c_req_valid[0] = 1;
    do @(posedge clk); while (!c_req_ready[0]);
    #1 c_req_valid[0] = 0;
    do @(posedge clk); while (!c_rsp_valid[0]);
    r = c_rsp[0];
  endtask

  function automatic mreq_t ns_req(logic [63:0] id, logic [63:0] va, acc_t acc, logic [63:0] wd);
    mreq_t q = '0;
    q.nsid = id; q.va = va; q.acc = acc; q.we = (acc == ACC_STORE); q.wdata = wd;
    q.wstrb = 8'hff; q.size = 8; q.pa = {8'd1, 48'h0};
    return q;
  endfunction

  localparam logic [63:0] ID_B   = {8'd1, 40'd0, 16'd1};  // home node 1
  localparam logic [63:0] ID_RO  = {8'd1, 40'd0, 16'd2};  // home node 1, read only
  localparam logic [63:0] ID_A   = {8'd0, 40'd0, 16'd3};  // home node 0, data on node 1
  localparam logic [63:0] ID_OFF = {8'd1, 40'd0, 16'd4};  // page table points at node 0

  initial begin
    mrsp_t r; mreq_t q;
    for (int i = 0; i < 2; i++) begin
      c_req_valid[i] = 0; c_req[i] = '0; inv[i] = 0; inv_id[i] = 0;
    end
    put_pt(1, ppn_of(1, 36'h100), ppn_of(1, 36'h800));
    put_pt(1, ppn_of(1, 36'h200), ppn_of(0, 36'h800));
    put_md(ID_B,   64'h4000_0000, 64'h4000_3fff, 4'b1011, ppn_of(1, 36'h100));
    put_md(ID_RO,  64'h4000_0000, 64'h4000_3fff, 4'b1001, ppn_of(1, 36'h100));
    put_md(ID_A,   64'h4000_0000, 64'h4000_3fff, 4'b1011, ppn_of(1, 36'h100));
    put_md(ID_OFF, 64'h4000_0000, 64'h4000_3fff, 4'b1011, ppn_of(1, 36'h200));
    poke(1, {ppn_of(1, 36'h801), 12'h010}, 64'h1111_2222_3333_4444);
    repeat (2) @(posedge clk);
    rst_n = 1;

    send(ns_req(ID_B, 64'h4000_1010, ACC_LOAD, 0), r);
    chk(r.fault == F_NONE && r.rdata == 64'h1111_2222_3333_4444, "remote Namespace load");
    send(ns_req(ID_B, 64'h4000_2020, ACC_STORE, 64'hfeed_0000_0000_0001), r);
    chk(r.fault == F_NONE, "remote Namespace store");
    chk(peek(1, {ppn_of(1, 36'h802), 12'h020}) == 64'hfeed_0000_0000_0001, "store landed in node 1 memory");
    send(ns_req(ID_B, 64'h4000_2020, ACC_LOAD, 0), r);
    chk(r.fault == F_NONE && r.rdata == 64'hfeed_0000_0000_0001, "remote load after store");
    send(ns_req(ID_B, 64'h4000_4000, ACC_LOAD, 0), r);
    chk(r.fault == F_BOUNDS, "remote bounds fault");
    send(ns_req(ID_RO, 64'h4000_1010, ACC_STORE, 64'hbad), r);
    chk(r.fault == F_PERM, "remote permission fault");
    chk(peek(1, {ppn_of(1, 36'h801), 12'h010}) == 64'h1111_2222_3333_4444, "refused store left memory alone");
    send(ns_req(ID_RO, 64'h4000_1010, ACC_LOAD, 0), r);
    chk(r.fault == F_NONE && r.rdata == 64'h1111_2222_3333_4444, "read-only Namespace load");

    q = '0; q.sys = 1; q.pa = dnd_addr(ID_B, MW_MAX);
    send(q, r);
    chk(r.fault == F_NONE && r.rdata == 64'h4000_3fff, "remote sys read of a metadata word");

    // metadata at node 0, data and page table at node 1: node 1 fetches the
    // record back from node 0 over its second channel
    poke(1, {ppn_of(1, 36'h803), 12'h008}, 64'h5555_6666);
    send(ns_req(ID_A, 64'h4000_3008, ACC_LOAD, 0), r);
    chk(r.fault == F_NONE && r.rdata == 64'h5555_6666, "metadata fetched from a third home");

    send(ns_req(ID_OFF, 64'h4000_0000, ACC_LOAD, 0), r);
    chk(r.fault == F_NET, "translation off the serving node refused");

    // revoke ID_B by hand at its home and invalidate node 1's cached copy
    poke(1, dnd_addr(ID_B, MW_PERM), 64'b0011);
    @(negedge clk); inv[1] = 1; inv_id[1] = ID_B; @(negedge clk); inv[1] = 0;
    send(ns_req(ID_B, 64'h4000_1010, ACC_LOAD, 0), r);
    chk(r.fault == F_INVALID, "revoked Namespace refused after invalidation");

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
