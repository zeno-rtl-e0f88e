// ns_op_unit_tb: runs Namespace operations against a behavioural memory and
// checks the DND records they leave behind, worked out here from the
// operation table: CREATE writes a valid root record; DERIVE writes a child
// with the parent's root and page table and links it into the parent's
// child list, and refuses wider bounds, extra rights, an untagged parent and
// a full child list; REVOKE clears the whole subtree, reports each ID for
// cache invalidation, faults on a second revoke and on queue overflow.
module ns_op_unit_tb;
  import zeno_pkg::*;
  localparam int LAT = 2, QD = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic op_valid, op_ready, op_id_tag, done, inv;
  nsop_t op; logic [63:0] op_min, op_max, op_id, new_id, inv_id;
  logic [2:0] op_perm; logic [43:0] op_pt_ppn; fault_t fault;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid; mreq_t mem_req; mrsp_t mem_rsp;

  ns_op_unit #(.NODE_ID(0), .QDEPTH(QD)) dut (.*);
  dram_model #(.LATENCY(LAT)) mem (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
                                   .req(mem_req), .rsp_valid(mem_rsp_valid), .rsp(mem_rsp));

  int inv_seen [logic [63:0]];
  always @(posedge clk) if (inv) inv_seen[inv_id] = 1;

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic run(nsop_t o, logic [63:0] mn, logic [63:0] mx, logic [2:0] p, logic [63:0] id, bit tag,
                     output fault_t f, output logic [63:0] nid, output int cyc);
    @(negedge clk);
    op = o; op_min = mn; op_max = mx; op_perm = p; op_pt_ppn = 44'h100; op_id = id; op_id_tag = tag;
    op_valid = 1;
    @(posedge clk); #1 op_valid = 0;
    cyc = 1;
    while (!done) begin @(posedge clk); #1 cyc++; end
    f = fault; nid = new_id;
  endtask

  function automatic bit valid_of(logic [63:0] id);
    return mem.peek(dnd_addr(id, MW_PERM)) >> 3 & 1;
  endfunction

  initial begin
    fault_t f; logic [63:0] a, b, c, d, x; int cyc;
    op_valid = 0; op = NS_CREATE; op_min = 0; op_max = 0; op_perm = 0; op_pt_ppn = 0; op_id = 0; op_id_tag = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    run(NS_CREATE, 64'h1000, 64'h1fff, 3'b011, 0, 0, f, a, cyc);
    chk(f == F_NONE && a == 64'h1, "create returns first ID");
    chk(mem.peek(dnd_addr(a, MW_MIN)) == 64'h1000 && mem.peek(dnd_addr(a, MW_MAX)) == 64'h1fff, "create bounds");
    chk(mem.peek(dnd_addr(a, MW_PERM)) == 64'b1011, "create perm + valid");
    chk(mem.peek(dnd_addr(a, MW_PPN)) == 64'h100, "create page table PPN");
    chk(mem.peek(dnd_addr(a, MW_ROOT)) == a && mem.peek(dnd_addr(a, MW_PARENT)) == 0, "root record");
    chk(mem.peek(dnd_addr(a, MW_CHILD)) == 64'(dnd_addr(a, 8)), "child list pointer");
    chk(cyc == 8 * (LAT + 2) + 2, $sformatf("create latency %0d", cyc));

    run(NS_DERIVE, 64'h1100, 64'h11ff, 3'b001, a, 1, f, b, cyc);
    chk(f == F_NONE && b == 64'h2, "derive returns child ID");
    chk(mem.peek(dnd_addr(b, MW_ROOT)) == a && mem.peek(dnd_addr(b, MW_PARENT)) == a, "child root/parent");
    chk(mem.peek(dnd_addr(b, MW_PPN)) == 64'h100 && mem.peek(dnd_addr(b, MW_PERM)) == 64'b1001, "child ppn/perm");
    chk(mem.peek(dnd_addr(a, MW_NCHILD)) == 1 && mem.peek(dnd_addr(a, 8)) == b, "child linked into parent");

    run(NS_DERIVE, 64'h0fff, 64'h11ff, 3'b001, a, 1, f, x, cyc);
    chk(f == F_NS_OP, "derive below parent min refused");
    run(NS_DERIVE, 64'h1100, 64'h2000, 3'b001, a, 1, f, x, cyc);
    chk(f == F_NS_OP, "derive above parent max refused");
    run(NS_DERIVE, 64'h1100, 64'h11ff, 3'b100, a, 1, f, x, cyc);
    chk(f == F_NS_OP, "derive with extra right refused");
    run(NS_DERIVE, 64'h1100, 64'h11ff, 3'b001, a, 0, f, x, cyc);
    chk(f == F_UNTAGGED, "derive from untagged ID refused");
    run(NS_CREATE, 64'h2000, 64'h1fff, 3'b001, 0, 0, f, x, cyc);
    chk(f == F_NS_OP, "create with min > max refused");

    run(NS_DERIVE, 64'h1180, 64'h11bf, 3'b001, b, 1, f, c, cyc);
    chk(f == F_NONE && mem.peek(dnd_addr(c, MW_ROOT)) == a, "grandchild keeps root");

    run(NS_REVOKE, 0, 0, 0, a, 1, f, x, cyc);
    chk(f == F_NONE, "revoke root");
    chk(!valid_of(a) && !valid_of(b) && !valid_of(c), "whole subtree revoked");
    chk(inv_seen.exists(a) && inv_seen.exists(b) && inv_seen.exists(c), "each revoked ID invalidated");
    run(NS_REVOKE, 0, 0, 0, b, 1, f, x, cyc);
    chk(f == F_INVALID, "second revoke faults");
    run(NS_DERIVE, 64'h1100, 64'h11ff, 3'b001, a, 1, f, x, cyc);
    chk(f == F_NS_OP, "derive from revoked parent refused");

    // a wide tree: CHILD_MAX children fit, one more is refused, and
    // revoking it overflows a QD-entry queue
    run(NS_CREATE, 64'h0, 64'hffff, 3'b111, 0, 0, f, d, cyc);
    for (int i = 0; i < CHILD_MAX; i++) begin
      run(NS_DERIVE, 64'(i * 16), 64'(i * 16 + 15), 3'b001, d, 1, f, x, cyc);
      chk(f == F_NONE, "child fits");
    end
    run(NS_DERIVE, 64'h0, 64'hf, 3'b001, d, 1, f, x, cyc);
    chk(f == F_NS_OP, "child list full");
    run(NS_REVOKE, 0, 0, 0, d, 1, f, x, cyc);
    chk(f == F_NS_OP && !valid_of(d), "revoke queue overflow hands over to firmware");

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
