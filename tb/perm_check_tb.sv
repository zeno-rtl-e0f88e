// perm_check_tb: checks the Namespace permission check against a reference
// written here: valid bit, R/W/X per access kind, inclusive byte bounds
// including the last byte of a multi-byte access, and the tag bit.
// Directed edge cases first, then random cases near the bounds.
module perm_check_tb;
  import zeno_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  md_t md; logic tag; logic [63:0] addr; logic [3:0] size; acc_t acc;
  logic ok; fault_t fault;
  perm_check dut (.md, .id_tag(tag), .addr, .size, .acc, .ok, .fault);

  function automatic fault_t ref_fault();
    logic perm;
    logic [64:0] last;
    perm = (acc == ACC_LOAD) ? md.perm.r : (acc == ACC_STORE) ? md.perm.w : md.perm.x;
    last = {1'b0, addr} + ((size == 0) ? 65'd0 : 65'(size) - 65'd1);
    if (!tag) return F_UNTAGGED;
    if (!md.perm.v) return F_INVALID;
    if (!perm) return F_PERM;
    if (addr < md.min_addr || last > {1'b0, md.max_addr}) return F_BOUNDS;
    return F_NONE;
  endfunction

  task automatic try(string what);
    #1;
    checks++;
    if (fault !== ref_fault() || ok !== (ref_fault() == F_NONE)) begin
      failures++;
      $display("FAIL %s: addr=%h size=%0d acc=%0d got %0d want %0d", what, addr, size, acc, fault, ref_fault());
    end
  endtask

  task automatic expect_fault(fault_t f, string what);
    #1;
    checks++;
    if (fault !== f) begin failures++; $display("FAIL %s: got %0d want %0d", what, fault, f); end
  endtask

  initial begin
    md = '{min_addr: 64'h1000, max_addr: 64'h1fff, perm: '{v: 1, x: 0, w: 1, r: 1},
           pt_ppn: '0, root_id: 64'h5};
    tag = 1; acc = ACC_LOAD; size = 8;
    addr = 64'h1000; expect_fault(F_NONE,   "first byte");
    addr = 64'h1ff8; expect_fault(F_NONE,   "last word");
    addr = 64'h1ff9; expect_fault(F_BOUNDS, "word crossing max");
    addr = 64'h0fff; size = 1; expect_fault(F_BOUNDS, "below min");
    addr = 64'h1fff; size = 1; expect_fault(F_NONE,   "last byte");
    addr = 64'h2000; expect_fault(F_BOUNDS, "one past max");
    acc = ACC_FETCH; addr = 64'h1000; expect_fault(F_PERM, "no execute");
    acc = ACC_STORE; expect_fault(F_NONE, "store allowed");
    md.perm.w = 0;   expect_fault(F_PERM, "store refused");
    md.perm.v = 0;   expect_fault(F_INVALID, "revoked");
    tag = 0;         expect_fault(F_UNTAGGED, "forged id");
    md.perm = '{v: 1, x: 1, w: 1, r: 1}; tag = 1;
    md.max_addr = '1; addr = '1; size = 2; expect_fault(F_BOUNDS, "wraps past 2^64");
    for (int i = 0; i < 3000; i++) begin
      md.min_addr = {$urandom, $urandom} >> ($urandom % 64);
      md.max_addr = md.min_addr + ($urandom % 4096);
      md.perm = perm_t'($urandom);
      tag  = ($urandom % 16) != 0;
      acc  = acc_t'($urandom % 3);
      size = 4'(1 << ($urandom % 4));
      addr = md.min_addr + 64'($signed(($urandom % 4200)) - 50);
      try("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
