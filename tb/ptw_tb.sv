// ptw_tb: builds Sv39 page tables in a behavioural memory and checks the
// walker: a 4 KiB mapping (three reads), a 2 MiB superpage (two reads, PPN
// low bits taken from the VPN), an invalid PTE, a W-without-R PTE and a
// pointer PTE at level 0 (page faults), and the walk latency of one memory
// round trip per level.
module ptw_tb;
  import zeno_pkg::*;
  localparam int LAT = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, page_fault;
  logic [43:0] root_ppn, ppn;
  logic [26:0] vpn;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  mreq_t mem_req; mrsp_t mem_rsp;

  ptw dut (.*);
  dram_model #(.LATENCY(LAT)) mem (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
                                   .req(mem_req), .rsp_valid(mem_rsp_valid), .rsp(mem_rsp));

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  function automatic logic [63:0] pte(logic [43:0] p, bit leaf);
    return {10'd0, p, 6'd0, leaf ? 4'b0111 : 4'b0001};
  endfunction

  function automatic void put(logic [43:0] table_ppn, int idx, logic [63:0] v);
    mem.poke({table_ppn, 12'(idx * 8)}, v);
  endfunction

  task automatic walk(logic [43:0] root, logic [26:0] v, output bit f, output logic [43:0] p, output int cyc);
    int n0 = mem.accesses;
    @(negedge clk); start = 1; root_ppn = root; vpn = v;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    f = page_fault; p = ppn;
  endtask

  initial begin
    bit f; logic [43:0] p; int cyc, n0;
    start = 0; root_ppn = 0; vpn = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // root table at PPN 0x100, level-1 table at 0x101, level-0 table at 0x102
    put(44'h100, 3, pte(44'h101, 0));
    put(44'h101, 4, pte(44'h102, 0));
    put(44'h102, 5, pte(44'h0_0012_3456, 1));
    n0 = mem.accesses;
    walk(44'h100, {9'd3, 9'd4, 9'd5}, f, p, cyc);
    chk(!f && p == 44'h0_0012_3456, "4 KiB mapping");
    chk(mem.accesses - n0 == 3, "three PTE reads");
    chk(cyc == 3 * (LAT + 2) + 1, $sformatf("walk latency %0d", cyc));
    // superpage at level 1
    put(44'h101, 6, pte(44'h0_0077_7000, 1));
    n0 = mem.accesses;
    walk(44'h100, {9'd3, 9'd6, 9'd17}, f, p, cyc);
    chk(!f && p == (44'h0_0077_7000 | 44'd17), "2 MiB superpage PPN");
    chk(mem.accesses - n0 == 2, "two PTE reads");
    // invalid entry
    walk(44'h100, {9'd9, 9'd0, 9'd0}, f, p, cyc);
    chk(f, "invalid PTE faults");
    // W without R
    put(44'h102, 7, {10'd0, 44'h5, 6'd0, 4'b0101});
    walk(44'h100, {9'd3, 9'd4, 9'd7}, f, p, cyc);
    chk(f, "W without R faults");
    // pointer at level 0
    put(44'h102, 8, pte(44'h9, 0));
    walk(44'h100, {9'd3, 9'd4, 9'd8}, f, p, cyc);
    chk(f, "pointer at level 0 faults");
    // a different root sees a different table
    put(44'h200, 3, pte(44'h0_0004_0000, 1));
    walk(44'h200, {9'd3, 9'd4, 9'd5}, f, p, cyc);
    chk(!f && p == (44'h0_0004_0000 | 44'({9'd4, 9'd5})), "gigapage under other root");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
