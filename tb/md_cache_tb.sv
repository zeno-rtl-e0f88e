// md_cache_tb: checks the Metadata Cache against a reference model kept in
// the testbench (per set: valid, tag, data and a round-robin victim; fills
// go to a matching way, else the lowest free way, else the victim).
// Directed: hit after fill, eviction of the oldest entry when a set
// overflows, invalidate by ID, flush. Then random fills, invalidates and
// lookups over IDs that collide in a few sets.
module md_cache_tb;
  import zeno_pkg::*;
  localparam int ENTRIES = 128, WAYS = 8, SETS = ENTRIES / WAYS;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [63:0] lookup_id, fill_id, inv_id;
  logic hit, fill, inv, flush;
  md_t hit_md, fill_md;
  md_cache #(.ENTRIES(ENTRIES), .WAYS(WAYS)) dut (.*);

  // reference
  bit          rv [SETS][WAYS];
  logic [63:0] rt [SETS][WAYS];
  md_t         rd [SETS][WAYS];
  int          rvic [SETS];

  function automatic int sidx(logic [63:0] id); return int'(id % SETS); endfunction

  function automatic bit ref_hit(logic [63:0] id, output md_t d);
    int s = sidx(id);
    for (int w = 0; w < WAYS; w++) if (rv[s][w] && rt[s][w] == id) begin d = rd[s][w]; return 1; end
    d = '0;
    return 0;
  endfunction

  function automatic void ref_fill(logic [63:0] id, md_t d);
    int s = sidx(id), way = -1;
    for (int w = 0; w < WAYS; w++) if (rv[s][w] && rt[s][w] == id) way = w;
    if (way < 0) for (int w = WAYS - 1; w >= 0; w--) if (!rv[s][w]) way = w;
    if (way < 0) way = rvic[s];
    if (way == rvic[s]) rvic[s] = (rvic[s] + 1) % WAYS;
    rv[s][way] = 1; rt[s][way] = id; rd[s][way] = d;
  endfunction

  function automatic void ref_inv(logic [63:0] id);
    int s = sidx(id);
    for (int w = 0; w < WAYS; w++) if (rt[s][w] == id) rv[s][w] = 0;
  endfunction

  function automatic md_t rand_md();
    md_t m;
    m.min_addr = {$urandom, $urandom}; m.max_addr = {$urandom, $urandom};
    m.perm = perm_t'($urandom); m.pt_ppn = {$urandom, $urandom}; m.root_id = {$urandom, $urandom};
    return m;
  endfunction

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic look(logic [63:0] id, string m);
    md_t d; bit h;
    @(negedge clk);
    lookup_id = id; #1;
    h = ref_hit(id, d);
    chk(hit == h && (!h || hit_md == d), m);
  endtask

  task automatic do_fill(logic [63:0] id, md_t d);
    @(negedge clk);
    fill = 1; fill_id = id; fill_md = d;
    @(posedge clk); #1 fill = 0;
    ref_fill(id, d);
  endtask

  task automatic do_inv(logic [63:0] id);
    @(negedge clk);
    inv = 1; inv_id = id;
    @(posedge clk); #1 inv = 0;
    ref_inv(id);
  endtask

  initial begin
    fill = 0; inv = 0; flush = 0; lookup_id = 0; fill_id = 0; inv_id = 0; fill_md = '0;
    for (int s = 0; s < SETS; s++) begin
      rvic[s] = 0;
      for (int w = 0; w < WAYS; w++) begin rv[s][w] = 0; rt[s][w] = 0; rd[s][w] = '0; end
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    look(64'h42, "empty after reset");
    do_fill(64'h42, rand_md());
    look(64'h42, "hit after fill");
    chk(hit, "hit after fill (direct)");
    // overflow set 3 with WAYS+1 IDs: the first one is the victim
    for (int i = 0; i <= WAYS; i++) do_fill(64'(3 + i * SETS) | 64'h0100_0000_0000_0000, rand_md());
    look(64'h0100_0000_0000_0003, "oldest evicted");
    chk(!hit, "oldest evicted (direct)");
    look(64'(3 + 2 * SETS) | 64'h0100_0000_0000_0000, "others stay");
    chk(hit, "others stay (direct)");
    // IDs of different home nodes with the same sequence number
    do_fill(64'h0100_0000_0000_0005, rand_md());
    look(64'h0200_0000_0000_0005, "other node's ID with the same sequence misses");
    chk(!hit, "other node's ID misses (direct)");
    do_inv(64'h42);
    look(64'h42, "invalidated");
    chk(!hit, "invalidated (direct)");
    for (int i = 0; i < 4000; i++) begin
      logic [63:0] id;
      id = 64'(($urandom % 40) * SETS / 4 + ($urandom % 3));
      case ($urandom % 4)
        0, 1: do_fill(id, rand_md());
        2:    do_inv(id);
        default: look(id, "random lookup");
      endcase
    end
    @(negedge clk); flush = 1; @(posedge clk); #1 flush = 0;
    for (int s = 0; s < SETS; s++) for (int w = 0; w < WAYS; w++) rv[s][w] = 0;
    look(64'h0100_0000_0000_0013, "flushed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
