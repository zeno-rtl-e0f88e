// ntlb_tb: checks the Namespace-TLB against a reference model kept here.
// The point of the N-TLB is that the Root Namespace ID is part of the tag:
// the same VPN under two Root IDs must give two different translations.
// Then directed set overflow (oldest way replaced), flush, and random
// fills and lookups over colliding (root, vpn) pairs.
module ntlb_tb;
  import zeno_pkg::*;
  localparam int ENTRIES = 1024, WAYS = 8, SETS = ENTRIES / WAYS;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [63:0] lookup_root, fill_root;
  logic [26:0] lookup_vpn, fill_vpn;
  logic [43:0] hit_ppn, fill_ppn;
  logic hit, fill, flush;
  ntlb #(.ENTRIES(ENTRIES), .WAYS(WAYS)) dut (.*);

  bit          rv [SETS][WAYS];
  logic [90:0] rt [SETS][WAYS];
  logic [43:0] rd [SETS][WAYS];
  int          rvic [SETS];

  function automatic int sidx(logic [63:0] r, logic [26:0] v); return int'((v ^ 27'(r)) % SETS); endfunction

  function automatic bit ref_hit(logic [63:0] r, logic [26:0] v, output logic [43:0] d);
    int s = sidx(r, v);
    for (int w = 0; w < WAYS; w++) if (rv[s][w] && rt[s][w] == {r, v}) begin d = rd[s][w]; return 1; end
    d = '0;
    return 0;
  endfunction

  function automatic void ref_fill(logic [63:0] r, logic [26:0] v, logic [43:0] d);
    int s = sidx(r, v), way = -1;
    for (int w = 0; w < WAYS; w++) if (rv[s][w] && rt[s][w] == {r, v}) way = w;
    if (way < 0) for (int w = WAYS - 1; w >= 0; w--) if (!rv[s][w]) way = w;
    if (way < 0) way = rvic[s];
    if (way == rvic[s]) rvic[s] = (rvic[s] + 1) % WAYS;
    rv[s][way] = 1; rt[s][way] = {r, v}; rd[s][way] = d;
  endfunction

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic look(logic [63:0] r, logic [26:0] v, string m);
    logic [43:0] d; bit h;
    @(negedge clk);
    lookup_root = r; lookup_vpn = v; #1;
    h = ref_hit(r, v, d);
    chk(hit == h && (!h || hit_ppn == d), m);
  endtask

  task automatic do_fill(logic [63:0] r, logic [26:0] v, logic [43:0] d);
    @(negedge clk);
    fill = 1; fill_root = r; fill_vpn = v; fill_ppn = d;
    @(posedge clk); #1 fill = 0;
    ref_fill(r, v, d);
  endtask

  initial begin
    fill = 0; flush = 0; lookup_root = 0; lookup_vpn = 0; fill_root = 0; fill_vpn = 0; fill_ppn = 0;
    for (int s = 0; s < SETS; s++) begin
      rvic[s] = 0;
      for (int w = 0; w < WAYS; w++) begin rv[s][w] = 0; rt[s][w] = 0; rd[s][w] = 0; end
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    do_fill(64'h0000_0000_0000_0001, 27'h55, 44'h111);
    do_fill(64'h0200_0000_0000_0009, 27'h55, 44'h222);
    look(64'h0000_0000_0000_0001, 27'h55, "root A");
    chk(hit && hit_ppn == 44'h111, "root A translation");
    look(64'h0200_0000_0000_0009, 27'h55, "root B");
    chk(hit && hit_ppn == 44'h222, "root B translation");
    look(64'h0300_0000_0000_0001, 27'h55, "root C misses");
    chk(!hit, "other root misses");
    for (int i = 0; i <= WAYS; i++) do_fill(64'h7, 27'(7 ^ 5 + i * SETS), 44'(i));
    look(64'h7, 27'(7 ^ 5), "oldest replaced");
    for (int i = 0; i < 4000; i++) begin
      logic [63:0] r; logic [26:0] v;
      r = 64'($urandom % 3); v = 27'(($urandom % 30) * SETS / 2 + ($urandom % 2));
      if ($urandom % 2) do_fill(r, v, 44'({$urandom, $urandom})); else look(r, v, "random");
    end
    @(negedge clk); flush = 1; @(posedge clk); #1 flush = 0;
    for (int s = 0; s < SETS; s++) for (int w = 0; w < WAYS; w++) rv[s][w] = 0;
    look(64'h0000_0000_0000_0001, 27'h55, "flushed");
    chk(!hit, "flushed (direct)");
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
