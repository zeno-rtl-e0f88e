// mesh_router_tb: one router at (1,1) of a 3x3 mesh. Random packets enter
// on all five ports (only with destinations XY routing can bring through
// that port) while the outputs apply random back-pressure. Every packet must
// leave by the port XY routing gives (x first, then y), none may be lost or
// duplicated, and packets from one input to one output keep their order.
module mesh_router_tb;
  import zeno_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [4:0] in_valid, in_ready, out_valid, out_ready;
  pkt_t in_pkt [5], out_pkt [5];
  mesh_router #(.MESH_X(3), .MESH_Y(3), .X(1), .Y(1), .DEPTH(2)) dut (.*);

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  function automatic int xy_port(int dst);
    int dx = dst % 3, dy = dst / 3;
    if (dx > 1) return 2; if (dx < 1) return 4;
    if (dy > 1) return 3; if (dy < 1) return 1;
    return 0;
  endfunction

  // a destination that may arrive on input port p under XY routing
  function automatic int pick_dst(int p);
    int d;
    do d = $urandom % 9;
    while ((p == 2 && d % 3 == 2) || (p == 4 && d % 3 == 0) ||            // came from x+1 / x-1: going x-ward back is impossible
           (p == 1 && (d % 3 != 1 || d / 3 == 0)) || (p == 3 && (d % 3 != 1 || d / 3 == 2)));
    return d;
  endfunction

  int sent = 0, got = 0;
  logic [31:0] expect_q [5][5][$];   // per (in, out) the sequence numbers

  for (genvar p = 0; p < 5; p++) begin : g_src
    initial begin
      in_valid[p] = 0; in_pkt[p] = '0;
      wait (rst_n);
      for (int t = 0; t < 300; t++) begin
        int d; pkt_t k;
        d = pick_dst(p);
        k = '0; k.dst = NODE_W'(d); k.src = NODE_W'(p); k.req.wdata = {32'(p), 32'(t)};
        @(negedge clk);
        in_pkt[p] = k; in_valid[p] = ($urandom % 4) != 0;
        while (!in_valid[p]) begin @(negedge clk); in_valid[p] = ($urandom % 4) != 0; end
        do @(posedge clk); while (!in_ready[p]);
        expect_q[p][xy_port(d)].push_back(32'(t));
        sent++;
        #1 in_valid[p] = 0;
      end
    end
  end

  always @(negedge clk) out_ready = 5'($urandom);

  always @(posedge clk) if (rst_n)
    for (int o = 0; o < 5; o++)
      if (out_valid[o] && out_ready[o]) begin
        int s;
        s = int'(out_pkt[o].src);
        chk(xy_port(int'(out_pkt[o].dst)) == o, "left by the XY port");
        #0;
        if (expect_q[s][o].size() == 0) begin
          checks++; failures++; $display("FAIL unexpected packet");
        end else begin
          chk(expect_q[s][o].pop_front() == out_pkt[o].req.wdata[31:0], "in order per input/output pair");
        end
        got++;
      end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    wait (sent == 1500);
    repeat (50) @(posedge clk);
    chk(got == sent, $sformatf("all delivered %0d/%0d", got, sent));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
