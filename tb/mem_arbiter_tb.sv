// mem_arbiter_tb: three requesters share one behavioural memory through the
// arbiter. Each writes words only it owns and reads them back; every
// response must come back to the requester that asked, with the data that
// requester wrote last. With all three asking all the time, the grants must
// rotate so that no requester gets more than one grant more than another.
module mem_arbiter_tb;
  import zeno_pkg::*;
  localparam int N = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0] m_req_valid, m_req_ready, m_rsp_valid;
  mreq_t m_req [N]; mrsp_t m_rsp [N];
  logic s_req_valid, s_req_ready, s_rsp_valid; mreq_t s_req; mrsp_t s_rsp;

  mem_arbiter #(.N(N)) dut (.*);
  dram_model #(.LATENCY(2)) mem (.clk, .rst_n, .req_valid(s_req_valid), .req_ready(s_req_ready),
                                 .req(s_req), .rsp_valid(s_rsp_valid), .rsp(s_rsp));

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  int grants [N];
  always @(posedge clk) for (int i = 0; i < N; i++) if (m_req_valid[i] && m_req_ready[i]) grants[i]++;

  // a response must only reach a requester with a request outstanding
  logic [N-1:0] outstanding;
  always @(posedge clk or negedge rst_n)
    if (!rst_n) outstanding <= '0;
    else for (int i = 0; i < N; i++) begin
      if (m_rsp_valid[i]) begin
        chk(outstanding[i], $sformatf("response to master %0d that is not waiting", i));
        outstanding[i] <= 1'b0;
      end
      if (m_req_valid[i] && m_req_ready[i]) outstanding[i] <= 1'b1;
    end

  // each requester: alternate write / read of its own words
  for (genvar i = 0; i < N; i++) begin : g_m
    logic [63:0] last_w [8];
    initial begin
      for (int k = 0; k < 8; k++) last_w[k] = 0;
      m_req_valid[i] = 0; m_req[i] = '0;
      wait (rst_n);
      for (int t = 0; t < 200; t++) begin
        int slot; bit wr; logic [63:0] d;
        slot = $urandom % 8; wr = $urandom % 2; d = {32'(i), $urandom};
        @(negedge clk);
        m_req[i] = '0; m_req[i].we = wr; m_req[i].pa = PA_W'(i * 64 + slot * 8); m_req[i].wdata = d;
        m_req[i].wstrb = 8'hff; m_req_valid[i] = 1;
        do @(posedge clk); while (!m_req_ready[i]);
        #1 m_req_valid[i] = 0;
        do @(posedge clk); while (!m_rsp_valid[i]);
        if (wr) last_w[slot] = d;
        else chk(m_rsp[i].rdata == last_w[slot], $sformatf("master %0d read back", i));
      end
    end
  end

  initial begin
    for (int i = 0; i < N; i++) grants[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (300) @(posedge clk);
    chk(grants[0] - grants[1] <= 1 && grants[1] - grants[0] <= 1 &&
        grants[0] - grants[2] <= 1 && grants[2] - grants[0] <= 1, "round-robin fairness");
    chk(grants[0] > 5, "grants made");
    repeat (6000) @(posedge clk);
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
