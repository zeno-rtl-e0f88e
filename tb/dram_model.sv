// dram_model: behavioural model of a node's main memory for simulation
// only. Not synthesizable logic and not part of the design.
//
// One request at a time: ready while idle; a request is answered LATENCY
// cycles later with a one-cycle rsp_valid. Storage is a sparse array of
// 64-bit words indexed by the word address; unwritten words read as zero.
// Writes honour the byte strobes. Testbenches can preload words with
// poke() and read them with peek(). Counts the accesses it served.
module dram_model import zeno_pkg::*; #(
  parameter int LATENCY = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  req_valid,
  output logic  req_ready,
  input  mreq_t req,
  output logic  rsp_valid,
  output mrsp_t rsp
);
  logic [63:0] mem [logic [PA_W-4:0]];
  int          busy_cnt;
  mreq_t       q;
  int unsigned accesses;

  function automatic void poke(input logic [PA_W-1:0] pa, input logic [63:0] d);
    mem[pa[PA_W-1:3]] = d;
  endfunction

  function automatic logic [63:0] peek(input logic [PA_W-1:0] pa);
    return mem.exists(pa[PA_W-1:3]) ? mem[pa[PA_W-1:3]] : 64'd0;
  endfunction

  assign req_ready = (busy_cnt == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_cnt <= 0; rsp_valid <= 1'b0; rsp <= '0; q <= '0; accesses <= 0;
    end else begin
      rsp_valid <= 1'b0;
      if (busy_cnt == 0 && req_valid) begin
        q <= req; busy_cnt <= LATENCY;
      end else if (busy_cnt == 1) begin
        logic [63:0] old;
        busy_cnt  <= 0;
        rsp_valid <= 1'b1;
        accesses  <= accesses + 1;
        old = peek(q.pa);
        if (q.we) begin
          for (int b = 0; b < 8; b++) if (q.wstrb[b]) old[8*b +: 8] = q.wdata[8*b +: 8];
          mem[q.pa[PA_W-1:3]] = old;
          rsp <= '{rdata: '0, fault: F_NONE};
        end else begin
          rsp <= '{rdata: old, fault: F_NONE};
        end
      end else if (busy_cnt > 1) busy_cnt <= busy_cnt - 1;
    end
  end
endmodule
