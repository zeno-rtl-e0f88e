// mesh_router: one router of a 2D mesh network carrying single-flit Zeno
// packets.
//
// The paper models its system interconnect as a 2D mesh of routers (sizes
// 2x2 to 8x8) and adds that Zeno needs no particular topology or protocol;
// the router's insides are not described. This one is this design's own:
// five ports (0 local, 1 north = y-1, 2 east = x+1, 3 south = y+1,
// 4 west = x-1), an input FIFO of DEPTH packets on each port, dimension-
// ordered XY routing (first along x, then along y, which cannot deadlock in
// a mesh), and a round-robin choice among the inputs that want the same
// output. A node number n sits at x = n mod MESH_X, y = n div MESH_X.
//
// Interface: valid/ready on every port in both directions; a packet moves
// when valid and ready are both high. Timing: a packet written into an input
// FIFO can leave through its output in the next cycle, so a hop costs one
// cycle when there is no contention.
//
// Lint note: rst_n is the asynchronous reset of the flip-flops and also the
// disable condition of the handshake assertions, so the linter sees it
// used both asynchronously and synchronously. The assertions only observe;
// no synchronous logic is built from rst_n.
module mesh_router import zeno_pkg::*; #(
  parameter int MESH_X = 2,
  parameter int MESH_Y = 2,
  parameter int X      = 0,
  parameter int Y      = 0,
  parameter int DEPTH  = 2
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [4:0] in_valid,
  output logic [4:0] in_ready,
  input  pkt_t       in_pkt  [5],
  output logic [4:0] out_valid,
  input  logic [4:0] out_ready,
  output pkt_t       out_pkt [5]
);
  localparam int PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  pkt_t          fifo  [5][DEPTH];
  logic [PW-1:0] rd_ptr [5], wr_ptr [5];
  logic [PW:0]   count [5];

  logic [4:0] head_v;
  pkt_t       head [5];
  logic [2:0] dir  [5];

  function automatic logic [2:0] route(input logic [NODE_W-1:0] dst);
    int dx, dy;
    dx = int'(dst) % MESH_X;
    dy = int'(dst) / MESH_X;
    if (dx > X)      return 3'd2;
    else if (dx < X) return 3'd4;
    else if (dy > Y) return 3'd3;
    else if (dy < Y) return 3'd1;
    else             return 3'd0;
  endfunction

  always_comb begin
    for (int i = 0; i < 5; i++) begin
      head_v[i]   = (count[i] != 0);
      head[i]     = fifo[i][rd_ptr[i]];
      dir[i]      = route(head[i].dst);
      in_ready[i] = (count[i] != (PW+1)'(DEPTH));
    end
  end

  // per output: round-robin over inputs
  logic [2:0] last [5];
  logic [2:0] win  [5];
  logic [4:0] pop;
  always_comb begin
    pop = '0;
    for (int o = 0; o < 5; o++) begin
      out_valid[o] = 1'b0;
      win[o]       = 3'd0;
      for (int k = 5; k >= 1; k--) begin
        int unsigned c;
        c = (32'(last[o]) + 32'(k)) % 5;
        if (head_v[c] && dir[c] == 3'(o)) begin
          out_valid[o] = 1'b1;
          win[o]       = 3'(c);
        end
      end
      out_pkt[o] = head[win[o]];
      if (out_valid[o] && out_ready[o]) pop[win[o]] = 1'b1;
    end
  end

  logic [4:0] push;
  assign push = in_valid & in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 5; i++) begin
        rd_ptr[i] <= '0; wr_ptr[i] <= '0; count[i] <= '0; last[i] <= 3'd4;
      end
    end else begin
      for (int i = 0; i < 5; i++) begin
        if (push[i]) wr_ptr[i] <= PW'((32'(wr_ptr[i]) + 1) % DEPTH);
        if (pop[i]) rd_ptr[i] <= PW'((32'(rd_ptr[i]) + 1) % DEPTH);
        count[i] <= count[i] + (PW+1)'(push[i]) - (PW+1)'(pop[i]);
      end
      for (int o = 0; o < 5; o++)
        if (out_valid[o] && out_ready[o]) last[o] <= win[o];
    end
  end

  always_ff @(posedge clk)
    for (int i = 0; i < 5; i++)
      if (push[i]) fifo[i][wr_ptr[i]] <= in_pkt[i];

  // a packet must never be routed back out of the port it came in on
  for (genvar i = 1; i < 5; i++) begin : g_chk
    a_no_uturn: assert property (@(posedge clk) disable iff (!rst_n)
                                 head_v[i] |-> dir[i] != 3'(i));
  end
endmodule
