// md_cache: the Namespace Metadata Cache inside the Zeno MMU.
//
// A set-associative cache that maps a Namespace ID to the metadata the MMU
// needs for an access (bounds, permissions, page-table PPN, Root ID). The
// paper's synthesized configuration has 128 entries, 8-way set associative;
// those are the defaults. The set index is the low bits of the Namespace ID
// and the tag is the whole ID.
//
// Interface and timing:
//   lookup  - combinational: hit and data for lookup_id in the same cycle,
//             so the MMU can search it in parallel with the N-TLB.
//   fill    - at the clock edge writes (fill_id, fill_md) into the set,
//             over a matching entry if present, else into a free way, else
//             into the way named by the set's round-robin victim pointer.
//   inv     - at the clock edge drops the entry of inv_id (used when a
//             Namespace is revoked); flush drops every entry.
// Replacement policy, the index function and the invalidate port are this
// design's choices; the paper gives only the cache's size and purpose.
module md_cache import zeno_pkg::*; #(
  parameter int ENTRIES = 128,
  parameter int WAYS    = 8,
  localparam int SETS   = ENTRIES / WAYS,
  localparam int SW     = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int WW     = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NSID_W-1:0] lookup_id,
  output logic              hit,
  output md_t               hit_md,
  input  logic              fill,
  input  logic [NSID_W-1:0] fill_id,
  input  md_t               fill_md,
  input  logic              inv,
  input  logic [NSID_W-1:0] inv_id,
  input  logic              flush
);
  logic              vld [SETS][WAYS];
  logic [NSID_W-1:0] tag [SETS][WAYS];
  md_t               dat [SETS][WAYS];
  logic [WW-1:0]     victim [SETS];

  function automatic logic [SW-1:0] set_of(input logic [NSID_W-1:0] id);
    return (SETS > 1) ? SW'(id[SW-1:0]) : '0;
  endfunction

  logic [SW-1:0] ls, fs, is_;
  assign ls  = set_of(lookup_id);
  assign fs  = set_of(fill_id);
  assign is_ = set_of(inv_id);

  always_comb begin
    hit    = 1'b0;
    hit_md = '0;
    for (int w = 0; w < WAYS; w++)
      if (vld[ls][w] && tag[ls][w] == lookup_id) begin
        hit    = 1'b1;
        hit_md = dat[ls][w];
      end
  end

  // way chosen for a fill
  logic [WW-1:0] fway;
  always_comb begin
    fway  = victim[fs];
    for (int w = WAYS - 1; w >= 0; w--)
      if (!vld[fs][w]) fway = WW'(w);
    for (int w = 0; w < WAYS; w++)
      if (vld[fs][w] && tag[fs][w] == fill_id) fway = WW'(w);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        victim[s] <= '0;
        for (int w = 0; w < WAYS; w++) vld[s][w] <= 1'b0;
      end
    end else begin
      if (flush) begin
        for (int s = 0; s < SETS; s++)
          for (int w = 0; w < WAYS; w++) vld[s][w] <= 1'b0;
      end else begin
        if (inv)
          for (int w = 0; w < WAYS; w++)
            if (tag[is_][w] == inv_id) vld[is_][w] <= 1'b0;
        if (fill) begin
          vld[fs][fway] <= 1'b1;
          if (fway == victim[fs]) victim[fs] <= WW'((32'(victim[fs]) + 1) % WAYS);
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (fill) begin
      tag[fs][fway] <= fill_id;
      dat[fs][fway] <= fill_md;
    end
  end
endmodule
