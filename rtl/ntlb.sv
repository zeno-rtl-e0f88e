// ntlb: the Namespace-TLB (N-TLB) of the Zeno MMU.
//
// A set-associative TLB whose tag holds, next to the virtual page number,
// the Root Namespace ID of the access: parent and child Namespaces share one
// address space and one page table, so the Root ID tells the address spaces
// apart (as the paper describes). The paper's synthesized configuration has
// 1024 entries, 8-way set associative; those are the defaults.
//
// Interface and timing:
//   lookup - combinational hit/ppn for (lookup_root, lookup_vpn), searched
//            in the same cycle as the metadata cache.
//   fill   - at the clock edge installs (fill_root, fill_vpn) -> fill_ppn,
//            over a matching entry, else a free way, else the set's
//            round-robin victim.
//   flush  - drops every entry.
// This design's own choices: 4 KiB pages only (a superpage leaf from the
// walker is installed as the 4 KiB page that was asked for), set index =
// low VPN bits XOR low Root-ID bits, round-robin replacement.
module ntlb import zeno_pkg::*; #(
  parameter int ENTRIES = 1024,
  parameter int WAYS    = 8,
  localparam int SETS   = ENTRIES / WAYS,
  localparam int SW     = (SETS > 1) ? $clog2(SETS) : 1,
  localparam int WW     = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NSID_W-1:0] lookup_root,
  input  logic [VPN_W-1:0]  lookup_vpn,
  output logic              hit,
  output logic [PPN_W-1:0]  hit_ppn,
  input  logic              fill,
  input  logic [NSID_W-1:0] fill_root,
  input  logic [VPN_W-1:0]  fill_vpn,
  input  logic [PPN_W-1:0]  fill_ppn,
  input  logic              flush
);
  typedef struct packed {
    logic [NSID_W-1:0] root;
    logic [VPN_W-1:0]  vpn;
  } tag_t;

  logic              vld [SETS][WAYS];
  tag_t              tag [SETS][WAYS];
  logic [PPN_W-1:0]  dat [SETS][WAYS];
  logic [WW-1:0]     victim [SETS];

  function automatic logic [SW-1:0] set_of(input logic [NSID_W-1:0] r, input logic [VPN_W-1:0] v);
    return (SETS > 1) ? SW'(v[SW-1:0] ^ r[SW-1:0]) : '0;
  endfunction

  logic [SW-1:0] ls, fs;
  tag_t          ltag, ftag;
  assign ls   = set_of(lookup_root, lookup_vpn);
  assign fs   = set_of(fill_root, fill_vpn);
  assign ltag = '{root: lookup_root, vpn: lookup_vpn};
  assign ftag = '{root: fill_root, vpn: fill_vpn};

  always_comb begin
    hit     = 1'b0;
    hit_ppn = '0;
    for (int w = 0; w < WAYS; w++)
      if (vld[ls][w] && tag[ls][w] == ltag) begin
        hit     = 1'b1;
        hit_ppn = dat[ls][w];
      end
  end

  logic [WW-1:0] fway;
  always_comb begin
    fway = victim[fs];
    for (int w = WAYS - 1; w >= 0; w--)
      if (!vld[fs][w]) fway = WW'(w);
    for (int w = 0; w < WAYS; w++)
      if (vld[fs][w] && tag[fs][w] == ftag) fway = WW'(w);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        victim[s] <= '0;
        for (int w = 0; w < WAYS; w++) vld[s][w] <= 1'b0;
      end
    end else if (flush) begin
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++) vld[s][w] <= 1'b0;
    end else if (fill) begin
      vld[fs][fway] <= 1'b1;
      if (fway == victim[fs]) victim[fs] <= WW'((32'(victim[fs]) + 1) % WAYS);
    end
  end

  always_ff @(posedge clk) begin
    if (fill) begin
      tag[fs][fway] <= ftag;
      dat[fs][fway] <= fill_ppn;
    end
  end
endmodule
