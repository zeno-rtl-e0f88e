// zeno_pkg: types and constants shared by the Zeno Namespace-capability RTL.
//
// A Namespace is a capability: a 64-bit Namespace ID names a metadata
// record holding byte-granular minimum/maximum bounds, R/W/X and valid bits,
// the physical page number of the Namespace page table, the Root Namespace
// ID, the Parent ID and a pointer to the list of children (the fields of the
// paper's metadata figure). Everything else in this package is a choice of
// this implementation:
//   * Namespace ID  = {home node (8 bits), 40 zero bits, sequence number
//     (16 bits)}; the home node holds the metadata record in its share of
//     the Distributed Namespace Directory (DND). Sequence 0 is never handed
//     out, so a node can make 65535 Namespaces.
//   * Physical address (56 bits, Sv39 style) = {node (8 bits), local (48)}.
//   * A DND record is 16 64-bit words (128 bytes) at
//     {home, DND_BASE + seq*128}: words 0..6 are the paper's fields in the
//     paper's order, word 7 counts the children, words 8..15 are the child
//     list the child-list pointer points at.
//   * Memory is accessed in 64-bit words with byte strobes.
package zeno_pkg;

  localparam int XLEN      = 64;
  localparam int NSID_W    = 64;
  localparam int NODE_W    = 8;
  localparam int PA_W      = 56;
  localparam int PPN_W     = 44;
  localparam int PGOFF_W   = 12;
  localparam int VPN_W     = 27;      // Sv39: 3 levels of 9 bits
  localparam int LEVELS    = 3;

  // Distributed Namespace Directory layout (local part of the address).
  localparam logic [47:0] DND_BASE   = 48'h0000_0100_0000;
  localparam int          DND_SEQ_W  = 16;  // records per node = 2**16
  localparam int          REC_WORDS  = 16;
  localparam int          CHILD_MAX  = 8;   // child-list slots per record

  // Metadata word numbers inside a DND record.
  localparam int MW_MIN = 0, MW_MAX = 1, MW_PERM = 2, MW_PPN = 3,
                 MW_ROOT = 4, MW_PARENT = 5, MW_CHILD = 6, MW_NCHILD = 7;

  // Permission bits (word 2): bit0 R, bit1 W, bit2 X, bit3 valid.
  typedef struct packed {
    logic v;
    logic x;
    logic w;
    logic r;
  } perm_t;

  // The part of a metadata record the MMU keeps in its metadata cache.
  typedef struct packed {
    logic [XLEN-1:0]   min_addr;
    logic [XLEN-1:0]   max_addr;
    perm_t             perm;
    logic [PPN_W-1:0]  pt_ppn;
    logic [NSID_W-1:0] root_id;
  } md_t;

  typedef enum logic [1:0] {ACC_LOAD = 2'd0, ACC_STORE = 2'd1, ACC_FETCH = 2'd2} acc_t;

  typedef enum logic [3:0] {
    F_NONE     = 4'd0,
    F_UNTAGGED = 4'd1,  // Namespace ID without its tag bit (forged)
    F_INVALID  = 4'd2,  // metadata valid bit clear (revoked)
    F_BOUNDS   = 4'd3,  // outside [min, max]
    F_PERM     = 4'd4,  // R/W/X not granted
    F_MD_MISS  = 4'd5,  // metadata-cache miss in fault-on-miss mode
    F_PAGE     = 4'd6,  // page-table walk found no mapping
    F_NS_OP    = 4'd7,  // Namespace operation refused
    F_NET      = 4'd8   // request could not be routed
  } fault_t;

  typedef enum logic [1:0] {NS_CREATE = 2'd0, NS_DERIVE = 2'd1, NS_REVOKE = 2'd2} nsop_t;

  // Memory request as seen between MMU, NS operation unit, network
  // interface and DRAM. sys=1: hardware-only physical access (metadata,
  // page tables); sys=0: data access on behalf of a Namespace, which a
  // remote network interface re-checks using nsid/va/acc/size.
  typedef struct packed {
    logic              sys;
    logic              we;
    logic [PA_W-1:0]   pa;     // byte address, 8-byte aligned word
    logic [7:0]        wstrb;
    logic [XLEN-1:0]   wdata;
    logic [NSID_W-1:0] nsid;
    logic [XLEN-1:0]   va;
    acc_t              acc;
    logic [3:0]        size;
  } mreq_t;

  typedef struct packed {
    logic [XLEN-1:0] rdata;
    fault_t          fault;
  } mrsp_t;

  typedef enum logic [1:0] {PK_NSREQ = 2'd0, PK_SYSREQ = 2'd1, PK_RSP = 2'd2} pkind_t;

  // Single-flit network packet.
  typedef struct packed {
    pkind_t            kind;
    logic [NODE_W-1:0] src;
    logic [NODE_W-1:0] dst;
    logic              chan;   // which client channel of the source NI
    mreq_t             req;
    mrsp_t             rsp;
  } pkt_t;

  function automatic logic [NODE_W-1:0] pa_node(input logic [PA_W-1:0] pa);
    return pa[PA_W-1 -: NODE_W];
  endfunction

  function automatic logic [NODE_W-1:0] nsid_node(input logic [NSID_W-1:0] id);
    return id[NSID_W-1 -: NODE_W];
  endfunction

  // Physical address of word w of the DND record of Namespace id.
  function automatic logic [PA_W-1:0] dnd_addr(input logic [NSID_W-1:0] id, input int unsigned w);
    logic [47:0] loc;
    loc = DND_BASE + (48'(id[DND_SEQ_W-1:0]) << 7) + 48'(w * 8);
    return {nsid_node(id), loc};
  endfunction

endpackage
