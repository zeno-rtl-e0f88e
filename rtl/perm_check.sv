// perm_check: the permission-checking logic of the Zeno MMU.
//
// Given the metadata of a Namespace and one access (address, size in bytes,
// load/store/fetch), it decides whether the access may proceed. As the
// paper describes, the valid bit must be set (revocation clears it), the
// read, write or execute permission for the kind of access must be granted,
// and the access must lie inside the byte-granular bounds: every byte from
// addr to addr+size-1 between the minimum and maximum address, both
// inclusive. The tag bit of the Namespace ID is checked too, since an
// untagged ID is a forgery.
//
// This design's own choices: the order in which faults are reported
// (untagged, invalid, permission, bounds) and treating a size of 0 as 1;
// an access whose last byte wraps past 2**64 is out of bounds.
//
// Purely combinational.
//
// The top bit of the fault code is always 0 here: the codes this check
// can give are all below 8.
module perm_check import zeno_pkg::*; (
  input  md_t              md,
  input  logic             id_tag,
  input  logic [XLEN-1:0]  addr,
  input  logic [3:0]       size,
  input  acc_t             acc,
  output logic             ok,
  output fault_t           fault
);
  logic [XLEN:0] last;
  logic [3:0]    szm1;
  logic          perm_ok, bounds_ok;

  always_comb begin
    szm1 = (size == 4'd0) ? 4'd0 : size - 4'd1;
    last = {1'b0, addr} + {{(XLEN-3){1'b0}}, szm1};
    unique case (acc)
      ACC_LOAD:  perm_ok = md.perm.r;
      ACC_STORE: perm_ok = md.perm.w;
      ACC_FETCH: perm_ok = md.perm.x;
      default:   perm_ok = 1'b0;
    endcase
    bounds_ok = (addr >= md.min_addr) && !last[XLEN] && (last[XLEN-1:0] <= md.max_addr);
    if (!id_tag)           fault = F_UNTAGGED;
    else if (!md.perm.v)   fault = F_INVALID;
    else if (!perm_ok)     fault = F_PERM;
    else if (!bounds_ok)   fault = F_BOUNDS;
    else                   fault = F_NONE;
    ok = (fault == F_NONE);
  end
endmodule
