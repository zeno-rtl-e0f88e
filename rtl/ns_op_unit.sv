// ns_op_unit: executes the three Namespace instructions of a Zeno core,
// NS_CREATE, NS_DERIVE and NS_REVOKE, as sequences of metadata reads and
// writes in the Distributed Namespace Directory (DND).
//
// The paper encodes each Namespace operation as one instruction, so that it
// is atomic, and has NS_CREATE decoded into several RISC store operations
// that write the metadata; this unit is that sequence in hardware. Inputs
// and outputs follow the paper's operation table:
//   NS_CREATE (min, max, permissions)            -> new Namespace ID
//   NS_DERIVE (min, max, permissions, parent ID) -> child Namespace ID
//   NS_REVOKE (Namespace ID)                     -> nothing
// What each does:
//   CREATE  allocates ID {NODE_ID, sequence} (hardware makes IDs, so this
//           node is the record's home), writes the record with the valid bit
//           set, Root ID = its own ID, Parent ID = 0. The page-table PPN is
//           an extra operand (pt_ppn): the paper's table does not list it.
//   DERIVE  reads the parent's record (from whichever node is its home),
//           refuses unless the parent is valid, min <= max, the child's
//           bounds lie inside the parent's and its R/W/X are a subset of the
//           parent's (bounds only ever shrink), then writes the child's
//           record (same Root ID and page table as the parent) and appends
//           the child's ID to the parent's child list.
//   REVOKE  clears the valid bit, then does the same for every descendant,
//           breadth first, from a queue of IDs still to revoke (the paper
//           allows hardware or firmware recursion; this is hardware).
//           A queue overflow ends the operation with a fault so that trusted
//           firmware can finish. Revoking a Namespace that is already
//           invalid faults (catches a double free); each cleared ID is
//           pulsed on inv/inv_id so the node's Metadata Caches drop it.
// The record layout, child list format, queue and ID format are this
// design's choices (see zeno_pkg). The valid/permission word is written last
// so a half-written record is never valid. Two nodes deriving from one
// parent at the same moment can race on the parent's child count; the paper
// gives no locking scheme and none is built.
//
// Interface: op_valid/op_ready; one operation at a time; done pulses for one
// cycle with fault and new_id. Memory: valid/ready request, response pulse.
// Timing: CREATE = 8 writes; DERIVE = 7 reads + 10 writes; REVOKE = per
// Namespace 3 reads + 1 write + 1 read per child; each access costs its
// memory round trip plus two cycles (issue and capture); CREATE with a
// memory latency of L takes 8*(L+2)+2 cycles from accept to done.
//
// Constant outputs: directory accesses are hardware (sys) accesses of
// whole words, so the Namespace-ID, virtual-address, size and access-kind
// fields of the memory request are fixed on purpose.
module ns_op_unit import zeno_pkg::*; #(
  parameter int NODE_ID = 0,
  parameter int QDEPTH  = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              op_valid,
  output logic              op_ready,
  input  nsop_t             op,
  input  logic [XLEN-1:0]   op_min,
  input  logic [XLEN-1:0]   op_max,
  input  logic [2:0]        op_perm,     // {x, w, r}
  input  logic [PPN_W-1:0]  op_pt_ppn,   // CREATE only
  input  logic [NSID_W-1:0] op_id,       // parent (DERIVE) or target (REVOKE)
  input  logic              op_id_tag,
  output logic              done,
  output fault_t            fault,
  output logic [NSID_W-1:0] new_id,
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output mreq_t             mem_req,
  input  logic              mem_rsp_valid,
  input  mrsp_t             mem_rsp,
  output logic              inv,
  output logic [NSID_W-1:0] inv_id
);
  localparam int QW = $clog2(QDEPTH);

  typedef enum logic [3:0] {
    S_IDLE, S_WREC, S_DRD, S_DCHK, S_LINK, S_LCNT,
    S_RPOP, S_RPERM, S_RCLR, S_RPTR, S_RN, S_RCH, S_DONE
  } state_t;
  state_t state;
  logic   waiting;                 // request taken, response pending
  nsop_t  cur_op;
  logic   first;                   // revoking the operand itself

  // record being written
  logic [XLEN-1:0]   r_min, r_max, r_parent, r_root;
  logic [2:0]        r_perm;
  logic [PPN_W-1:0]  r_ppn;
  logic [2:0]        wi;           // index into write order
  logic [DND_SEQ_W-1:0] seq;

  // parent record (DERIVE) / revoked record (REVOKE)
  logic [XLEN-1:0]   p_min, p_max, p_cptr, p_n;
  logic [3:0]        p_perm;
  logic [PPN_W-1:0]  p_ppn;
  logic [NSID_W-1:0] p_root;
  logic [2:0]        ri;           // index into parent read order

  // revoke queue
  logic [NSID_W-1:0] q_mem [QDEPTH];
  logic [QW-1:0]     q_rd, q_wr;
  logic [QW:0]       q_cnt;
  logic [NSID_W-1:0] rv_id;
  logic [XLEN-1:0]   k;

  fault_t fault_d;
  logic [NSID_W-1:0] op_id_q;

  function automatic int unsigned worder(input logic [2:0] i);
    // valid/permission word (2) goes last
    case (i)
      3'd0: return 0; 3'd1: return 1; 3'd2: return 3; 3'd3: return 4;
      3'd4: return 5; 3'd5: return 6; 3'd6: return 7; default: return 2;
    endcase
  endfunction

  function automatic int unsigned rorder(input logic [2:0] i);
    case (i)
      3'd0: return 0; 3'd1: return 1; 3'd2: return 2; 3'd3: return 3;
      3'd4: return 4; 3'd5: return 6; default: return 7;
    endcase
  endfunction

  logic [XLEN-1:0] wval;
  always_comb begin
    unique case (worder(wi))
      0: wval = r_min;
      1: wval = r_max;
      2: wval = {60'd0, 1'b1, r_perm};
      3: wval = XLEN'(r_ppn);
      4: wval = r_root;
      5: wval = r_parent;
      6: wval = XLEN'(dnd_addr(new_id, 8));
      default: wval = '0;
    endcase
  end

  // memory request per state
  always_comb begin
    mem_req       = '0;
    mem_req.sys   = 1'b1;
    mem_req.size  = 4'd8;
    mem_req.wstrb = 8'hff;
    mem_req_valid = !waiting;
    unique case (state)
      S_WREC:  begin mem_req.we = 1'b1; mem_req.pa = dnd_addr(new_id, worder(wi)); mem_req.wdata = wval; end
      S_DRD:   mem_req.pa = dnd_addr(op_id_q, rorder(ri));
      S_LINK:  begin mem_req.we = 1'b1; mem_req.pa = PA_W'(p_cptr + (p_n << 3)); mem_req.wdata = new_id; end
      S_LCNT:  begin mem_req.we = 1'b1; mem_req.pa = dnd_addr(op_id_q, MW_NCHILD); mem_req.wdata = p_n + 1; end
      S_RPERM: mem_req.pa = dnd_addr(rv_id, MW_PERM);
      S_RCLR:  begin mem_req.we = 1'b1; mem_req.pa = dnd_addr(rv_id, MW_PERM); mem_req.wdata = {60'd0, 1'b0, p_perm[2:0]}; end
      S_RPTR:  mem_req.pa = dnd_addr(rv_id, MW_CHILD);
      S_RN:    mem_req.pa = dnd_addr(rv_id, MW_NCHILD);
      S_RCH:   mem_req.pa = PA_W'(p_cptr + (k << 3));
      default: mem_req_valid = 1'b0;
    endcase
  end

  logic              got;       // response this cycle, no fault
  logic              netfault;
  assign got      = waiting && mem_rsp_valid && mem_rsp.fault == F_NONE;
  assign netfault = waiting && mem_rsp_valid && mem_rsp.fault != F_NONE;
  assign op_ready = (state == S_IDLE);

  // derive checks
  logic derive_ok;
  assign derive_ok = p_perm[3] && (r_min <= r_max) && (r_min >= p_min) && (r_max <= p_max)
                  && ((r_perm & ~p_perm[2:0]) == 3'b000) && (p_n < XLEN'(CHILD_MAX));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; waiting <= 1'b0; cur_op <= NS_CREATE; first <= 1'b0;
      r_min <= '0; r_max <= '0; r_parent <= '0; r_root <= '0; r_perm <= '0; r_ppn <= '0;
      wi <= '0; ri <= '0; seq <= DND_SEQ_W'(1);
      p_min <= '0; p_max <= '0; p_cptr <= '0; p_n <= '0; p_perm <= '0; p_ppn <= '0; p_root <= '0;
      q_rd <= '0; q_wr <= '0; q_cnt <= '0; rv_id <= '0; k <= '0;
      op_id_q <= '0; new_id <= '0; done <= 1'b0; fault <= F_NONE; fault_d <= F_NONE;
      inv <= 1'b0; inv_id <= '0;
    end else begin
      done <= 1'b0;
      inv  <= 1'b0;
      if (mem_req_valid && mem_req_ready) waiting <= 1'b1;
      if (waiting && mem_rsp_valid)       waiting <= 1'b0;
      if (netfault) begin
        fault_d <= F_NET; state <= S_DONE;
      end else begin
        unique case (state)
          S_IDLE: if (op_valid) begin
            cur_op  <= op;
            op_id_q <= op_id;
            r_min   <= op_min;
            r_max   <= op_max;
            r_perm  <= op_perm;
            fault_d <= F_NONE;
            wi <= '0; ri <= '0;
            unique case (op)
              NS_CREATE: begin
                if (op_min > op_max || seq == '0) begin
                  fault_d <= F_NS_OP; state <= S_DONE;
                end else begin
                  new_id   <= {NODE_W'(NODE_ID), (NSID_W-NODE_W-DND_SEQ_W)'(0), seq};
                  r_root   <= {NODE_W'(NODE_ID), (NSID_W-NODE_W-DND_SEQ_W)'(0), seq};
                  r_parent <= '0;
                  r_ppn    <= op_pt_ppn;
                  seq      <= seq + 1'b1;
                  state    <= S_WREC;
                end
              end
              NS_DERIVE: begin
                if (!op_id_tag || seq == '0) begin
                  fault_d <= op_id_tag ? F_NS_OP : F_UNTAGGED; state <= S_DONE;
                end else state <= S_DRD;
              end
              default: begin   // NS_REVOKE
                if (!op_id_tag) begin
                  fault_d <= F_UNTAGGED; state <= S_DONE;
                end else begin
                  q_mem[0] <= op_id; q_rd <= '0; q_wr <= QW'(1); q_cnt <= (QW+1)'(1);
                  first <= 1'b1; state <= S_RPOP;
                end
              end
            endcase
          end
          // ---- write a whole record (CREATE and DERIVE) ----
          S_WREC: if (got) begin
            if (wi == 3'd7) state <= (cur_op == NS_DERIVE) ? S_LINK : S_DONE;
            wi <= wi + 3'd1;
          end
          // ---- DERIVE ----
          S_DRD: if (got) begin
            unique case (rorder(ri))
              0: p_min  <= mem_rsp.rdata;
              1: p_max  <= mem_rsp.rdata;
              2: p_perm <= mem_rsp.rdata[3:0];
              3: p_ppn  <= mem_rsp.rdata[PPN_W-1:0];
              4: p_root <= mem_rsp.rdata;
              6: p_cptr <= mem_rsp.rdata;
              default: p_n <= mem_rsp.rdata;
            endcase
            ri <= ri + 3'd1;
            if (ri == 3'd6) state <= S_DCHK;
          end
          S_DCHK: begin
            if (!derive_ok) begin
              fault_d <= F_NS_OP; state <= S_DONE;
            end else begin
              new_id   <= {NODE_W'(NODE_ID), (NSID_W-NODE_W-DND_SEQ_W)'(0), seq};
              seq      <= seq + 1'b1;
              r_root   <= p_root;
              r_parent <= op_id_q;
              r_ppn    <= p_ppn;
              state    <= S_WREC;
            end
          end
          S_LINK: if (got) state <= S_LCNT;
          S_LCNT: if (got) state <= S_DONE;
          // ---- REVOKE ----
          S_RPOP: begin
            if (q_cnt == 0) state <= S_DONE;
            else begin
              rv_id <= q_mem[q_rd];
              q_rd  <= q_rd + 1'b1;
              q_cnt <= q_cnt - 1'b1;
              state <= S_RPERM;
            end
          end
          S_RPERM: if (got) begin
            p_perm <= mem_rsp.rdata[3:0];
            if (!mem_rsp.rdata[3]) begin
              // already revoked: its subtree was revoked with it
              if (first) begin fault_d <= F_INVALID; state <= S_DONE; end
              else state <= S_RPOP;
            end else state <= S_RCLR;
            first <= 1'b0;
          end
          S_RCLR: if (got) begin
            inv <= 1'b1; inv_id <= rv_id; state <= S_RPTR;
          end
          S_RPTR: if (got) begin p_cptr <= mem_rsp.rdata; state <= S_RN; end
          S_RN:   if (got) begin
            p_n <= mem_rsp.rdata; k <= '0;
            state <= (mem_rsp.rdata == 0) ? S_RPOP : S_RCH;
          end
          S_RCH: if (got) begin
            if (q_cnt == (QW+1)'(QDEPTH)) begin
              fault_d <= F_NS_OP; state <= S_DONE;   // firmware finishes
            end else begin
              q_mem[q_wr] <= mem_rsp.rdata;
              q_wr  <= q_wr + 1'b1;
              q_cnt <= q_cnt + 1'b1;
              k     <= k + 1;
              if (k + 1 == p_n) state <= S_RPOP;
            end
          end
          S_DONE: begin
            done  <= 1'b1;
            fault <= fault_d;
            if (fault_d != F_NONE) new_id <= '0;
            state <= S_IDLE;
          end
          default: state <= S_IDLE;
        endcase
      end
    end
  end
endmodule
