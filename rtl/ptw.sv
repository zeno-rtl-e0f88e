// ptw: page-table walker of the Zeno MMU.
//
// Walks a three-level RISC-V Sv39 page table. The change Zeno makes (per the
// paper) is where the walk starts: at the page-table PPN taken from the
// Namespace metadata, not at the SATP register, so every Namespace derived
// from the same root shares one page table.
//
// Per level it reads one 8-byte PTE at (table PPN << 12) + VPN[level] * 8.
// A PTE with V clear, or with W set and R clear, ends the walk with a page
// fault; a PTE with R or X set is a leaf; otherwise its PPN names the next
// table. A non-leaf PTE at level 0 is also a page fault. A superpage leaf is
// returned as the PPN of the 4 KiB page inside it that holds the address.
// Access rights are enforced by the Namespace metadata, so the PTE's R/W/X
// bits only mark leaves here; the A/D/U bits are ignored. These are this
// design's choices.
//
// Interface: start with root_ppn/vpn for one cycle while idle; the walker
// issues hardware-only (sys) reads with a valid/ready handshake, takes each
// response on mem_rsp_valid, and pulses done with ppn or page_fault.
// Latency: one memory round trip per level plus one cycle.
//
// Constant outputs: the walker only reads 8-byte words as hardware (sys)
// accesses, so the write data, strobes, Namespace ID and virtual-address
// fields of its memory request are tied to fixed values on purpose.
module ptw import zeno_pkg::*; (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [PPN_W-1:0]  root_ppn,
  input  logic [VPN_W-1:0]  vpn,
  output logic              busy,
  output logic              done,
  output logic              page_fault,
  output logic [PPN_W-1:0]  ppn,
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output mreq_t             mem_req,
  input  logic              mem_rsp_valid,
  input  mrsp_t             mem_rsp
);
  typedef enum logic [1:0] {S_IDLE, S_REQ, S_WAIT} state_t;
  state_t           state;
  logic [1:0]       level;
  logic [PPN_W-1:0] table_ppn;
  logic [VPN_W-1:0] vpn_q;

  logic [8:0] vpn_idx;
  assign vpn_idx = vpn_q[9*level +: 9];

  logic [63:0]      pte;
  logic [PPN_W-1:0] pte_ppn;
  logic             pte_v, pte_r, pte_w, pte_x, leaf, bad;
  assign pte     = mem_rsp.rdata;
  assign pte_ppn = pte[53:10];
  assign pte_v   = pte[0];
  assign pte_r   = pte[1];
  assign pte_w   = pte[2];
  assign pte_x   = pte[3];
  assign leaf    = pte_r | pte_x;
  assign bad     = !pte_v || (pte_w && !pte_r) || (mem_rsp.fault != F_NONE);

  always_comb begin
    mem_req       = '0;
    mem_req.sys   = 1'b1;
    mem_req.pa    = {table_ppn, vpn_idx, 3'b000};
    mem_req.size  = 4'd8;
    mem_req_valid = (state == S_REQ);
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; level <= '0; table_ppn <= '0; vpn_q <= '0;
      done <= 1'b0; page_fault <= 1'b0; ppn <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_REQ; level <= 2'd2; table_ppn <= root_ppn; vpn_q <= vpn;
        end
        S_REQ: if (mem_req_ready) state <= S_WAIT;
        S_WAIT: if (mem_rsp_valid) begin
          if (bad || (!leaf && level == 2'd0)) begin
            done <= 1'b1; page_fault <= 1'b1; state <= S_IDLE;
          end else if (leaf) begin
            done <= 1'b1; page_fault <= 1'b0; state <= S_IDLE;
            unique case (level)
              2'd2:    ppn <= {pte_ppn[PPN_W-1:18], vpn_q[17:0]};
              2'd1:    ppn <= {pte_ppn[PPN_W-1:9],  vpn_q[8:0]};
              default: ppn <= pte_ppn;
            endcase
          end else begin
            table_ppn <= pte_ppn; level <= level - 2'd1; state <= S_REQ;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
