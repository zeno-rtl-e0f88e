// ext_regfile: the extended register file of a Zeno core, holding 64-bit
// Namespace IDs, plus the select that picks the Namespace ID sent with a
// load or store.
//
// Following the paper's core figure, the file is read through three
// register selectors (extd, ext1, ext2), so that one instruction can read up
// to four registers in RISC-V's standard field positions; the NS ID that
// goes to the data-memory interface is chosen from ext1 data, ext2 data or
// zero. The paper protects Namespace IDs with tag bits on the die: here each
// register carries one tag bit, written together with the value. Hardware
// Namespace operations write IDs with the tag set; any other write (for
// example software moving an integer into the register) should clear it, so
// an ID software made up cannot pass the MMU's tag check.
//
// This design's own choices: 32 registers (the paper gives no count), reads
// are combinational, one write port, reset clears values and tags,
// register 0 is an ordinary register.
//
// Timing: writes take effect at the clock edge; reads see the stored value
// (no write-to-read bypass).
module ext_regfile import zeno_pkg::*; #(
  parameter int NREGS = 32,
  localparam int AW = $clog2(NREGS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [AW-1:0]     extd_sel,
  input  logic [AW-1:0]     ext1_sel,
  input  logic [AW-1:0]     ext2_sel,
  output logic [NSID_W-1:0] extd_data,
  output logic [NSID_W-1:0] ext1_data,
  output logic [NSID_W-1:0] ext2_data,
  output logic              extd_tag,
  // NS ID operand of a memory access: 0 -> zero, 1 -> ext1, 2 -> ext2
  input  logic [1:0]        nsid_src,
  output logic [NSID_W-1:0] nsid,
  output logic              nsid_tag,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [NSID_W-1:0] wdata,
  input  logic              wtag
);
  logic [NSID_W-1:0] regs [NREGS];
  logic [NREGS-1:0]  tags;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NREGS; i++) regs[i] <= '0;
      tags <= '0;
    end else if (we) begin
      regs[waddr] <= wdata;
      tags[waddr] <= wtag;
    end
  end

  assign extd_data = regs[extd_sel];
  assign ext1_data = regs[ext1_sel];
  assign ext2_data = regs[ext2_sel];
  assign extd_tag  = tags[extd_sel];

  always_comb begin
    unique case (nsid_src)
      2'd1:    begin nsid = ext1_data; nsid_tag = tags[ext1_sel]; end
      2'd2:    begin nsid = ext2_data; nsid_tag = tags[ext2_sel]; end
      default: begin nsid = '0;        nsid_tag = 1'b1; end
    endcase
  end
endmodule
