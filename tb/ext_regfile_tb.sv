// ext_regfile_tb: writes random Namespace IDs with random tags into the
// extended register file, keeps a copy in the testbench, and checks all
// three read ports, the tag of extd and the NS-ID select (zero, ext1, ext2).
module ext_regfile_tb;
  import zeno_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [4:0] extd_sel, ext1_sel, ext2_sel, waddr;
  logic [63:0] extd_data, ext1_data, ext2_data, nsid, wdata;
  logic extd_tag, nsid_tag, we, wtag;
  logic [1:0] nsid_src;
  logic [63:0] model [32];
  logic        mtag  [32];

  ext_regfile dut (.*);

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    we = 0; waddr = 0; wdata = 0; wtag = 0; nsid_src = 0;
    extd_sel = 0; ext1_sel = 0; ext2_sel = 0;
    for (int i = 0; i < 32; i++) begin model[i] = 0; mtag[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    #1 chk(ext1_data == 0 && extd_tag == 0, "reset clears");
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      we = $urandom % 2; waddr = 5'($urandom); wdata = {$urandom, $urandom}; wtag = $urandom % 2;
      extd_sel = 5'($urandom); ext1_sel = 5'($urandom); ext2_sel = 5'($urandom);
      nsid_src = 2'($urandom % 3);
      #1;
      chk(extd_data == model[extd_sel] && extd_tag == mtag[extd_sel], "extd");
      chk(ext1_data == model[ext1_sel], "ext1");
      chk(ext2_data == model[ext2_sel], "ext2");
      case (nsid_src)
        2'd1: chk(nsid == model[ext1_sel] && nsid_tag == mtag[ext1_sel], "nsid ext1");
        2'd2: chk(nsid == model[ext2_sel] && nsid_tag == mtag[ext2_sel], "nsid ext2");
        default: chk(nsid == 0 && nsid_tag == 1, "nsid zero");
      endcase
      @(posedge clk);
      if (we) begin model[waddr] = wdata; mtag[waddr] = wtag; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
