// tb_stage1_table: fills the 256-entry table with random ranges, then streams
// random bytes on both ports with random advance and search enables. The
// registered next range must be the entry of the byte (search), zero (gated)
// or unchanged (no advance), one cycle later.
module tb_stage1_table;
  import nids_pkg::*;
  logic clk = 0, rst_n = 0, we, re;
  logic [N_PORT-1:0] adv, srch;
  logic [N_PORT-1:0][7:0] ch;
  logic [7:0] waddr;
  range_t wdata, rdata;
  range_t [N_PORT-1:0] next, exp;
  range_t model [256];
  int checks = 0, failures = 0;
  stage1_table dut (.*);
  always #5 clk = ~clk;
  initial begin
    we = 0; re = 0; adv = 0; srch = 0; ch = 0; waddr = 0; wdata = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); we = 1; waddr = 8'(i); wdata = range_t'($urandom); model[i] = wdata;
    end
    @(negedge clk); we = 0; re = 1;
    for (int i = 0; i < 256; i += 17) begin
      waddr = 8'(i); #1; checks++;
      if (rdata !== model[i]) begin failures++; $display("FAIL readback %0d", i); end
    end
    re = 0; exp = next;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      adv = 2'($urandom); srch = 2'($urandom) & adv; ch = 16'($urandom);
      for (int p = 0; p < 2; p++) if (adv[p]) exp[p] = srch[p] ? model[ch[p]] : '0;
      @(negedge clk); adv = 0;
      checks++;
      if (next !== exp) begin failures++; $display("FAIL t=%0d", t); end
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
