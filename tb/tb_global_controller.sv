// tb_global_controller: advances both ports, then reports Phase-2 matches
// whose suffix lies partly behind and partly ahead of the head. The port
// must stop searching for exactly the bytes still ahead; with cg_en low it
// never stops. Also checks the byte offsets and the counters.
module tb_global_controller;
  import nids_pkg::*;
  logic clk = 0, rst_n = 0, cg_en, skip_valid, skip_port;
  logic [N_PORT-1:0] adv, srch;
  logic [LEN_W-1:0] skip_len;
  logic [POS_W-1:0] skip_pos;
  logic [N_PORT-1:0][POS_W-1:0] pos;
  logic [31:0] cycles, searched, gated;
  int checks = 0, failures = 0, exp_gated = 0, mpos [2], skip_end [2];
  global_controller dut (.*);
  always #5 clk = ~clk;
  initial begin
    cg_en = 1; skip_valid = 0; skip_port = 0; skip_len = 0; skip_pos = 0; adv = 0;
    mpos[0] = 0; mpos[1] = 0; skip_end[0] = 0; skip_end[1] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      if (t == 1500) cg_en = 0;
      adv = 2'($urandom);
      skip_valid = ($urandom_range(0, 19) == 0);
      skip_port = 1'($urandom);
      skip_len = 5'($urandom_range(1, 20));
      skip_pos = 16'(mpos[skip_port] - $urandom_range(0, 4));
      #1;
      for (int p = 0; p < 2; p++) begin
        logic e;
        e = adv[p] && !(mpos[p] < skip_end[p]);
        checks += 2;
        if (srch[p] !== e) begin failures++; $display("FAIL srch t=%0d p=%0d", t, p); end
        if (pos[p] !== 16'(mpos[p])) begin failures++; $display("FAIL pos t=%0d", t); end
        if (adv[p] && !e) exp_gated++;
      end
      @(posedge clk);
      for (int p = 0; p < 2; p++) mpos[p] += adv[p];
      if (cg_en && skip_valid) begin
        int en; en = int'(skip_pos) + int'(skip_len);
        if (en > skip_end[skip_port]) skip_end[skip_port] = en;
      end
    end
    @(negedge clk);
    checks++; if (gated != 32'(exp_gated) || exp_gated == 0) begin failures++; $display("FAIL gated %0d %0d", gated, exp_gated); end
    checks++; if (searched + gated != 32'(mpos[0] + mpos[1])) begin failures++; $display("FAIL searched"); end
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
