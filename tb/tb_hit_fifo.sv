// tb_hit_fifo: random push/pop against a queue model, including pushes to a
// full buffer (dropped and counted) and simultaneous push and pop.
module tb_hit_fifo;
  import nids_pkg::*;
  logic clk = 0, rst_n = 0, push, pop, out_valid, full;
  hit_t in_data, out_data;
  logic [15:0] dropped;
  hit_t q [$];
  int checks = 0, failures = 0, drops = 0;
  hit_fifo #(.DEPTH(16)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    push = 0; pop = 0; in_data = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      push = $urandom_range(0, 99) < (t < 1000 ? 70 : 30);
      pop  = $urandom_range(0, 99) < 50;
      in_data = hit_t'($urandom);
      #1;
      checks += 2;
      if (out_valid !== (q.size() != 0)) begin failures++; $display("FAIL valid t=%0d", t); end
      if (full !== (q.size() == 16)) begin failures++; $display("FAIL full t=%0d", t); end
      if (out_valid && pop) begin
        checks++;
        if (out_data !== q[0]) begin failures++; $display("FAIL data t=%0d", t); end
      end
      @(posedge clk);
      if (pop && q.size() != 0) void'(q.pop_front());
      if (push) begin
        if (q.size() < 16) q.push_back(in_data); else drops++;
      end
    end
    @(negedge clk);
    checks++; if (dropped != 16'(drops) || drops == 0) begin failures++; $display("FAIL dropped %0d %0d", dropped, drops); end
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
