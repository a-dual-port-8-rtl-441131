// tb_cam8t_cell: exhaustive check of the cell's write and of both ports'
// match-line pull-down conditions (A: D=1 and SLA=0; B: D=0 and SLB=0).
module tb_cam8t_cell;
  logic clk = 0, wl, bl, sla, slb, d, pd_a, pd_b;
  int checks = 0, failures = 0;
  cam8t_cell dut (.*);
  always #5 clk = ~clk;
  initial begin
    wl = 0; bl = 0; sla = 1; slb = 1;
    for (int v = 0; v < 2; v++) begin
      @(negedge clk); wl = 1; bl = v[0];
      @(negedge clk); wl = 0; bl = ~v[0];
      @(negedge clk);
      checks++; if (d !== v[0]) begin failures++; $display("FAIL write %0d", v); end
      for (int s = 0; s < 4; s++) begin
        sla = s[0]; slb = s[1]; #1;
        checks++;
        if (pd_a !== (v[0] && !s[0]) || pd_b !== (!v[0] && !s[1])) begin
          failures++; $display("FAIL d=%0d sla=%0d slb=%0d pd=%b%b", v, s[0], s[1], pd_a, pd_b);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
