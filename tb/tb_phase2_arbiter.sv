// tb_phase2_arbiter: random request traffic on both ports against a model of
// two queues with port-A priority and drop-on-full. The consumer accepts
// every other cycle, like the two-cycle Phase-2. Checks grant order and data,
// overflow, same-cycle and back-to-back pulses, and that each case occurs.
module tb_phase2_arbiter;
  import nids_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [N_PORT-1:0] req_valid, overflow;
  p2req_t [N_PORT-1:0] req;
  logic gnt_valid, gnt_port, gnt_ready, same_cycle, back_to_back;
  p2req_t gnt;
  p2req_t q [2][$];
  logic prev_any;
  int checks = 0, failures = 0, n_ovf = 0, n_same = 0, n_b2b = 0, n_b = 0;
  phase2_arbiter #(.QDEPTH(2)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    req_valid = 0; req = '0; gnt_ready = 0; prev_any = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      for (int p = 0; p < 2; p++) begin
        req_valid[p] = $urandom_range(0, 99) < 30;
        req[p] = p2req_t'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom});
      end
      gnt_ready = t[0];
      #1;
      checks += 4;
      if (gnt_valid !== (q[0].size() + q[1].size() != 0)) begin failures++; $display("FAIL valid t=%0d", t); end
      else if (gnt_valid) begin
        int ep; ep = (q[0].size() != 0) ? 0 : 1;
        if (gnt_port !== 1'(ep) || gnt !== q[ep][0]) begin failures++; $display("FAIL grant t=%0d", t); end
      end
      if (same_cycle !== (&req_valid)) begin failures++; $display("FAIL same t=%0d", t); end
      if (back_to_back !== (|req_valid && prev_any)) begin failures++; $display("FAIL b2b t=%0d", t); end
      @(posedge clk);
      begin
        logic [1:0] eo;
        eo = '0;
        if (gnt_valid && gnt_ready) begin
          if (gnt_port) n_b++;
          void'(q[gnt_port].pop_front());
        end
        for (int p = 0; p < 2; p++)
          if (req_valid[p]) begin
            if (q[p].size() < 2) q[p].push_back(req[p]); else eo[p] = 1;
          end
        if (overflow !== eo) begin failures++; $display("FAIL overflow t=%0d", t); end
        if (|eo) n_ovf++;
        if (same_cycle) n_same++;
        if (back_to_back) n_b2b++;
      end
      prev_any = |req_valid;
    end
    checks++; if (n_ovf == 0 || n_same == 0 || n_b2b == 0 || n_b == 0) begin failures++; $display("FAIL coverage"); end
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
