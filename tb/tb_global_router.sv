// tb_global_router: random source ranges; each PE and the Phase-2 path must
// receive the lowest-index valid source that names it, and conflict must be
// raised exactly when a target is named twice on a port.
module tb_global_router;
  import nids_pkg::*;
  localparam int NPE = 8;
  range_t [N_PORT-1:0][NPE:0]   src;
  range_t [NPE-1:0][N_PORT-1:0] pe_rng;
  range_t [N_PORT-1:0]          p2_rng;
  logic   [N_PORT-1:0]          conflict;
  int checks = 0, failures = 0, nconf = 0, np2 = 0;
  global_router #(.NPE(NPE)) dut (.*);
  initial begin
    for (int t = 0; t < 2000; t++) begin
      for (int p = 0; p < 2; p++)
        for (int s = 0; s <= NPE; s++) begin
          src[p][s] = range_t'($urandom);
          src[p][s].valid = ($urandom_range(0, 3) == 0);
          src[p][s].id = 4'($urandom_range(0, 13));
        end
      #1;
      for (int p = 0; p < 2; p++) begin
        range_t e2; int cnt2; logic ec;
        e2 = '0; cnt2 = 0; ec = 0;
        for (int k = 0; k < NPE; k++) begin
          range_t e; int cnt;
          e = '0; cnt = 0;
          for (int s = 0; s <= NPE; s++)
            if (src[p][s].valid && src[p][s].id == 4'(k)) begin if (cnt == 0) e = src[p][s]; cnt++; end
          if (cnt > 1) ec = 1;
          checks++;
          if (pe_rng[k][p] !== e) begin failures++; $display("FAIL pe %0d port %0d", k, p); end
        end
        for (int s = 0; s <= NPE; s++)
          if (src[p][s].valid && src[p][s].id >= 8 && src[p][s].id <= 11) begin if (cnt2 == 0) e2 = src[p][s]; cnt2++; end
        if (cnt2 > 1) ec = 1;
        if (e2.valid) np2++;
        if (ec) nconf++;
        checks += 2;
        if (p2_rng[p] !== e2) begin failures++; $display("FAIL p2 port %0d", p); end
        if (conflict[p] !== ec) begin failures++; $display("FAIL conflict port %0d", p); end
      end
    end
    checks++; if (nconf == 0 || np2 == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
