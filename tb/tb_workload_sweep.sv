// tb_workload_sweep: the engine at full size under the traffic sweep of the
// paper's measurements: Phase-1 configured with 1, 2, 3 and 4 stages (prefix
// depth K), each under 0 %, 15 %, 30 % and 90 % malicious traffic (share of
// packet gaps followed by an embedded pattern), with post-hit clock gating on.
// For each point the tables are rebuilt and the hits are compared with a
// software search (exactly when no request was dropped, otherwise every hit
// must be a true one). Prints, per point, the activity that drives energy:
// bytes searched by Phase-1, Phase-2 searches and bytes skipped by gating.
// Checks that 0 % traffic starts no Phase-2 search, that malicious traffic
// does, and that gating skips bytes once patterns are found.
// The table compiler and the reference search are the same as in
// tb_nids_top.
module tb_workload_sweep;
  import nids_pkg::*;

  localparam int NPAT = 48;
  localparam int PLEN = 4;      // prefix bytes generated per pattern
  localparam int MAXS = 1400;

  logic clk = 0, rst_n = 0;
  logic [N_PORT-1:0] in_valid;
  logic [N_PORT-1:0][7:0] in_byte;
  logic cg_en, cfg_we, cfg_re, cfg_cam, hit_pop, hit_valid, hit_full, p2_busy;
  logic [3:0] cfg_target;
  logic [7:0] cfg_addr;
  logic [P2_CHARS*CODE_W-1:0] cfg_wdata, cfg_rdata;
  hit_t hit_data;
  logic [15:0] hit_dropped;
  logic ev_p2_request, ev_same_cycle, ev_back_to_back;
  logic [N_PORT-1:0] ev_overflow, ev_conflict;
  logic [31:0] cnt_cycles, cnt_searched, cnt_gated;

  nids_top dut (.*);
  always #5 clk = ~clk;

  // ---------------- patterns ----------------
  logic [7:0] pb   [NPAT][PLEN + 16];
  logic       pcar [NPAT][PLEN + 16];
  int         plen [NPAT];           // total length
  int K;                              // current prefix depth
  int hit_rate = 100;                 // % of gaps followed by an embedded pattern
  int prow_bank [NPAT], prow_row [NPAT];
  int order [NPAT];                   // Phase-2 row order

  int checks = 0, failures = 0;
  int n_req = 0, n_same = 0, n_b2b = 0, n_ovf = 0, n_conf = 0, n_hits = 0, n_gated_runs = 0, n_modes = 0;

  function automatic longint unsigned pkey(int p, int d);
    longint unsigned k;
    k = 0;
    for (int i = 0; i < d; i++) k = (k << 8) | longint'(pb[p][i]);
    return k;
  endfunction

  function automatic longint unsigned skey(logic [7:0] s [MAXS], int at, int d);
    longint unsigned k;
    k = 0;
    for (int i = 0; i < d; i++) k = (k << 8) | longint'(s[at + i]);
    return k;
  endfunction

  task automatic make_patterns();
    for (int p = 0; p < NPAT; p++) begin
      bit dup;
      do begin
        int r;
        r = $urandom_range(1, 12);
        plen[p] = PLEN + r;
        for (int i = 0; i < PLEN + 16; i++) begin
          pb[p][i]   = (i < PLEN) ? 8'h61 + 8'($urandom_range(0, 3)) : 8'h65 + 8'($urandom_range(0, 3));
          pcar[p][i] = (i < PLEN) || (i == plen[p] - 1) || ($urandom_range(0, 5) != 0);
        end
        if (p == 0) for (int i = 0; i < PLEN; i++) pb[p][i] = 8'h61;   // "aaaa"
        dup = 0;
        for (int q = 0; q < p; q++) begin
          bit same; same = (plen[q] == plen[p]);
          for (int i = 0; i < plen[p] && same; i++) if (pb[q][i] != pb[p][i] || pcar[q][i] != pcar[p][i]) same = 0;
          if (same) dup = 1;
        end
      end while (dup);
    end
  endtask

  // ---------------- configuration port ----------------
  task automatic cfg_write(int target, bit cam, int addr, logic [P2_CHARS*CODE_W-1:0] data);
    @(negedge clk);
    cfg_we = 1; cfg_target = 4'(target); cfg_cam = cam; cfg_addr = 8'(addr); cfg_wdata = data;
    @(negedge clk);
    cfg_we = 0;
    #1;
    checks++;
    if (target != 12 && cfg_rdata !== data) begin
      failures++; $display("FAIL readback target=%0d cam=%0d addr=%0d", target, cam, addr);
    end
  endtask

  // Build and load the tables for prefix depth K.
  task automatic compile(int depth);
    range_t          child_rng [longint unsigned];   // node -> range of its children / Phase-2 rows
    int              pe_of [longint unsigned], row_of [longint unsigned];
    longint unsigned nodes [$];
    int              stage_pe0 [8], stage_npe [8];
    int              nstage, bank, brow;
    K = depth;
    nstage = K - 1;
    for (int s = 0; s < nstage; s++) begin
      stage_npe[s] = N_PE / nstage + ((s >= nstage - (N_PE % nstage)) ? 1 : 0);
      stage_pe0[s] = (s == 0) ? 0 : stage_pe0[s-1] + stage_npe[s-1];
    end
    // Phase-2 rows, grouped by prefix
    for (int p = 0; p < NPAT; p++) order[p] = p;
    order.sort() with (pkey(item, K));
    bank = 0; brow = 0;
    for (int j = 0; j < NPAT; j++) begin
      int p; longint unsigned k;
      p = order[j]; k = pkey(p, K);
      if (!child_rng.exists(k)) begin
        int n; n = 0;
        for (int q = 0; q < NPAT; q++) if (pkey(q, K) == k) n++;
        if (brow + n > P2_ROWS) begin bank++; brow = 0; end
        child_rng[k] = '{valid: 1'b1, id: BANK_ID0 + ID_W'(bank), up: 6'(brow + n - 1), dn: 6'(brow)};
        brow += n;
      end
    end
    for (int j = 0; j < NPAT; j++) begin
      int p; p = order[j];
      prow_bank[p] = child_rng[pkey(p, K)].id - BANK_ID0;
      prow_row[p]  = child_rng[pkey(p, K)].dn;
      for (int q = 0; q < j; q++) if (pkey(order[q], K) == pkey(p, K)) prow_row[p]++;
    end
    // Phase-1 PE rows, depth K down to 2; the children of one node are contiguous
    for (int d = K; d >= 2; d--) begin
      int s, pe, row;
      s = d - 2; pe = stage_pe0[s]; row = 0;
      nodes.delete();
      for (int p = 0; p < NPAT; p++) begin
        bit seen; seen = 0;
        foreach (nodes[i]) if (nodes[i] == pkey(p, d)) seen = 1;
        if (!seen) nodes.push_back(pkey(p, d));
      end
      nodes.sort();
      for (int i = 0; i < nodes.size(); ) begin
        int n; longint unsigned par;
        par = nodes[i] >> 8; n = 0;
        while (i + n < nodes.size() && (nodes[i + n] >> 8) == par) n++;
        if (row + n > PE_ROWS) begin pe++; row = 0; end
        if (pe >= stage_pe0[s] + stage_npe[s]) begin failures++; $display("FAIL compile: stage %0d full", s); end
        child_rng[par] = '{valid: 1'b1, id: ID_W'(pe), up: 6'(row + n - 1), dn: 6'(row)};
        for (int j = 0; j < n; j++) begin pe_of[nodes[i + j]] = pe; row_of[nodes[i + j]] = row + j; end
        row += n; i += n;
      end
    end
    // write Stage-1
    for (int c = 0; c < 256; c++) begin
      longint unsigned k; k = longint'(c);
      cfg_write(12, 0, c, child_rng.exists(k) ? (P2_CHARS*CODE_W)'(child_rng[k]) : '0);
    end
    // write PEs
    foreach (pe_of[k]) begin
      cfg_write(pe_of[k], 1, row_of[k], (P2_CHARS*CODE_W)'(fixed1s(8'(k & 255))));
      cfg_write(pe_of[k], 0, row_of[k], (P2_CHARS*CODE_W)'(child_rng[k]));
    end
    // write Phase-2
    for (int p = 0; p < NPAT; p++) begin
      code_t [P2_CHARS-1:0] w;
      w = '0;
      for (int i = K; i < plen[p]; i++) w[i - K] = pcar[p][i] ? fixed1s(pb[p][i]) : '0;
      cfg_write(8 + prow_bank[p], 1, prow_row[p], w);
      cfg_write(8 + prow_bank[p], 0, prow_row[p], (P2_CHARS*CODE_W)'({8'(p), 5'(plen[p] - K)}));
    end
    n_modes++;
  endtask

  // ---------------- streams and reference ----------------
  logic [7:0] S [2][MAXS];
  int         slen [2];
  hit_t       got [$], expq [$];

  task automatic make_streams(int n, int mode);
    // mode 0: sparse, both ports; mode 1: burst of pattern 0's prefix on port A
    for (int p = 0; p < 2; p++) begin
      int i; i = 0;
      for (int j = 0; j < MAXS; j++) S[p][j] = 8'h00;
      while (i < n) begin
        int gap; gap = $urandom_range(6, 14);
        for (int g = 0; g < gap && i < n; g++) begin S[p][i] = 8'h77 + 8'($urandom_range(0, 3)); i++; end
        if (i + PLEN + 16 < n && $urandom_range(0, 99) < hit_rate) begin
          int q; q = $urandom_range(0, NPAT - 1);
          for (int c = 0; c < plen[q]; c++) begin
            S[p][i] = pcar[q][c] ? pb[q][c] : 8'h65 + 8'($urandom_range(0, 3));
            i++;
          end
        end
      end
      if (mode == 1 && p == 0) for (int j = 100; j < 140; j++) S[p][j] = 8'h61;
      slen[p] = n + P2_CHARS + 4;   // trailing NUL padding flushes the window
    end
    if (mode == 0 && hit_rate == 100) for (int j = 0; j + 40 < n; j++) if (j % 97 == 3) begin
      // align some patterns on both ports (same cycle) and one byte apart (back to back)
      int q; q = $urandom_range(0, NPAT - 1);
      for (int c = 0; c < 24; c++) begin S[0][j + c] = 8'h78; S[1][j + c] = 8'h78; end
      for (int c = 0; c < plen[q]; c++) begin
        S[0][j + 2 + c] = pcar[q][c] ? pb[q][c] : 8'h66;
        S[1][j + 2 + (j % 2) + c] = pcar[q][c] ? pb[q][c] : 8'h67;
      end
    end
  endtask

  function automatic void reference(bit gating);
    expq.delete();
    for (int p = 0; p < 2; p++) begin
      int skip_end; skip_end = 0;
      for (int i = 0; i + K < slen[p] - P2_CHARS; i++) begin
        longint unsigned k; int best;
        k = skey(S[p], i, K);
        best = -1;
        for (int j = 0; j < NPAT; j++) begin
          int q; bit ok; q = order[j];
          if (pkey(q, K) != k) continue;
          if (i < skip_end) continue;  // prefix start inside a gated suffix is never seen
          ok = 1;
          for (int c = K; c < plen[q]; c++) if (pcar[q][c] && S[p][i + c] != pb[q][c]) ok = 0;
          if (ok && best < 0) best = q;
        end
        if (best >= 0) begin
          expq.push_back('{port: 1'(p), pat_id: 8'(best), offset: 16'(i + K)});
          if (gating) skip_end = i + plen[best];
        end
      end
    end
  endfunction

  // feed both streams; port B stalls now and then unless full_rate is set
  task automatic run(bit gating, bit full_rate, bit exact);
    int idx [2];
    int c0, s0, g0, dur;
    int ovf0;
    rst_n = 0; in_valid = 0; cg_en = gating;
    repeat (2) @(negedge clk);
    rst_n = 1;
    idx[0] = 0; idx[1] = 0;
    got.delete();
    ovf0 = n_ovf;
    c0 = cnt_cycles;
    while (idx[0] < slen[0] || idx[1] < slen[1]) begin
      @(negedge clk);
      for (int p = 0; p < 2; p++) begin
        in_valid[p] = (idx[p] < slen[p]) && (full_rate || p == 0 || $urandom_range(0, 9) != 0);
        in_byte[p]  = S[p][idx[p] < MAXS ? idx[p] : 0];
        if (in_valid[p]) idx[p]++;
      end
    end
    @(negedge clk); in_valid = 0;
    dur = cnt_cycles - c0;
    repeat (30) @(negedge clk);
    if (full_rate) begin
      // two bytes searched or gated per cycle once the windows are full
      checks++;
      if (cnt_searched + cnt_gated != 32'(slen[0] + slen[1] - 2 * P2_CHARS) || dur > slen[0] + 1) begin
        failures++; $display("FAIL rate: %0d bytes in %0d cycles", cnt_searched + cnt_gated, dur);
      end
    end
    if (gating && cnt_gated != 0) n_gated_runs++;
    reference(gating);
    if (exact && n_ovf == ovf0) compare(1); else compare(0);
  endtask

  function automatic void compare(bit exact);
    hit_t g [$], e [$];
    g = got; e = expq;
    g.sort() with ({item.port, item.offset, item.pat_id});
    e.sort() with ({item.port, item.offset, item.pat_id});
    checks++;
    if (exact) begin
      if (g.size() != e.size()) begin
        failures++; $display("FAIL hit count %0d expected %0d", g.size(), e.size());
      end
      for (int i = 0; i < g.size() && i < e.size(); i++) begin
        checks++;
        if (g[i] !== e[i]) begin
          failures++;
          if (failures < 20) $display("FAIL hit %0d: port %0d id %0d off %0d, expected port %0d id %0d off %0d",
            i, g[i].port, g[i].pat_id, g[i].offset, e[i].port, e[i].pat_id, e[i].offset);
        end
      end
    end else begin
      foreach (g[i]) begin
        bit found; found = 0;
        foreach (e[j]) if (e[j] == g[i]) found = 1;
        checks++;
        if (!found) begin failures++; $display("FAIL unexpected hit port %0d id %0d off %0d", g[i].port, g[i].pat_id, g[i].offset); end
      end
      if (g.size() == 0) begin failures++; $display("FAIL no hits"); end
    end
    n_hits += g.size();
  endfunction

  // hit collection and event counting
  assign hit_pop = hit_valid;
  always @(posedge clk) if (rst_n) begin
    if (hit_valid) got.push_back(hit_data);
    if (ev_p2_request) n_req++;
    if (ev_same_cycle) n_same++;
    if (ev_back_to_back) n_b2b++;
    if (|ev_overflow) n_ovf++;
    if (|ev_conflict) n_conf++;
  end

  initial begin
    int rates [4] = '{0, 15, 30, 90};
    in_valid = 0; in_byte = 0; cg_en = 0; cfg_we = 0; cfg_re = 0; cfg_cam = 0; cfg_target = 0; cfg_addr = 0; cfg_wdata = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    make_patterns();
    for (int k = 1; k <= 4; k++) begin
      compile(k);
      for (int r = 0; r < 4; r++) begin
        int req0, h0;
        hit_rate = rates[r];
        req0 = n_req; h0 = n_hits;
        make_streams(600, 0);
        run(1, 0, 1);
        $display("stages=%0d malicious=%0d%%: phase1_bytes=%0d phase2_searches=%0d gated_bytes=%0d hits=%0d",
                 k, hit_rate, cnt_searched, n_req - req0, cnt_gated, n_hits - h0);
        checks++;
        if (hit_rate == 0 && (n_req != req0 || n_hits != h0)) begin failures++; $display("FAIL activity at 0%%"); end
        if (hit_rate >= 30 && (n_req == req0 || n_hits == h0 || cnt_gated == 0)) begin failures++; $display("FAIL no activity"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
