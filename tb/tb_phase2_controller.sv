// tb_phase2_controller: controller with four real Phase-2 banks. Each bank
// row holds a random remainder (exact characters, rest don't-care). A queue
// of requests, half of them copies of a stored remainder, is offered
// back-to-back. Checks: a new request is accepted every two cycles, the
// result comes two edges after acceptance, and hits, pattern IDs, offsets
// and skip lengths equal a model search of the named bank's rows.
module tb_phase2_controller;
  import nids_pkg::*;
  localparam int NB = 4;
  logic clk = 0, rst_n = 0;
  logic req_valid, req_port, req_ready;
  p2req_t req;
  logic [NB-1:0] bank_start, bank_done, bank_hit;
  logic [ROW_W-1:0] bank_up, bank_dn;
  code_t [P2_CHARS-1:0] bank_key;
  logic [NB-1:0][PAT_ID_W-1:0] bank_id;
  logic [NB-1:0][LEN_W-1:0] bank_len;
  logic hit_valid, skip_valid, skip_port, busy;
  hit_t hit;
  logic [LEN_W-1:0] skip_len;
  logic [POS_W-1:0] skip_pos;
  logic [NB-1:0] cam_we, sram_we;
  logic [5:0] waddr;
  code_t [P2_CHARS-1:0] cam_wdata;
  logic [12:0] sram_wdata;
  logic [7:0] pc [NB][64][P2_CHARS];
  int plen [NB][64];
  int checks = 0, failures = 0, nhit = 0, accepted = 0, last_acc = -10, cyc = 0;
  int exp_q [$];   // encoded expectation: -1 no hit, else (row id << 8 | len)
  int acc_cyc [$];
  logic exp_port [$];
  logic [15:0] exp_pos [$];

  phase2_controller #(.NB(NB)) dut (.*);
  for (genvar b = 0; b < NB; b++) begin : g_bank
    phase2_cam_bank u_bank (
      .clk(clk), .rst_n(rst_n), .start(bank_start[b]), .up(bank_up), .dn(bank_dn), .key(bank_key),
      .done(bank_done[b]), .hit(bank_hit[b]), .pat_id(bank_id[b]), .pat_len(bank_len[b]),
      .cam_we(cam_we[b]), .sram_we(sram_we[b]), .waddr(waddr), .cam_wdata(cam_wdata),
      .sram_wdata(sram_wdata), .rd_key(), .rd_info()
    );
  end
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  // result monitor
  always @(negedge clk) if (rst_n && acc_cyc.size() != 0 && cyc == acc_cyc[0] + 2) begin
    int e; logic ep; logic [15:0] epos;
    e = exp_q.pop_front(); ep = exp_port.pop_front(); epos = exp_pos.pop_front(); void'(acc_cyc.pop_front());
    checks++;
    if (hit_valid !== (e >= 0) ||
        (e >= 0 && (hit.pat_id !== 8'(e >> 8) || skip_len !== 5'(e & 255) || hit.port !== ep ||
                    hit.offset !== epos || skip_pos !== epos || skip_valid !== 1'b1))) begin
      failures++; $display("FAIL result cyc=%0d hit=%0d id=%0d exp=%0d", cyc, hit_valid, hit.pat_id, e);
    end
    if (e >= 0) nhit++;
  end

  initial begin
    req_valid = 0; req = '0; req_port = 0; cam_we = 0; sram_we = 0; waddr = 0; cam_wdata = 0; sram_wdata = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int b = 0; b < NB; b++)
      for (int r = 0; r < 64; r++) begin
        plen[b][r] = $urandom_range(1, P2_CHARS);
        @(negedge clk);
        for (int i = 0; i < P2_CHARS; i++) begin
          pc[b][r][i] = 8'h61 + 8'($urandom_range(0, 2));
          cam_wdata[i] = (i < plen[b][r]) ? fixed1s(pc[b][r][i]) : '0;
        end
        cam_we = '0; sram_we = '0; cam_we[b] = 1; sram_we[b] = 1; waddr = 6'(r);
        sram_wdata = {8'((b * 64 + r) % 256), 5'(plen[b][r])};
      end
    @(negedge clk); cam_we = 0; sram_we = 0;
    for (int t = 0; t < 300; t++) begin
      int b, lo, hi, src, er;
      b = $urandom_range(0, NB - 1); lo = $urandom_range(0, 63); hi = $urandom_range(lo, lo + 3 > 63 ? 63 : lo + 3);
      src = $urandom_range(lo, hi);
      req.bank = 2'(b); req.up = 6'(hi); req.dn = 6'(lo); req.pos = 16'($urandom);
      for (int i = 0; i < P2_CHARS; i++)
        req.win[i] = (t % 2 == 0) ? pc[b][src][i] : 8'h61 + 8'($urandom_range(0, 2));
      req_port = 1'($urandom);
      er = -1;
      for (int r = lo; r <= hi && er < 0; r++) begin
        logic ok; ok = 1;
        for (int i = 0; i < plen[b][r]; i++) if (pc[b][r][i] != req.win[i]) ok = 0;
        if (ok) er = r;
      end
      req_valid = 1;
      #1;
      while (!req_ready) begin @(negedge clk); #1; end
      exp_q.push_back(er < 0 ? -1 : ((((b * 64 + er) % 256) << 8) | plen[b][er]));
      exp_port.push_back(req_port); exp_pos.push_back(req.pos);
      acc_cyc.push_back(cyc);
      if (accepted > 0) begin
        checks++;
        if (cyc - last_acc != 2) begin failures++; $display("FAIL cadence %0d", cyc - last_acc); end
      end
      last_acc = cyc; accepted++;
      @(negedge clk);
      req_valid = 0;
    end
    repeat (4) @(negedge clk);
    checks++; if (nhit < 100 || acc_cyc.size() != 0) begin failures++; $display("FAIL hits %0d", nhit); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
