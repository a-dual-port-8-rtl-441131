// tb_phase2_cam_bank: loads 64 rows with random remainders of random length
// (unused characters stored as don't-care, a few wildcard characters inside),
// then searches with keys built either from a stored row (mutated or not)
// or at random, inside random row ranges. Expected result: the lowest row
// in range whose cared-for characters equal the key, with its ID and length,
// reported exactly two clock edges after start.
module tb_phase2_cam_bank;
  import nids_pkg::*;
  localparam int ROWS = 64, CHARS = 20;
  logic clk = 0, rst_n = 0, start, done, hit, cam_we, sram_we;
  logic [5:0] up, dn, waddr;
  code_t [CHARS-1:0] key, cam_wdata, rd_key;
  logic [PAT_ID_W-1:0] pat_id;
  logic [LEN_W-1:0] pat_len;
  logic [PAT_ID_W+LEN_W-1:0] sram_wdata, rd_info;
  logic [7:0] pc [ROWS][CHARS];
  logic       care [ROWS][CHARS];
  int         plen [ROWS];
  int checks = 0, failures = 0, nhits = 0;
  phase2_cam_bank #(.ROWS(ROWS), .CHARS(CHARS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    start = 0; up = 0; dn = 0; key = 0; cam_we = 0; sram_we = 0; waddr = 0; cam_wdata = 0; sram_wdata = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      plen[r] = $urandom_range(1, CHARS);
      @(negedge clk);
      for (int i = 0; i < CHARS; i++) begin
        pc[r][i] = 8'h61 + 8'($urandom_range(0, 3));
        care[r][i] = (i < plen[r]) && ($urandom_range(0, 9) != 0);
        cam_wdata[i] = care[r][i] ? fixed1s(pc[r][i]) : '0;
      end
      cam_we = 1; sram_we = 1; waddr = 6'(r); sram_wdata = {8'(r + 100), 5'(plen[r])};
    end
    @(negedge clk); cam_we = 0; sram_we = 0;
    waddr = 6'd7; #1; checks++;
    if (rd_info !== {8'd107, 5'(plen[7])}) begin failures++; $display("FAIL readback"); end
    for (int t = 0; t < 400; t++) begin
      logic [7:0] kc [CHARS];
      int lo, hi, src, er;
      lo = $urandom_range(0, 63); hi = $urandom_range(lo, 63);
      src = $urandom_range(lo, hi);
      for (int i = 0; i < CHARS; i++) begin
        kc[i] = (t % 3 == 0) ? 8'h61 + 8'($urandom_range(0, 3)) : pc[src][i];
        if (t % 3 == 1 && i == 0 && $urandom_range(0, 1) == 1) kc[i] = 8'h7a;
      end
      er = -1;
      for (int r = lo; r <= hi && er < 0; r++) begin
        logic ok; ok = 1;
        for (int i = 0; i < CHARS; i++) if (care[r][i] && pc[r][i] != kc[i]) ok = 0;
        if (ok) er = r;
      end
      @(negedge clk);
      start = 1; up = 6'(hi); dn = 6'(lo);
      for (int i = 0; i < CHARS; i++) key[i] = fixed1s(kc[i]);
      @(negedge clk); start = 0; key = '0;
      checks++; if (done !== 0) begin failures++; $display("FAIL early done"); end
      @(negedge clk);
      checks++;
      if (done !== 1 || hit !== (er >= 0) || (er >= 0 && (pat_id !== 8'(er + 100) || pat_len !== 5'(plen[er])))) begin
        failures++; $display("FAIL t=%0d done=%0d hit=%0d id=%0d exp row %0d lo=%0d hi=%0d", t, done, hit, pat_id, er, lo, hi);
      end
      if (er >= 0) nhits++;
    end
    checks++; if (nhits < 100) begin failures++; $display("FAIL hits %0d", nhits); end
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
