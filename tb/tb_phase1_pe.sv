// tb_phase1_pe: loads 64 rows as 8 "states" of 8 children each (distinct
// characters within a state, random next ranges), then issues random
// searches on both ports: a random sub-range of rows and a random byte. The
// expected next range is the SRAM entry of the row in the range whose
// character equals the byte, or zero; it must appear one cycle later.
module tb_phase1_pe;
  import nids_pkg::*;
  localparam int ROWS = 64;
  logic clk = 0, rst_n = 0, cam_we, sram_we;
  logic [N_PORT-1:0] adv, srch;
  range_t [N_PORT-1:0] rng, next, exp;
  code_t [N_PORT-1:0] key;
  logic [5:0] waddr;
  code_t cam_wdata, rd_code;
  range_t sram_wdata, rd_range;
  logic [7:0] chars [ROWS];
  range_t     tr    [ROWS];
  int checks = 0, failures = 0, hits = 0;
  phase1_pe #(.ROWS(ROWS)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    cam_we = 0; sram_we = 0; adv = 0; srch = 0; rng = 0; key = 0; waddr = 0; cam_wdata = 0; sram_wdata = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      chars[r] = 8'h61 + 8'(r % 8) + 8'(($urandom_range(0, 1)) * 8);
      tr[r] = range_t'($urandom); tr[r].valid = 1'b1;
      @(negedge clk); cam_we = 1; sram_we = 1; waddr = 6'(r); cam_wdata = fixed1s(chars[r]); sram_wdata = tr[r];
    end
    @(negedge clk); cam_we = 0; sram_we = 0;
    for (int r = 0; r < ROWS; r += 5) begin
      waddr = 6'(r); #1; checks++;
      if (rd_code !== fixed1s(chars[r]) || rd_range !== tr[r]) begin failures++; $display("FAIL readback %0d", r); end
    end
    exp = next;
    for (int t = 0; t < 600; t++) begin
      @(negedge clk);
      adv = 2'b11; srch = (t % 50 == 49) ? 2'b01 : 2'b11;
      for (int p = 0; p < 2; p++) begin
        int s, lo, hi;
        logic [7:0] c;
        s = $urandom_range(0, 7);
        lo = s * 8 + $urandom_range(0, 3); hi = s * 8 + $urandom_range(4, 7);
        rng[p] = '{valid: ($urandom_range(0, 9) != 0), id: 4'd0, up: 6'(hi), dn: 6'(lo)};
        c = 8'h61 + 8'($urandom_range(0, 15));
        key[p] = fixed1s(c);
        exp[p] = '0;
        if (rng[p].valid && srch[p])
          for (int r = lo; r <= hi; r++) if (chars[r] == c) begin exp[p] = tr[r]; break; end
        if (exp[p].valid) hits++;
      end
      @(negedge clk); adv = 0;
      checks++;
      if (next !== exp) begin failures++; $display("FAIL t=%0d got %h exp %h", t, next, exp); end
    end
    checks++; if (hits < 50) begin failures++; $display("FAIL too few hits %0d", hits); end
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
