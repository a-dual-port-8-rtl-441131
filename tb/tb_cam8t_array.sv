// tb_cam8t_array: writes a character per row, then searches random byte
// pairs on the two ports under random row enables. Expected match lines are
// computed from the stored characters (exact compare), not from the codes.
// Also checks the all-zero wildcard word: it matches every key on port A and
// none on port B.
module tb_cam8t_array;
  import nids_pkg::*;
  localparam int ROWS = 64;
  logic clk = 0, we;
  logic [5:0] waddr;
  code_t wdata, rdata, key_a, key_b;
  logic [ROWS-1:0] en_a, en_b, ml_a, ml_b;
  logic [7:0] chars [ROWS];
  logic       wild  [ROWS];
  int checks = 0, failures = 0;

  cam8t_array #(.ROWS(ROWS)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    we = 0; waddr = 0; wdata = 0; en_a = 0; en_b = 0; key_a = 0; key_b = 0;
    for (int r = 0; r < ROWS; r++) begin
      chars[r] = 8'($urandom_range(60, 75));
      wild[r]  = (r % 16 == 5);
      @(negedge clk); we = 1; waddr = 6'(r); wdata = wild[r] ? '0 : fixed1s(chars[r]);
    end
    @(negedge clk); we = 0;
    for (int r = 0; r < ROWS; r += 7) begin
      waddr = 6'(r); #1; checks++;
      if (rdata !== (wild[r] ? '0 : fixed1s(chars[r]))) begin failures++; $display("FAIL read %0d", r); end
    end
    for (int t = 0; t < 300; t++) begin
      logic [7:0] a, b;
      a = 8'($urandom_range(60, 75)); b = 8'($urandom_range(60, 75));
      en_a = {$urandom, $urandom}; en_b = {$urandom, $urandom};
      key_a = fixed1s(a); key_b = fixed1s(b);
      #1;
      for (int r = 0; r < ROWS; r++) begin
        logic ea, eb;
        ea = en_a[r] && (wild[r] || chars[r] == a);
        eb = en_b[r] && !wild[r] && chars[r] == b;
        checks++;
        if (ml_a[r] !== ea || ml_b[r] !== eb) begin
          failures++; $display("FAIL t=%0d row=%0d ml=%b%b exp=%b%b", t, r, ml_a[r], ml_b[r], ea, eb);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
