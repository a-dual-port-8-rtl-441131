// tb_fixed1s_encoder: checks all 256 codes against an independent
// enumeration (count up through 11-bit words, keep those with five ones) and
// against the five codes printed in the paper's encoding table.
module tb_fixed1s_encoder;
  import nids_pkg::*;
  logic [7:0] ch;
  code_t      code;
  int checks = 0, failures = 0;
  logic [10:0] ref_code [256];

  fixed1s_encoder dut (.ch(ch), .code(code));

  task automatic check(input logic [7:0] c, input logic [10:0] exp);
    ch = c; #1;
    checks++;
    if (code !== exp) begin
      failures++;
      $display("FAIL ch=%0d code=%b exp=%b", c, code, exp);
    end
  endtask

  initial begin
    int n = 0;
    for (int w = 0; w < 2048 && n < 256; w++)
      if ($countones(11'(w)) == 5) begin ref_code[n] = 11'(w); n++; end
    for (int i = 0; i < 256; i++) check(8'(i), ref_code[i]);
    check(8'h00, 11'b00000011111);  // NUL
    check(8'h01, 11'b00000101111);  // SOH
    check(8'h02, 11'b00000110111);  // STX
    check(8'h41, 11'b00100110011);  // 'A'
    check(8'h42, 11'b00100110101);  // 'B'
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
