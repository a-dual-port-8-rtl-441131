// tb_range_decoder: all (UP, DN) pairs with DN <= UP with en high and a sample with
// en low; expected EN[i] = DN <= i <= UP. Includes the paper's example
// UP=57, DN=55.
module tb_range_decoder;
  logic en;
  logic [5:0] up, dn;
  logic [63:0] row_en, exp;
  int checks = 0, failures = 0;
  range_decoder #(.ROWS(64)) dut (.*);
  initial begin
    en = 1; up = 57; dn = 55; #1;
    checks++;
    if (row_en !== 64'h0380_0000_0000_0000) begin failures++; $display("FAIL example %h", row_en); end
    for (int u = 0; u < 64; u++)
      for (int d = 0; d <= u; d++) begin
        en = 1; up = 6'(u); dn = 6'(d); #1;
        for (int i = 0; i < 64; i++) exp[i] = (i >= d) && (i <= u);
        checks++;
        if (row_en !== exp) begin failures++; if (failures < 10) $display("FAIL up=%0d dn=%0d got %h exp %h", u, d, row_en, exp); end
      end
    en = 0; up = 63; dn = 0; #1;
    checks++; if (row_en !== '0) begin failures++; $display("FAIL en=0"); end
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
