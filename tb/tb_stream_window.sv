// tb_stream_window: pushes a counting byte stream with random gaps; checks
// that the head byte is searched (adv) only once DEPTH bytes are behind it,
// that win[i] is the byte i places after the head, and that every byte is
// searched exactly once in order.
module tb_stream_window;
  localparam int DEPTH = 20;
  logic clk = 0, rst_n = 0, in_valid, adv;
  logic [7:0] in_byte;
  logic [DEPTH-1:0][7:0] win;
  int checks = 0, failures = 0, pushed = 0, searched = 0;
  stream_window #(.DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    in_valid = 0; in_byte = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      in_byte = 8'(pushed);
      #1;
      checks++;
      if (adv !== (in_valid && pushed >= DEPTH)) begin failures++; $display("FAIL adv t=%0d", t); end
      if (adv) begin
        checks++;
        if (win[0] !== 8'(searched)) begin failures++; $display("FAIL order"); end
        for (int i = 0; i < DEPTH; i++) if (win[i] !== 8'(searched + i)) begin failures++; $display("FAIL win %0d", i); end
        searched++;
      end
      if (in_valid) pushed++;
    end
    checks++; if (searched != pushed - DEPTH) begin failures++; $display("FAIL count"); end
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
