// tb_dp_sram: random writes and two-port reads against an array model.
module tb_dp_sram;
  localparam int DEPTH = 64, WIDTH = 17;
  logic clk = 0, we;
  logic [5:0] waddr, raddr_a, raddr_b;
  logic [WIDTH-1:0] wdata, rdata_a, rdata_b;
  logic [WIDTH-1:0] model [DEPTH];
  int checks = 0, failures = 0;
  dp_sram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    we = 0; waddr = 0; wdata = 0; raddr_a = 0; raddr_b = 0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk); we = 1; waddr = 6'(i); wdata = WIDTH'($urandom); model[i] = wdata;
    end
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      we = $urandom_range(0, 1) == 1; waddr = 6'($urandom); wdata = WIDTH'($urandom);
      raddr_a = 6'($urandom); raddr_b = 6'($urandom);
      #1;
      checks += 2;
      if (rdata_a !== model[raddr_a]) begin failures++; $display("FAIL a t=%0d", t); end
      if (rdata_b !== model[raddr_b]) begin failures++; $display("FAIL b t=%0d", t); end
      @(posedge clk); if (we) model[waddr] = wdata;
    end
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
