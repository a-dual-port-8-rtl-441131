// hit_fifo: output side of the IO FIFO, a buffer of hit records.
//
// Each Phase-2 match pushes {port, pattern ID, offset}; the host pops them
// for its Phase-3 rule checking. Circular buffer of DEPTH entries with
// out_valid/out_data show the oldest record (read from the array) and pop
// removes it. A push to a full buffer is dropped and counted in `dropped`.
// Depth and drop policy are this design's choices.
module hit_fifo
  import nids_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        push,
  input  hit_t        in_data,
  input  logic        pop,
  output logic        out_valid,
  output hit_t        out_data,
  output logic        full,
  output logic [15:0] dropped
);
  localparam int unsigned AW = $clog2(DEPTH);

  hit_t          mem [DEPTH];
  logic [AW-1:0] rd, wr;
  logic [AW:0]   cnt;
  logic          do_pop, do_push;

  assign full      = (cnt == (AW+1)'(DEPTH));
  assign out_valid = (cnt != 0);
  assign out_data  = mem[rd];
  assign do_pop    = pop && out_valid;
  assign do_push   = push && (!full || do_pop);

  always_ff @(posedge clk) if (do_push) mem[wr] <= in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd      <= '0;
      wr      <= '0;
      cnt     <= '0;
      dropped <= '0;
    end else begin
      if (do_pop)  rd <= rd + 1'b1;
      if (do_push) wr <= wr + 1'b1;
      cnt <= cnt + (AW+1)'(do_push) - (AW+1)'(do_pop);
      if (push && !do_push) dropped <= dropped + 1'b1;
    end
  end
endmodule
