// stream_window: input side of the IO FIFO for one search port.
//
// Phase-2 compares the bytes that follow a Phase-1 prefix, so those bytes
// must already be on chip when the prefix match is reported. This block
// delays the stream by DEPTH bytes: Phase-1 searches the head byte win[0],
// and win[0..DEPTH-1] is the window handed to Phase-2. Each in_valid shifts
// one byte in at the tail; in the same cycle the current head, if it holds a
// byte, is searched (adv). A stream's last DEPTH bytes are searched only once
// DEPTH further bytes (padding, for instance) have been pushed behind them.
// The window as Phase-2's data source is this design's choice; the paper
// names only an IO FIFO.
module stream_window
  import nids_pkg::*;
#(
  parameter int unsigned DEPTH = P2_CHARS
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic [7:0]            in_byte,
  output logic                  adv,
  output logic [DEPTH-1:0][7:0] win
);
  logic [DEPTH-1:0] wv;

  assign adv = in_valid && wv[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win <= '0;
      wv  <= '0;
    end else if (in_valid) begin
      for (int i = 0; i < DEPTH - 1; i++) begin
        win[i] <= win[i+1];
        wv[i]  <= wv[i+1];
      end
      win[DEPTH-1] <= in_byte;
      wv[DEPTH-1]  <= 1'b1;
    end
  end
endmodule
