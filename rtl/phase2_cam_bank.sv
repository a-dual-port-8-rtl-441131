// phase2_cam_bank: one Phase-2 bank, ROWS x CHARS fixed-1s wildcard CAM plus
// its associate SRAM.
//
// Each row holds the characters of a pattern that follow its Phase-1 prefix,
// up to CHARS of them (220 bits = 20 codes of 11 bits). The cells are the
// single-port 7-T variant of the 8-T cell: a cell pulls the match line low
// when it stores 1 and its search line is 0. A character stored as all zeros
// therefore matches any input (a don't-care), which also pads patterns whose
// remainder is shorter than CHARS. A range decoder enables only the rows named
// by the Phase-1 range. The associate SRAM holds {pattern ID, remaining
// length} of each row; the length lets the controller clock-gate Phase-1 over
// the rest of a matched pattern.
// Timing: the search takes two cycles (paper, Sec. III). start loads the range
// and key; the first cycle decodes the range, the second evaluates the match
// lines and reads the SRAM; done pulses with hit/pat_id/pat_len valid two
// clock edges after start. The lowest matching row wins (this design's
// choice). Configuration: cam_we / sram_we write row waddr, rd_key / rd_info
// read it back.
module phase2_cam_bank
  import nids_pkg::*;
#(
  parameter int unsigned ROWS  = P2_ROWS,
  parameter int unsigned CHARS = P2_CHARS
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [$clog2(ROWS)-1:0]     up,
  input  logic [$clog2(ROWS)-1:0]     dn,
  input  code_t [CHARS-1:0]           key,
  output logic                        done,
  output logic                        hit,
  output logic [PAT_ID_W-1:0]         pat_id,
  output logic [LEN_W-1:0]            pat_len,
  input  logic                        cam_we,
  input  logic                        sram_we,
  input  logic [$clog2(ROWS)-1:0]     waddr,
  input  code_t [CHARS-1:0]           cam_wdata,
  input  logic [PAT_ID_W+LEN_W-1:0]   sram_wdata,
  output code_t [CHARS-1:0]           rd_key,
  output logic [PAT_ID_W+LEN_W-1:0]   rd_info
);
  localparam int unsigned AW = $clog2(ROWS);
  localparam int unsigned IW = PAT_ID_W + LEN_W;

  code_t [CHARS-1:0] cam [ROWS];

  logic                 busy;      // second search cycle
  logic [ROWS-1:0]      en_dec, en_q;
  code_t [CHARS-1:0]    key_q;
  logic [ROWS-1:0]      ml;
  logic                 any;
  logic [AW-1:0]        row;
  logic [IW-1:0]        info;

  always_ff @(posedge clk) if (cam_we) cam[waddr] <= cam_wdata;
  assign rd_key = cam[waddr];

  range_decoder #(.ROWS(ROWS)) u_dec (
    .en    (start),
    .up    (up),
    .dn    (dn),
    .row_en(en_dec)
  );

  // cycle 1: latch the row enables (precharge of the enabled match lines)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      en_q  <= '0;
      key_q <= '0;
    end else begin
      busy <= start;
      if (start) begin
        en_q  <= en_dec;
        key_q <= key;
      end
    end
  end

  // cycle 2: evaluate; a row matches if no cell stores 1 where the key has 0
  always_comb begin
    for (int r = 0; r < ROWS; r++)
      ml[r] = en_q[r] & ~|(cam[r] & ~key_q);
    any = |ml;
    row = '0;
    for (int r = ROWS - 1; r >= 0; r--)
      if (ml[r]) row = AW'(r);
  end

  dp_sram #(.DEPTH(ROWS), .WIDTH(IW)) u_info (
    .clk    (clk),
    .we     (sram_we),
    .waddr  (waddr),
    .wdata  (sram_wdata),
    .raddr_a(row),
    .raddr_b(waddr),
    .rdata_a(info),
    .rdata_b(rd_info)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done    <= 1'b0;
      hit     <= 1'b0;
      pat_id  <= '0;
      pat_len <= '0;
    end else begin
      done <= busy;
      if (busy) begin
        hit     <= any;
        pat_id  <= info[IW-1:LEN_W];
        pat_len <= info[LEN_W-1:0];
      end
    end
  end
endmodule
