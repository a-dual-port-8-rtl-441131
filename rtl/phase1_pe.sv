// phase1_pe: Phase-1 processing element (one cluster member of the pipeline).
//
// A PE holds the transitions of a set of Aho-Corasick states at one depth.
// Its match table is a 64 x 11 dual-port 8-T CAM that stores only the input
// character of each transition; its transition table is a 64-entry dual-port
// SRAM that stores the next range {PE ID, UP, DN} of the destination state.
// The current state is not stored: the router hands the PE the row range
// (UP..DN) holding the children of the current state, one range decoder per
// port enables just those rows, and the CAM searches the port's byte in them.
// The matching row's SRAM entry becomes the range for the next depth.
// Both ports search in the same cycle, independently.
// Timing: single-cycle search; on a cycle where adv[p] is high the next range
// of port p is registered (cleared if nothing matched, the range was invalid,
// or srch[p] is low). If several enabled rows match the lowest wins; a
// well-formed trie never has two children with the same character.
// Configuration: cam_we / sram_we write row waddr; rd_code / rd_range read it.
module phase1_pe
  import nids_pkg::*;
#(
  parameter int unsigned ROWS = PE_ROWS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [N_PORT-1:0]       adv,
  input  logic [N_PORT-1:0]       srch,
  input  range_t [N_PORT-1:0]     rng,
  input  code_t  [N_PORT-1:0]     key,
  input  logic                    cam_we,
  input  logic                    sram_we,
  input  logic [$clog2(ROWS)-1:0] waddr,
  input  code_t                   cam_wdata,
  input  range_t                  sram_wdata,
  output code_t                   rd_code,
  output range_t                  rd_range,
  output range_t [N_PORT-1:0]     next
);
  localparam int unsigned AW = $clog2(ROWS);

  logic [N_PORT-1:0][ROWS-1:0] row_en, ml;
  logic [N_PORT-1:0]           hit;
  logic [N_PORT-1:0][AW-1:0]   row;
  logic [RANGE_W-1:0]          tr_a, tr_b;

  for (genvar p = 0; p < N_PORT; p++) begin : g_port
    range_decoder #(.ROWS(ROWS)) u_dec (
      .en    (rng[p].valid & srch[p]),
      .up    (rng[p].up[AW-1:0]),
      .dn    (rng[p].dn[AW-1:0]),
      .row_en(row_en[p])
    );

    // lowest matching row
    always_comb begin
      hit[p] = |ml[p];
      row[p] = '0;
      for (int r = ROWS - 1; r >= 0; r--)
        if (ml[p][r]) row[p] = AW'(r);
    end
  end

  cam8t_array #(.ROWS(ROWS)) u_cam (
    .clk  (clk),
    .we   (cam_we),
    .waddr(waddr),
    .wdata(cam_wdata),
    .rdata(rd_code),
    .en_a (row_en[0]),
    .en_b (row_en[1]),
    .key_a(key[0]),
    .key_b(key[1]),
    .ml_a (ml[0]),
    .ml_b (ml[1])
  );

  // Port A's read port is shared with configuration read-back when no search
  // is under way on port A.
  dp_sram #(.DEPTH(ROWS), .WIDTH(RANGE_W)) u_trans (
    .clk    (clk),
    .we     (sram_we),
    .waddr  (waddr),
    .wdata  (sram_wdata),
    .raddr_a(hit[0] ? row[0] : waddr),
    .raddr_b(row[1]),
    .rdata_a(tr_a),
    .rdata_b(tr_b)
  );

  assign rd_range = range_t'(tr_a);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      next <= '0;
    end else begin
      if (adv[0]) next[0] <= hit[0] ? range_t'(tr_a) : '0;
      if (adv[1]) next[1] <= hit[1] ? range_t'(tr_b) : '0;
    end
  end
endmodule
