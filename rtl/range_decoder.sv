// range_decoder: two-level hierarchical range decoder (64 rows).
//
// Turns a binary range (UP row, DN row) into row enables EN[i] = 1 for
// DN <= i <= UP. Level 1 decodes UP[5:3] and DN[5:3] one-hot and builds the
// coarse 8-row group signals L1[g], set for the groups above DN's group up to
// and including UP's group (exclusive of DN). Level 2 decodes UP and DN
// one-hot over all rows and runs a top-down chain in each group of eight:
// a row is enabled when it is the UP row or when the enable arrives from the
// row above and that row was not the DN row (inclusive of DN). The chain
// entering the top row of group g comes from L1[g+1] instead of from the row
// above (the level-1 lookahead), so no chain is longer than eight rows.
// The paper's switch network is written here as the equivalent logic.
// Combinational. With en low all enables are 0. A range with DN above UP
// is not meaningful; the chain then runs from UP down to row 0.
module range_decoder #(
  parameter int unsigned ROWS = 64
) (
  input  logic                    en,
  input  logic [$clog2(ROWS)-1:0] up,
  input  logic [$clog2(ROWS)-1:0] dn,
  output logic [ROWS-1:0]         row_en
);
  localparam int unsigned AW     = $clog2(ROWS);
  localparam int unsigned GROUPS = ROWS / 8;

  logic [ROWS-1:0]   l2_up, l2_dn;    // level-2 one-hot
  logic [GROUPS-1:0] l1_up, l1_dn;    // level-1 one-hot
  logic [GROUPS:0]   l1;              // coarse group enables, l1[GROUPS] = 0
  logic [ROWS-1:0]   carry;           // enable arriving from above into row i
  logic [ROWS-1:0]   en_i;

  always_comb begin
    l2_up = '0;
    l2_dn = '0;
    l1_up = '0;
    l1_dn = '0;
    l2_up[up] = en;
    l2_dn[dn] = en;
    l1_up[up[AW-1:3]] = en;
    l1_dn[dn[AW-1:3]] = en;

    l1[GROUPS] = 1'b0;
    for (int g = GROUPS - 1; g >= 0; g--)
      l1[g] = ~l1_dn[g] & (l1_up[g] | l1[g+1]);

    en_i = '0;
    for (int i = ROWS - 1; i >= 0; i--) begin
      if (i % 8 == 7) carry[i] = l1[i/8 + 1];
      else            carry[i] = en_i[i+1] & ~l2_dn[i+1];
      en_i[i] = l2_up[i] | carry[i];
    end
    row_en = en_i;
  end
endmodule
