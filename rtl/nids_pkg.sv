// nids_pkg: constants and types shared by the pattern-matching engine.
//
// Holds the sizes of the prototype (8 Phase-1 PEs of 64 rows, four Phase-2
// banks of 64 rows x 20 characters), the fixed-1s character code and the
// packed records that travel between blocks:
//   range_t  - a "next range": valid bit, global PE ID, UP row, DN row.
//              IDs 0..7 name Phase-1 PEs, 8..11 name Phase-2 banks.
//   p2req_t  - a prefix match handed to Phase-2 with the remaining bytes.
//   hit_t    - a Phase-2 match reported to the host.
// The fixed-1s code maps byte n to the n-th 11-bit word (in increasing numeric
// order) that has exactly five ones; this reproduces every code printed in
// the paper's encoding table (NUL, SOH, STX, 'A', 'B'). The ID numbering, the
// field widths of the records and the ordering rule beyond the printed rows
// are this design's choices.
package nids_pkg;

  localparam int unsigned CODE_W    = 11;  // fixed-1s code width
  localparam int unsigned CODE_ONES = 5;   // ones in every code
  localparam int unsigned N_PE      = 8;   // Phase-1 CAM PEs
  localparam int unsigned PE_ROWS   = 64;  // rows per Phase-1 PE
  localparam int unsigned ROW_W     = 6;   // row index width (UP/DN)
  localparam int unsigned ID_W      = 4;   // global PE ID width
  localparam int unsigned N_BANK    = 4;   // Phase-2 banks
  localparam int unsigned P2_ROWS   = 64;  // rows per Phase-2 bank
  localparam int unsigned P2_CHARS  = 20;  // characters per Phase-2 row (220 bits / 11)
  localparam int unsigned PAT_ID_W  = 8;   // pattern ID in Phase-2 associate SRAM
  localparam int unsigned LEN_W     = 5;   // remaining-length field (0..20)
  localparam int unsigned POS_W     = 16;  // byte offset counter
  localparam int unsigned N_PORT    = 2;   // search ports A (0) and B (1)

  // Global PE ID of Phase-2 bank 0; banks follow.
  localparam logic [ID_W-1:0] BANK_ID0 = 4'd8;

  typedef logic [CODE_W-1:0] code_t;

  typedef struct packed {
    logic             valid;
    logic [ID_W-1:0]  id;
    logic [ROW_W-1:0] up;
    logic [ROW_W-1:0] dn;
  } range_t;

  localparam int unsigned RANGE_W = $bits(range_t);

  typedef struct packed {
    logic [1:0]                  bank;
    logic [ROW_W-1:0]            up;
    logic [ROW_W-1:0]            dn;
    logic [P2_CHARS-1:0][7:0]    win;   // win[0] = first byte after the prefix
    logic [POS_W-1:0]            pos;   // stream offset of win[0]
  } p2req_t;

  typedef struct packed {
    logic                port;
    logic [PAT_ID_W-1:0] pat_id;
    logic [POS_W-1:0]    offset;  // stream offset of the first byte after the prefix
  } hit_t;

  // Binomial coefficients C(n,k) for n = 0..10, k = 0..5 (Pascal's triangle:
  // C(n,k) = C(n-1,k-1) + C(n-1,k)), the counts the code unranking needs.
  localparam int unsigned BINOM [11][6] = '{
    '{1,  0,  0,   0,   0,   0},
    '{1,  1,  0,   0,   0,   0},
    '{1,  2,  1,   0,   0,   0},
    '{1,  3,  3,   1,   0,   0},
    '{1,  4,  6,   4,   1,   0},
    '{1,  5, 10,  10,   5,   1},
    '{1,  6, 15,  20,  15,   6},
    '{1,  7, 21,  35,  35,  21},
    '{1,  8, 28,  56,  70,  56},
    '{1,  9, 36,  84, 126, 126},
    '{1, 10, 45, 120, 210, 252}};

  // Byte -> fixed-1s code: unrank n in the combinatorial number system.
  // Going from the top bit down, bit b is set when n is at least the number
  // of words that keep it clear, C(b, ones still to place).
  function automatic code_t fixed1s(input logic [7:0] ch);
    code_t       c;
    int unsigned n;
    int unsigned ones;
    n    = 32'(ch);
    ones = CODE_ONES;
    c    = '0;
    for (int b = CODE_W - 1; b >= 0; b--) begin
      if (ones != 0 && n >= BINOM[b][ones]) begin
        c[b] = 1'b1;
        n    = n - BINOM[b][ones];
        ones = ones - 1;
      end
    end
    return c;
  endfunction

endpackage
