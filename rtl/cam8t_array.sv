// cam8t_array: Phase-1 match table, ROWS x CODE_W array of 8-T CAM cells.
//
// Each row stores one fixed-1s character. Both ports search in the same
// cycle: port A drives the search code on SLA, port B drives the inverted code
// on SLB. A row's match line stays high (match) when it is enabled for that
// port and none of its cells pulls it down. Rows that are not enabled are
// power-gated in silicon; here they simply report no match.
// Interface: synchronous row write (we/waddr/wdata), combinational read of
// row waddr on rdata, combinational match lines ml_a / ml_b.
// The 64 x 11 size and the per-port search follow the paper; folding
// precharge and sensing into a combinational match line is this model's.
module cam8t_array
  import nids_pkg::*;
#(
  parameter int unsigned ROWS = PE_ROWS
) (
  input  logic                    clk,
  input  logic                    we,
  input  logic [$clog2(ROWS)-1:0] waddr,
  input  code_t                   wdata,
  output code_t                   rdata,
  input  logic [ROWS-1:0]         en_a,
  input  logic [ROWS-1:0]         en_b,
  input  code_t                   key_a,
  input  code_t                   key_b,
  output logic [ROWS-1:0]         ml_a,
  output logic [ROWS-1:0]         ml_b
);
  logic [ROWS-1:0][CODE_W-1:0] d, pd_a, pd_b;
  code_t slb;
  assign slb = ~key_b;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < CODE_W; c++) begin : g_col
      cam8t_cell u_cell (
        .clk (clk),
        .wl  (we && waddr == r),
        .bl  (wdata[c]),
        .sla (key_a[c]),
        .slb (slb[c]),
        .d   (d[r][c]),
        .pd_a(pd_a[r][c]),
        .pd_b(pd_b[r][c])
      );
    end
    assign ml_a[r] = en_a[r] & ~|pd_a[r];
    assign ml_b[r] = en_b[r] & ~|pd_b[r];
  end

  assign rdata = d[waddr];
endmodule
