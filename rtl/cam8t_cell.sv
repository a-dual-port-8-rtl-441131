// cam8t_cell: logic model of the 8-T dual-port CAM bit cell.
//
// The cell is a 6-T storage latch (nodes D and DB) with one extra search
// transistor per port. Port A's transistor is gated by D and sourced by SLA:
// it discharges match line A when D=1 and SLA=0. Port B's transistor is gated
// by DB and sourced by SLB, which carries the inverted search data, so it
// discharges match line B when D=0 and SLB=0. With fixed-1s codes each port
// on its own detects any mismatch (paper, Sec. III). A cell storing 0 never
// pulls line A down, which is how an all-zero word acts as a wildcard on
// port A only.
// Interface: a write through WL/BL on the rising clock edge; pd_a / pd_b are
// combinational "this cell pulls its match line low" outputs. Precharge,
// sensing and the virtual-VDD retention supply are analog and not modelled.
module cam8t_cell (
  input  logic clk,
  input  logic wl,    // word line: write enable
  input  logic bl,    // bit line: write data
  input  logic sla,   // port A search line (search data)
  input  logic slb,   // port B search line (inverted search data)
  output logic d,     // stored bit, for read-out
  output logic pd_a,  // pulls MLA low
  output logic pd_b   // pulls MLB low
);
  logic q;
  always_ff @(posedge clk) if (wl) q <= bl;
  assign d    = q;
  assign pd_a = q & ~sla;
  assign pd_b = ~q & ~slb;
endmodule
