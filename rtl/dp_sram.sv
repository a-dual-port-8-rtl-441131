// dp_sram: memory with two read ports and one write port.
//
// Used as the Phase-1 transition tables (one read per search port), the
// two-port Stage-1 table and the Phase-2 associate SRAM. Writes happen on the
// rising edge; both reads are combinational from the array, and callers
// register what they read. The paper gives the role of these SRAMs but not
// their timing, so the read timing is this design's choice.
module dp_sram #(
  parameter int unsigned DEPTH = 64,
  parameter int unsigned WIDTH = 17
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr_a,
  input  logic [$clog2(DEPTH)-1:0] raddr_b,
  output logic [WIDTH-1:0]         rdata_a,
  output logic [WIDTH-1:0]         rdata_b
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) if (we) mem[waddr] <= wdata;

  assign rdata_a = mem[raddr_a];
  assign rdata_b = mem[raddr_b];
endmodule
