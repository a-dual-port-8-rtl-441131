// stage1_table: depth-1 stage of the Phase-1 Aho-Corasick pipeline.
//
// From the root state no state matching is needed: the input byte alone
// selects the child, so this stage is a two-port SRAM with one entry per byte
// value instead of a CAM PE (paper, Sec. II). Each port reads the entry of its
// byte and registers it as the next range, i.e. the PE and rows that hold the
// children of the depth-1 state for the following byte. An entry with valid=0
// means no pattern starts with that byte.
// Timing: on a cycle where adv[p] is high the result for port p is loaded
// (or cleared when srch[p] is low: the port is clock-gated); otherwise it is
// held. Writes through we/waddr/wdata, read-back of entry waddr on rdata.
module stage1_table
  import nids_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic [N_PORT-1:0]  adv,
  input  logic [N_PORT-1:0]  srch,
  input  logic [N_PORT-1:0][7:0] ch,
  input  logic               we,
  input  logic               re,     // configuration read: port A reads entry waddr
  input  logic [7:0]         waddr,
  input  range_t             wdata,
  output range_t             rdata,
  output range_t [N_PORT-1:0] next
);
  logic [RANGE_W-1:0] rd_a, rd_b;

  dp_sram #(.DEPTH(256), .WIDTH(RANGE_W)) u_sram (
    .clk    (clk),
    .we     (we),
    .waddr  (waddr),
    .wdata  (wdata),
    .raddr_a(re ? waddr : ch[0]),
    .raddr_b(ch[1]),
    .rdata_a(rd_a),
    .rdata_b(rd_b)
  );

  assign rdata = range_t'(rd_a);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      next <= '0;
    end else begin
      if (adv[0]) next[0] <= srch[0] ? range_t'(rd_a) : '0;
      if (adv[1]) next[1] <= srch[1] ? range_t'(rd_b) : '0;
    end
  end
endmodule
