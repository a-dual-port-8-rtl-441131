// global_router: delivers next ranges to the PEs and Phase-2 banks.
//
// Every Phase-1 source (the Stage-1 table, source 0, and PEs 0..N_PE-1,
// sources 1..N_PE) presents one registered next range per port. The router
// reads the global PE ID of each and hands the range to that PE (IDs
// 0..N_PE-1) or, for IDs naming a Phase-2 bank (BANK_ID0 and up), to the
// Phase-2 request path: a range that reaches Phase-2 means the whole Phase-1
// prefix has matched. This is what makes the pipeline depth reconfigurable:
// the stage count and the PEs per stage are set only by the IDs written in the
// tables. Each depth has at most one live state per port, so a target
// normally has one source; if two sources name the same target on one port
// the lower source index wins and `conflict` flags it (this design's choice).
// Combinational.
module global_router
  import nids_pkg::*;
#(
  parameter int unsigned NPE = N_PE
) (
  input  range_t [N_PORT-1:0][NPE:0]    src,
  output range_t [NPE-1:0][N_PORT-1:0]  pe_rng,
  output range_t [N_PORT-1:0]           p2_rng,
  output logic   [N_PORT-1:0]           conflict
);
  always_comb begin
    pe_rng   = '0;
    p2_rng   = '0;
    conflict = '0;
    for (int p = 0; p < N_PORT; p++) begin
      for (int s = NPE; s >= 0; s--) begin
        if (src[p][s].valid) begin
          if (src[p][s].id < ID_W'(NPE)) begin
            if (pe_rng[src[p][s].id][p].valid) conflict[p] = 1'b1;
            pe_rng[src[p][s].id][p] = src[p][s];
          end else if (src[p][s].id >= BANK_ID0 && src[p][s].id < BANK_ID0 + ID_W'(N_BANK)) begin
            if (p2_rng[p].valid) conflict[p] = 1'b1;
            p2_rng[p] = src[p][s];
          end
        end
      end
    end
  end
endmodule
