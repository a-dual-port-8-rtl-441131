// phase2_arbiter: queues Phase-1 prefix matches for the two-cycle Phase-2.
//
// Phase-1 can report a prefix match on each port every cycle, Phase-2 takes
// one search every two cycles. Congestion arises when matches come in two
// consecutive cycles or on both ports at once (paper, Sec. III). Each port
// has a queue of QDEPTH requests; whenever the controller is ready the
// arbiter grants the oldest request of port A, and port B only when port A's
// queue is empty (port A has priority). A request arriving at a full queue is
// dropped and reported on `overflow`. `same_cycle` and `back_to_back` pulse
// for the two congestion cases. The queue depth and the drop policy are this
// design's choices. Grant is a valid/ready handshake: gnt_valid with
// gnt_ready pops the request.
module phase2_arbiter
  import nids_pkg::*;
#(
  parameter int unsigned QDEPTH = 2
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic   [N_PORT-1:0]     req_valid,
  input  p2req_t [N_PORT-1:0]     req,
  output logic                    gnt_valid,
  output p2req_t                  gnt,
  output logic                    gnt_port,
  input  logic                    gnt_ready,
  output logic   [N_PORT-1:0]     overflow,
  output logic                    same_cycle,
  output logic                    back_to_back
);
  localparam int unsigned CW = $clog2(QDEPTH + 1);

  p2req_t [N_PORT-1:0][QDEPTH-1:0] q;
  logic   [N_PORT-1:0][CW-1:0]     cnt;
  logic   [N_PORT-1:0]             pop;
  logic                            any_prev;

  assign gnt_valid = (cnt[0] != 0) || (cnt[1] != 0);
  assign gnt_port  = (cnt[0] == 0);
  assign gnt       = q[gnt_port][0];
  assign pop[0]    = gnt_valid && gnt_ready && !gnt_port;
  assign pop[1]    = gnt_valid && gnt_ready &&  gnt_port;

  always_comb begin
    for (int p = 0; p < N_PORT; p++)
      overflow[p] = req_valid[p] && !pop[p] && (cnt[p] == CW'(QDEPTH));
    same_cycle   = &req_valid;
    back_to_back = |req_valid && any_prev;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q        <= '0;
      cnt      <= '0;
      any_prev <= 1'b0;
    end else begin
      any_prev <= |req_valid;
      for (int p = 0; p < N_PORT; p++) begin
        logic [CW-1:0] n;
        n = cnt[p];
        if (pop[p]) begin
          for (int i = 0; i < QDEPTH - 1; i++) q[p][i] <= q[p][i+1];
          n = n - 1'b1;
        end
        if (req_valid[p] && !overflow[p]) begin
          q[p][n] <= req[p];
          n = n + 1'b1;
        end
        cnt[p] <= n;
      end
    end
  end

  // a granted request is always the head of a non-empty queue
  a_gnt_nonempty: assert property (@(posedge clk)
    gnt_valid |-> (cnt[gnt_port] != 0));
  // port B is never granted while port A waits
  a_prio: assert property (@(posedge clk)
    (gnt_valid && gnt_port) |-> (cnt[0] == 0));
endmodule
