// global_controller: per-port byte counting and post-hit clock gating.
//
// Keeps, for each search port, the stream offset of the byte Phase-1 is
// about to search. When Phase-2 reports a match whose remaining part starts
// at offset P and is L bytes long, the bytes P .. P+L-1 are the suffix of a
// pattern already found; searching them again is wasted energy, so the port's
// Phase-1 search (Stage-1 and all PEs) is switched off until the stream has
// passed them (paper, Sec. II: the system is clock-gated to skip the suffix).
// Some of those bytes may already have been searched while Phase-2 worked;
// only the rest are skipped. Gating is expressed as a search enable (srch),
// not as gated clocks; with cg_en low it never gates. Also counts cycles,
// searched bytes and gated bytes.
module global_controller
  import nids_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    cg_en,
  input  logic [N_PORT-1:0]       adv,       // port advances one byte this cycle
  input  logic                    skip_valid,
  input  logic                    skip_port,
  input  logic [LEN_W-1:0]        skip_len,
  input  logic [POS_W-1:0]        skip_pos,
  output logic [N_PORT-1:0]       srch,      // search the byte this cycle
  output logic [N_PORT-1:0][POS_W-1:0] pos,  // offset of the byte at the head
  output logic [31:0]             cycles,
  output logic [31:0]             searched,
  output logic [31:0]             gated
);
  logic [N_PORT-1:0][LEN_W-1:0] skip_cnt;

  always_comb
    for (int p = 0; p < N_PORT; p++)
      srch[p] = adv[p] && (skip_cnt[p] == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pos      <= '0;
      skip_cnt <= '0;
      cycles   <= '0;
      searched <= '0;
      gated    <= '0;
    end else begin
      cycles <= cycles + 1;
      searched <= searched + 32'(srch[0]) + 32'(srch[1]);
      gated    <= gated + 32'(adv[0] && !srch[0]) + 32'(adv[1] && !srch[1]);
      for (int p = 0; p < N_PORT; p++) begin
        logic [POS_W-1:0] next_pos, end_pos, left;
        logic [LEN_W-1:0] cnt;
        next_pos = pos[p] + POS_W'(adv[p]);
        cnt      = skip_cnt[p];
        if (adv[p] && cnt != 0) cnt = cnt - 1'b1;
        if (cg_en && skip_valid && skip_port == 1'(p)) begin
          end_pos = skip_pos + POS_W'(skip_len);
          left    = end_pos - next_pos;
          // bytes still ahead of the head; negative (wrapped) means none
          if (!left[POS_W-1] && left != 0 && left > POS_W'(cnt))
            cnt = LEN_W'(left);
        end
        pos[p]      <= next_pos;
        skip_cnt[p] <= cnt;
      end
    end
  end
endmodule
