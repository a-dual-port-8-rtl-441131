// phase2_controller: runs Phase-2 searches for granted prefix matches.
//
// Takes one request at a time from the arbiter: the Phase-1 range names the
// bank and its rows, and the 20 bytes that followed the prefix are encoded
// into fixed-1s codes as the search key. The controller starts the named bank
// and waits for its done pulse two cycles later. On a hit it emits a hit
// record {port, pattern ID, offset} for the output FIFO and a skip request
// {port, length, offset} that lets the global controller clock-gate Phase-1
// over the rest of the matched pattern.
// Timing: ready is high when idle and in the cycle the running search
// finishes, so back-to-back requests start every two cycles. Only one search
// is in flight (this design's choice).
module phase2_controller
  import nids_pkg::*;
#(
  parameter int unsigned NB = N_BANK
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       req_valid,
  input  p2req_t                     req,
  input  logic                       req_port,
  output logic                       req_ready,
  // bank search interface
  output logic [NB-1:0]              bank_start,
  output logic [ROW_W-1:0]           bank_up,
  output logic [ROW_W-1:0]           bank_dn,
  output code_t [P2_CHARS-1:0]       bank_key,
  input  logic [NB-1:0]              bank_done,
  input  logic [NB-1:0]              bank_hit,
  input  logic [NB-1:0][PAT_ID_W-1:0] bank_id,
  input  logic [NB-1:0][LEN_W-1:0]   bank_len,
  // results
  output logic                       hit_valid,
  output hit_t                       hit,
  output logic                       skip_valid,
  output logic                       skip_port,
  output logic [LEN_W-1:0]           skip_len,
  output logic [POS_W-1:0]           skip_pos,
  output logic                       busy
);
  logic [$clog2(NB)-1:0] cur_bank;
  logic                  cur_port;
  logic [POS_W-1:0]      cur_pos;
  logic                  done_sel;

  for (genvar i = 0; i < P2_CHARS; i++) begin : g_enc
    fixed1s_encoder u_enc (.ch(req.win[i]), .code(bank_key[i]));
  end

  assign done_sel  = busy && bank_done[cur_bank];
  assign req_ready = !busy || done_sel;
  assign bank_up   = req.up;
  assign bank_dn   = req.dn;

  always_comb begin
    bank_start = '0;
    if (req_valid && req_ready) bank_start[req.bank[$clog2(NB)-1:0]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      cur_bank <= '0;
      cur_port <= 1'b0;
      cur_pos  <= '0;
    end else begin
      if (req_valid && req_ready) begin
        busy     <= 1'b1;
        cur_bank <= req.bank[$clog2(NB)-1:0];
        cur_port <= req_port;
        cur_pos  <= req.pos;
      end else if (done_sel) begin
        busy <= 1'b0;
      end
    end
  end

  assign hit_valid   = done_sel && bank_hit[cur_bank];
  assign hit.port    = cur_port;
  assign hit.pat_id  = bank_id[cur_bank];
  assign hit.offset  = cur_pos;
  assign skip_valid  = hit_valid;
  assign skip_port   = cur_port;
  assign skip_len    = bank_len[cur_bank];
  assign skip_pos    = cur_pos;

  a_one_bank: assert property (@(posedge clk) $onehot0(bank_start));
endmodule
