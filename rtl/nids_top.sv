// nids_top: dual-port CAM-based pattern-matching engine for network
// intrusion detection (the on-chip Phase-1 and Phase-2).
//
// Two byte streams (ports A and B) are matched against a pattern library.
// Phase-1 matches the first K bytes of every pattern with a pipelined
// Aho-Corasick automaton: the Stage-1 SRAM handles depth 1, and eight CAM
// PEs, grouped into stages by the PE IDs stored in their tables, handle the
// deeper levels. Each stage keeps one live state per port and all stages take
// the same byte each cycle, so no backward (failure) transitions are stored.
// A range whose PE ID names a Phase-2 bank means a full prefix matched; the
// request, with the 20 bytes that follow, is queued by the arbiter and
// searched in the named Phase-2 wildcard CAM bank (two cycles). A Phase-2
// match is pushed to the hit FIFO for the host's Phase-3 rule checks, and the
// port's Phase-1 search is gated off for the rest of the matched pattern.
// The phases, the PE and bank counts and sizes, the router and the arbiter
// priority follow the paper; the two ports as two independent streams, the
// 20-byte input window, the configuration port and gating only the matched
// port are this design's choices.
//
// Interface:
//   in_valid/in_byte   one byte per port per cycle; search lags input by 20 bytes
//   cfg_*              table access: cfg_target 0-7 PE, 8-11 Phase-2 bank,
//                      12 Stage-1; cfg_cam selects the CAM (1) or SRAM (0);
//                      cfg_wdata carries raw fixed-1s codes for CAMs, a
//                      range_t for PE/Stage-1 SRAMs, {pattern ID, length} for
//                      Phase-2 SRAMs (all right-aligned); cfg_rdata reads the
//                      addressed entry combinationally (cfg_re for Stage-1).
//   hit_*              output FIFO of hit_t records
//   event outputs      one-cycle pulses and counters for monitoring
module nids_top
  import nids_pkg::*;
(
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [N_PORT-1:0]            in_valid,
  input  logic [N_PORT-1:0][7:0]       in_byte,
  input  logic                         cg_en,
  input  logic                         cfg_we,
  input  logic                         cfg_re,
  input  logic [3:0]                   cfg_target,
  input  logic                         cfg_cam,
  input  logic [7:0]                   cfg_addr,
  input  logic [P2_CHARS*CODE_W-1:0]   cfg_wdata,
  output logic [P2_CHARS*CODE_W-1:0]   cfg_rdata,
  input  logic                         hit_pop,
  output logic                         hit_valid,
  output hit_t                         hit_data,
  output logic                         hit_full,
  output logic [15:0]                  hit_dropped,
  output logic                         p2_busy,
  output logic                         ev_p2_request,
  output logic                         ev_same_cycle,
  output logic                         ev_back_to_back,
  output logic [N_PORT-1:0]            ev_overflow,
  output logic [N_PORT-1:0]            ev_conflict,
  output logic [31:0]                  cnt_cycles,
  output logic [31:0]                  cnt_searched,
  output logic [31:0]                  cnt_gated
);
  // ---------------- input windows and global control ----------------
  logic [N_PORT-1:0]                    adv, srch;
  logic [N_PORT-1:0][P2_CHARS-1:0][7:0] win;
  logic [N_PORT-1:0][POS_W-1:0]         pos;
  code_t [N_PORT-1:0]                   key;
  logic                                 skip_valid, skip_port;
  logic [LEN_W-1:0]                     skip_len;
  logic [POS_W-1:0]                     skip_pos;

  for (genvar p = 0; p < N_PORT; p++) begin : g_port
    stream_window #(.DEPTH(P2_CHARS)) u_win (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid[p]), .in_byte(in_byte[p]),
      .adv(adv[p]), .win(win[p])
    );
    fixed1s_encoder u_enc (.ch(win[p][0]), .code(key[p]));
  end

  global_controller u_gctl (
    .clk(clk), .rst_n(rst_n), .cg_en(cg_en), .adv(adv),
    .skip_valid(skip_valid), .skip_port(skip_port), .skip_len(skip_len), .skip_pos(skip_pos),
    .srch(srch), .pos(pos), .cycles(cnt_cycles), .searched(cnt_searched), .gated(cnt_gated)
  );

  // ---------------- Phase-1 ----------------
  range_t [N_PORT-1:0]             s1_next;
  range_t [N_PE-1:0][N_PORT-1:0]   pe_next, pe_rng;
  range_t [N_PORT-1:0][N_PE:0]     src;
  range_t [N_PORT-1:0]             p2_rng;
  range_t                          s1_rd;
  code_t  [N_PE-1:0]               pe_rd_code;
  range_t [N_PE-1:0]               pe_rd_range;

  stage1_table u_stage1 (
    .clk(clk), .rst_n(rst_n), .adv(adv), .srch(srch),
    .ch({win[1][0], win[0][0]}),
    .we(cfg_we && cfg_target == 4'd12), .re(cfg_re && cfg_target == 4'd12),
    .waddr(cfg_addr), .wdata(range_t'(cfg_wdata[RANGE_W-1:0])),
    .rdata(s1_rd), .next(s1_next)
  );

  for (genvar k = 0; k < N_PE; k++) begin : g_pe
    phase1_pe #(.ROWS(PE_ROWS)) u_pe (
      .clk(clk), .rst_n(rst_n), .adv(adv), .srch(srch),
      .rng(pe_rng[k]), .key(key),
      .cam_we (cfg_we && cfg_target == 4'(k) &&  cfg_cam),
      .sram_we(cfg_we && cfg_target == 4'(k) && !cfg_cam),
      .waddr(cfg_addr[ROW_W-1:0]),
      .cam_wdata(cfg_wdata[CODE_W-1:0]),
      .sram_wdata(range_t'(cfg_wdata[RANGE_W-1:0])),
      .rd_code(pe_rd_code[k]), .rd_range(pe_rd_range[k]),
      .next(pe_next[k])
    );
  end

  always_comb
    for (int p = 0; p < N_PORT; p++) begin
      src[p][0] = s1_next[p];
      for (int k = 0; k < N_PE; k++) src[p][k+1] = pe_next[k][p];
    end

  global_router #(.NPE(N_PE)) u_router (
    .src(src), .pe_rng(pe_rng), .p2_rng(p2_rng), .conflict(ev_conflict)
  );

  // ---------------- Phase-2 ----------------
  logic   [N_PORT-1:0] p2_req_valid;
  p2req_t [N_PORT-1:0] p2_req;
  logic                gnt_valid, gnt_port, gnt_ready;
  p2req_t              gnt;

  // The prefix's last byte was searched at the port's previous advance, so at
  // this advance the window starts with the first byte after the prefix.
  always_comb
    for (int p = 0; p < N_PORT; p++) begin
      p2_req_valid[p] = adv[p] && p2_rng[p].valid;
      p2_req[p].bank  = 2'(p2_rng[p].id - BANK_ID0);
      p2_req[p].up    = p2_rng[p].up;
      p2_req[p].dn    = p2_rng[p].dn;
      p2_req[p].win   = win[p];
      p2_req[p].pos   = pos[p];
    end
  assign ev_p2_request = |p2_req_valid;

  phase2_arbiter #(.QDEPTH(2)) u_arb (
    .clk(clk), .rst_n(rst_n), .req_valid(p2_req_valid), .req(p2_req),
    .gnt_valid(gnt_valid), .gnt(gnt), .gnt_port(gnt_port), .gnt_ready(gnt_ready),
    .overflow(ev_overflow), .same_cycle(ev_same_cycle), .back_to_back(ev_back_to_back)
  );

  logic [N_BANK-1:0]                bank_start, bank_done, bank_hit;
  logic [ROW_W-1:0]                 bank_up, bank_dn;
  code_t [P2_CHARS-1:0]             bank_key;
  logic [N_BANK-1:0][PAT_ID_W-1:0]  bank_id;
  logic [N_BANK-1:0][LEN_W-1:0]     bank_len;
  code_t [N_BANK-1:0][P2_CHARS-1:0] bank_rd_key;
  logic [N_BANK-1:0][PAT_ID_W+LEN_W-1:0] bank_rd_info;
  logic                             hit_push;
  hit_t                             hit_rec;

  phase2_controller #(.NB(N_BANK)) u_p2ctl (
    .clk(clk), .rst_n(rst_n),
    .req_valid(gnt_valid), .req(gnt), .req_port(gnt_port), .req_ready(gnt_ready),
    .bank_start(bank_start), .bank_up(bank_up), .bank_dn(bank_dn), .bank_key(bank_key),
    .bank_done(bank_done), .bank_hit(bank_hit), .bank_id(bank_id), .bank_len(bank_len),
    .hit_valid(hit_push), .hit(hit_rec),
    .skip_valid(skip_valid), .skip_port(skip_port), .skip_len(skip_len), .skip_pos(skip_pos),
    .busy(p2_busy)
  );

  for (genvar b = 0; b < N_BANK; b++) begin : g_bank
    phase2_cam_bank #(.ROWS(P2_ROWS), .CHARS(P2_CHARS)) u_bank (
      .clk(clk), .rst_n(rst_n),
      .start(bank_start[b]), .up(bank_up), .dn(bank_dn), .key(bank_key),
      .done(bank_done[b]), .hit(bank_hit[b]), .pat_id(bank_id[b]), .pat_len(bank_len[b]),
      .cam_we (cfg_we && cfg_target == 4'(8 + b) &&  cfg_cam),
      .sram_we(cfg_we && cfg_target == 4'(8 + b) && !cfg_cam),
      .waddr(cfg_addr[ROW_W-1:0]),
      .cam_wdata(cfg_wdata),
      .sram_wdata(cfg_wdata[PAT_ID_W+LEN_W-1:0]),
      .rd_key(bank_rd_key[b]), .rd_info(bank_rd_info[b])
    );
  end

  hit_fifo #(.DEPTH(16)) u_fifo (
    .clk(clk), .rst_n(rst_n), .push(hit_push), .in_data(hit_rec),
    .pop(hit_pop), .out_valid(hit_valid), .out_data(hit_data),
    .full(hit_full), .dropped(hit_dropped)
  );

  // ---------------- configuration read-back ----------------
  always_comb begin
    cfg_rdata = '0;
    if (cfg_target < 4'(N_PE)) begin
      if (cfg_cam) cfg_rdata[CODE_W-1:0]  = pe_rd_code[cfg_target[2:0]];
      else         cfg_rdata[RANGE_W-1:0] = pe_rd_range[cfg_target[2:0]];
    end else if (cfg_target < 4'(8 + N_BANK)) begin
      if (cfg_cam) cfg_rdata = bank_rd_key[cfg_target[1:0]];
      else         cfg_rdata[PAT_ID_W+LEN_W-1:0] = bank_rd_info[cfg_target[1:0]];
    end else if (cfg_target == 4'd12) begin
      cfg_rdata[RANGE_W-1:0] = s1_rd;
    end
  end
endmodule
